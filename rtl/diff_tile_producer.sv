// diff_tile_producer: first stage of receptive-field block motion estimation.
//
// The input frame is cut into TILE x TILE tiles (the tile edge equals the
// stride of the receptive field of the target layer). For every tile, in
// raster order, the producer first copies the tile out of the new-frame
// pixel buffer into a local tile register, then walks an exhaustive search
// grid in the key frame: all offsets (dx, dy) that are multiples of
// SEARCH_STRIDE and lie within +-SEARCH_RADIUS, dy outer, dx inner. For each
// in-bounds offset it reads the displaced tile from the key-frame buffer one
// word (PIX_PER_WORD pixels) per cycle and sums the absolute pixel
// differences with an adder tree. This search order and tile/offset loop
// follow the paper; the word-per-cycle datapath is this design's choice.
//
// Output: one tile difference per (tile, offset) on td_*, td_off being the
// offset index oy*NOFF1+ox. An offset whose displaced tile leaves the frame
// is not searched: it is reported in one cycle with td_inb=0 and diff 0 (the
// consumer never uses such offsets).
//
// Timing: with TW = TILE*TILE/PIX_PER_WORD words per tile, each tile takes
// TW + 1 cycles to load, then TW + 3 cycles per in-bounds offset and 2 per
// out-of-bounds offset; done follows one cycle after the last tile. Pixel
// buffers have one cycle of read latency.
module diff_tile_producer
  import eva2_pkg::*;
#(
  parameter int FRAME_W       = FRAME_W_D,
  parameter int FRAME_H       = FRAME_H_D,
  parameter int PIX_PER_WORD  = PIX_PER_WORD_D,
  parameter int TILE          = TILE_D,
  parameter int SEARCH_RADIUS = SEARCH_RADIUS_D,
  parameter int SEARCH_STRIDE = SEARCH_STRIDE_D,
  localparam int NTX    = FRAME_W / TILE,
  localparam int NTY    = FRAME_H / TILE,
  localparam int NOFF1  = 2 * SEARCH_RADIUS / SEARCH_STRIDE + 1,
  localparam int NOFF   = NOFF1 * NOFF1,
  localparam int WORDS  = FRAME_W * FRAME_H / PIX_PER_WORD,
  localparam int AW     = $clog2(WORDS),
  localparam int WORD_W = PIX_W * PIX_PER_WORD,
  localparam int WPR    = TILE / PIX_PER_WORD,          // words per tile row
  localparam int TW     = TILE * WPR,                   // words per tile
  localparam int DIFF_W = $clog2(TILE * TILE * (2**PIX_W - 1) + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,       // one-cycle pulse at the end of the frame
  // read port of the new-frame pixel buffer
  output logic                     new_re,
  output logic [AW-1:0]            new_raddr,
  input  logic [WORD_W-1:0]        new_rdata,
  // read port of the key-frame pixel buffer
  output logic                     key_re,
  output logic [AW-1:0]            key_raddr,
  input  logic [WORD_W-1:0]        key_rdata,
  // tile difference stream
  output logic                     td_valid,
  output logic [$clog2(NTX)-1:0]   td_tx,
  output logic [$clog2(NTY)-1:0]   td_ty,
  output logic [$clog2(NOFF)-1:0]  td_off,
  output logic                     td_inb,
  output logic [DIFF_W-1:0]        td_diff
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_OFF, S_SEARCH, S_EMIT} state_e;
  state_e state;

  logic [$clog2(NTX)-1:0]  tx;
  logic [$clog2(NTY)-1:0]  ty;
  logic [$clog2(NOFF1)-1:0] ox, oy;
  logic [$clog2(TW+1)-1:0] issue;      // words issued for the current tile read
  logic                    rd_pend;    // a read issued last cycle
  logic [$clog2(TW)-1:0]   rd_idx;     // word index of that read
  logic [WORD_W-1:0]       tile_q [TW];
  logic [DIFF_W-1:0]       acc;

  // displaced tile origin for the current offset
  int signed dx, dy, kx0, ky0;
  logic      inb;
  always_comb begin
    dx  = int'(ox) * SEARCH_STRIDE - SEARCH_RADIUS;
    dy  = int'(oy) * SEARCH_STRIDE - SEARCH_RADIUS;
    kx0 = int'(tx) * TILE + dx;
    ky0 = int'(ty) * TILE + dy;
    inb = (kx0 >= 0) && (kx0 + TILE <= FRAME_W) && (ky0 >= 0) && (ky0 + TILE <= FRAME_H);
  end

  // word address of word `i` of a tile whose origin is (x0, y0)
  function automatic logic [AW-1:0] word_addr(int x0, int y0, int i);
    int r, w;
    r = i / WPR;
    w = i % WPR;
    return AW'(((y0 + r) * FRAME_W + x0) / PIX_PER_WORD + w);
  endfunction

  // adder tree: sum of |a - b| over the pixels of one word
  function automatic logic [DIFF_W-1:0] word_sad(logic [WORD_W-1:0] a, logic [WORD_W-1:0] b);
    logic [DIFF_W-1:0] s;
    logic [PIX_W-1:0]  pa, pb;
    s = '0;
    for (int p = 0; p < PIX_PER_WORD; p++) begin
      pa = a[p*PIX_W +: PIX_W];
      pb = b[p*PIX_W +: PIX_W];
      s  = s + DIFF_W'((pa > pb) ? pa - pb : pb - pa);
    end
    return s;
  endfunction

  always_comb begin
    new_re    = (state == S_LOAD) && (issue < TW);
    new_raddr = word_addr(int'(tx) * TILE, int'(ty) * TILE, int'(issue));
    key_re    = (state == S_SEARCH) && (issue < TW);
    key_raddr = word_addr(kx0, ky0, int'(issue));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      tx <= '0; ty <= '0; ox <= '0; oy <= '0;
      issue    <= '0;
      rd_pend  <= 1'b0;
      rd_idx   <= '0;
      acc      <= '0;
      done     <= 1'b0;
      td_valid <= 1'b0;
      td_tx <= '0; td_ty <= '0; td_off <= '0; td_inb <= 1'b0; td_diff <= '0;
    end else begin
      done     <= 1'b0;
      td_valid <= 1'b0;
      rd_pend  <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tx <= '0; ty <= '0; issue <= '0;
          state <= S_LOAD;
        end
        // copy the new-frame tile into tile_q
        S_LOAD: begin
          if (issue < TW) begin
            issue   <= issue + 1'b1;
            rd_pend <= 1'b1;
            rd_idx  <= $clog2(TW)'(issue);
          end
          if (rd_pend) tile_q[rd_idx] <= new_rdata;
          if (rd_pend && rd_idx == $clog2(TW)'(TW - 1)) begin
            ox <= '0; oy <= '0;
            state <= S_OFF;
          end
        end
        // start one search offset, or report it as out of bounds
        S_OFF: begin
          if (inb) begin
            issue <= '0;
            acc   <= '0;
            state <= S_SEARCH;
          end else begin
            td_valid <= 1'b1;
            td_tx <= tx; td_ty <= ty;
            td_off <= $clog2(NOFF)'(int'(oy) * NOFF1 + int'(ox));
            td_inb  <= 1'b0;
            td_diff <= '0;
            state   <= S_EMIT;
          end
        end
        S_SEARCH: begin
          if (issue < TW) begin
            issue   <= issue + 1'b1;
            rd_pend <= 1'b1;
            rd_idx  <= $clog2(TW)'(issue);
          end
          if (rd_pend) acc <= acc + word_sad(tile_q[rd_idx], key_rdata);
          if (rd_pend && rd_idx == $clog2(TW)'(TW - 1)) begin
            td_valid <= 1'b1;
            td_tx <= tx; td_ty <= ty;
            td_off <= $clog2(NOFF)'(int'(oy) * NOFF1 + int'(ox));
            td_inb  <= 1'b1;
            td_diff <= acc + word_sad(tile_q[rd_idx], key_rdata);
            state   <= S_EMIT;
          end
        end
        // advance offset / tile / frame
        default: begin
          if (int'(ox) < NOFF1 - 1) begin
            ox <= ox + 1'b1;
            state <= S_OFF;
          end else if (int'(oy) < NOFF1 - 1) begin
            ox <= '0;
            oy <= oy + 1'b1;
            state <= S_OFF;
          end else begin
            issue <= '0;
            if (int'(tx) < NTX - 1) begin
              tx <= tx + 1'b1;
              state <= S_LOAD;
            end else if (int'(ty) < NTY - 1) begin
              tx <= '0;
              ty <= ty + 1'b1;
              state <= S_LOAD;
            end else begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
      endcase
    end
  end

  initial begin
    assert (TILE % PIX_PER_WORD == 0 && SEARCH_STRIDE % PIX_PER_WORD == 0)
      else $error("TILE and SEARCH_STRIDE must be multiples of PIX_PER_WORD");
    assert (2 * SEARCH_RADIUS % SEARCH_STRIDE == 0)
      else $error("SEARCH_RADIUS must be a multiple of SEARCH_STRIDE/2");
  end
endmodule
