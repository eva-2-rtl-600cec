// eva2_top: the EVA^2 unit ("embedded vision accelerator accelerator").
//
// EVA^2 lets a CNN accelerator skip the prefix of a network on most video
// frames. Each incoming frame is compared with the last key frame by
// receptive-field block motion estimation (diff tile producer + consumer).
// The sum of the best-match errors decides the frame's kind:
//   * key frame: the pixel buffers swap roles (the new frame becomes the key
//     frame), the pixels are sent to the layer accelerators, which run the
//     whole CNN and return the target-layer activation; EVA^2 stores it
//     run-length encoded in the sparse key frame activation buffer;
//   * predicted frame: the warp engine moves the stored activation along the
//     motion vectors (bilinear interpolation) and sends it to the layer
//     accelerators, which then run only the CNN suffix.
// The first frame after reset is always a key frame. In memoization mode
// (cfg_memoize) predicted frames reuse the stored activation unwarped.
//
// Block structure, the two pixel buffers with their role muxes, the
// pixel/activation output mux and the key/predicted control output follow
// the paper's architecture figure. The frame-level sequencing below (load,
// estimate, decide, then send) and all handshakes are this design's choices.
//
// Interfaces
//   pix_in_*  : new frame, raster order, PIX_PER_WORD pixels per word, one
//               word per accepted cycle (valid/ready).
//   frame_*   : one pulse per frame with its kind and its RFBME error total.
//   out_*     : to the layer accelerators; pixel words of a key frame
//               (out_is_act = 0) or warped activation entries of a
//               predicted frame (out_is_act = 1). No back-pressure: the
//               accelerators take one beat per cycle.
//   kact_*    : key frame target activation coming back from the layer
//               accelerators, run-length encoded (see eva2_pkg).
//   frame_done: pulse when a frame is completely handled.
module eva2_top
  import eva2_pkg::*;
#(
  parameter int FRAME_W          = FRAME_W_D,
  parameter int FRAME_H          = FRAME_H_D,
  parameter int PIX_PER_WORD     = PIX_PER_WORD_D,
  parameter int TILE             = TILE_D,
  parameter int SEARCH_RADIUS    = SEARCH_RADIUS_D,
  parameter int SEARCH_STRIDE    = SEARCH_STRIDE_D,
  parameter int RF_TILES_MAX     = RF_TILES_D,
  parameter int CHANNELS         = CHANNELS_D,
  parameter int FRAC_BITS        = FRAC_BITS_D,
  parameter int ENTRIES_PER_BANK = ENTRIES_PER_BANK_D,
  localparam int NTX     = FRAME_W / TILE,
  localparam int NTY     = FRAME_H / TILE,
  localparam int NOFF1   = 2 * SEARCH_RADIUS / SEARCH_STRIDE + 1,
  localparam int NOFF    = NOFF1 * NOFF1,
  localparam int WORDS   = FRAME_W * FRAME_H / PIX_PER_WORD,
  localparam int AW      = $clog2(WORDS),
  localparam int WORD_W  = PIX_W * PIX_PER_WORD,
  localparam int DIFF_W  = $clog2(TILE * TILE * (2**PIX_W - 1) + 1),
  localparam int SUM_W   = $clog2(RF_TILES_MAX * RF_TILES_MAX * (TILE * TILE * (2**PIX_W - 1)) + 1),
  localparam int TOTAL_W = SUM_W + $clog2(NTX * NTY),
  localparam int KW      = $clog2(RF_TILES_MAX + 1),
  localparam int HW      = (NTX + 1) / 2,
  localparam int HH      = (NTY + 1) / 2,
  localparam int PA_W    = $clog2(HW * HH),
  localparam int EA_W    = $clog2(ENTRIES_PER_BANK),
  localparam int CNT_W   = $clog2(CHANNELS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic [TOTAL_W-1:0] cfg_threshold,
  input  logic               cfg_memoize,
  input  logic               cfg_force_key,
  input  logic [KW-1:0]      cfg_rf_tiles,
  input  logic [KW-1:0]      cfg_pad_tiles,
  // new frame pixels
  input  logic               pix_in_valid,
  output logic               pix_in_ready,
  input  logic [WORD_W-1:0]  pix_in_data,
  // key or predicted control signal
  output logic               frame_valid,
  output frame_kind_e        frame_kind,
  output logic [TOTAL_W-1:0] frame_err,
  // pixels or warped activations to the layer accelerators
  output logic               out_valid,
  output logic               out_is_act,
  output logic [WORD_W-1:0]  out_pixels,
  output rle_entry_t         out_act,
  // new key frame activations from the layer accelerators
  input  logic               kact_valid,
  output logic               kact_ready,
  input  rle_entry_t         kact_entry,
  // status
  output logic               frame_done,
  output logic               act_overflow
);
  typedef enum logic [3:0] {
    T_LOAD, T_PRODUCE, T_CONSUME, T_DECIDE, T_SENDPIX, T_RECVACT, T_WARP
  } tstate_e;
  tstate_e state;

  logic          key_sel;      // index of the pixel buffer holding the key frame
  logic          have_key;
  logic [AW-1:0] wcount;
  logic [AW:0]   scount;       // send-pixels address counter
  logic          s_pend;

  // ---------------- pixel buffers and role muxes ----------------
  logic              pb_we [2];
  logic [AW-1:0]     pb_waddr;
  logic              pb_re [2];
  logic [AW-1:0]     pb_raddr [2];
  logic [WORD_W-1:0] pb_rdata [2];

  for (genvar i = 0; i < 2; i++) begin : g_pb
    pixel_buffer #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .PIX_PER_WORD(PIX_PER_WORD)) u_pb (
      .clk, .we(pb_we[i]), .waddr(pb_waddr), .wdata(pix_in_data),
      .re(pb_re[i]), .raddr(pb_raddr[i]), .rdata(pb_rdata[i])
    );
  end

  logic              prod_new_re, prod_key_re;
  logic [AW-1:0]     prod_new_raddr, prod_key_raddr;
  logic [WORD_W-1:0] new_rdata, key_rdata;

  assign pix_in_ready = (state == T_LOAD);
  assign pb_waddr     = wcount;
  always_comb begin
    for (int i = 0; i < 2; i++) begin
      automatic logic is_key = (key_sel == 1'(i));
      pb_we[i]    = pix_in_valid && pix_in_ready && !is_key;
      if (is_key) begin
        pb_re[i]    = (state == T_SENDPIX) ? (scount < (AW+1)'(WORDS)) : prod_key_re;
        pb_raddr[i] = (state == T_SENDPIX) ? scount[AW-1:0] : prod_key_raddr;
      end else begin
        pb_re[i]    = prod_new_re;
        pb_raddr[i] = prod_new_raddr;
      end
    end
    new_rdata = pb_rdata[~key_sel];
    key_rdata = pb_rdata[key_sel];
  end

  // ---------------- motion estimation ----------------
  logic prod_start, prod_busy, prod_done;
  logic td_valid, td_inb;
  logic [$clog2(NTX)-1:0]  td_tx;
  logic [$clog2(NTY)-1:0]  td_ty;
  logic [$clog2(NOFF)-1:0] td_off;
  logic [DIFF_W-1:0]       td_diff;

  diff_tile_producer #(
    .FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .PIX_PER_WORD(PIX_PER_WORD), .TILE(TILE),
    .SEARCH_RADIUS(SEARCH_RADIUS), .SEARCH_STRIDE(SEARCH_STRIDE)
  ) u_prod (
    .clk, .rst_n, .start(prod_start), .busy(prod_busy), .done(prod_done),
    .new_re(prod_new_re), .new_raddr(prod_new_raddr), .new_rdata,
    .key_re(prod_key_re), .key_raddr(prod_key_raddr), .key_rdata,
    .td_valid, .td_tx, .td_ty, .td_off, .td_inb, .td_diff
  );

  logic cons_start, cons_busy, cons_done;
  logic rf_valid;
  logic [$clog2(NTX)-1:0] rf_x;
  logic [$clog2(NTY)-1:0] rf_y;
  logic [SUM_W-1:0]       rf_err;
  mv_t                    rf_mv;

  diff_tile_consumer #(
    .FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .TILE(TILE), .SEARCH_RADIUS(SEARCH_RADIUS),
    .SEARCH_STRIDE(SEARCH_STRIDE), .RF_TILES_MAX(RF_TILES_MAX)
  ) u_cons (
    .clk, .rst_n, .rf_tiles(cfg_rf_tiles), .pad_tiles(cfg_pad_tiles),
    .td_valid, .td_tx, .td_ty, .td_off, .td_diff,
    .start(cons_start), .busy(cons_busy), .done(cons_done),
    .rf_valid, .rf_x, .rf_y, .rf_err, .rf_mv
  );

  // ---------------- key frame choice ----------------
  logic        kfc_decide, dec_valid;
  frame_kind_e dec_kind;

  key_frame_choice #(.ERR_W(SUM_W), .TOTAL_W(TOTAL_W)) u_kfc (
    .clk, .rst_n, .clear(prod_start), .err_valid(rf_valid), .err(rf_err),
    .decide(kfc_decide), .force_key(cfg_force_key || !have_key), .threshold(cfg_threshold),
    .dec_valid, .dec_kind, .total(frame_err)
  );

  // ---------------- sparse key frame activation buffer ----------------
  logic             ab_wr_start, ab_wr_valid, ab_wr_ready, ab_wr_done;
  logic [PA_W-1:0]  idx_raddr [4];
  logic [EA_W-1:0]  idx_start [4];
  logic [CNT_W-1:0] idx_count [4];
  logic [EA_W-1:0]  ent_raddr [4];
  rle_entry_t       ent_rdata [4];

  sparse_act_buffer #(
    .ACT_WD(NTX), .ACT_HT(NTY), .ENTRIES_PER_BANK(ENTRIES_PER_BANK), .CHANNELS(CHANNELS)
  ) u_abuf (
    .clk, .rst_n, .wr_start(ab_wr_start), .wr_valid(ab_wr_valid), .wr_entry(kact_entry),
    .wr_ready(ab_wr_ready), .wr_done(ab_wr_done), .overflow(act_overflow),
    .idx_raddr, .idx_start, .idx_count, .ent_raddr, .ent_rdata
  );

  assign kact_ready  = (state == T_RECVACT) && ab_wr_ready;
  assign ab_wr_valid = kact_valid && kact_ready;

  // ---------------- warp engine ----------------
  logic       warp_start, warp_busy, warp_done, warp_valid;
  rle_entry_t warp_entry;

  warp_engine #(
    .ACT_WD(NTX), .ACT_HT(NTY), .TILE(TILE), .FRAC_BITS(FRAC_BITS),
    .ENTRIES_PER_BANK(ENTRIES_PER_BANK), .CHANNELS(CHANNELS)
  ) u_warp (
    .clk, .rst_n, .memoize(cfg_memoize),
    .mv_we(rf_valid), .mv_x(rf_x), .mv_y(rf_y), .mv_in(rf_mv),
    .start(warp_start), .busy(warp_busy), .done(warp_done),
    .idx_raddr, .idx_start, .idx_count, .ent_raddr, .ent_rdata,
    .out_valid(warp_valid), .out_entry(warp_entry)
  );

  // ---------------- output mux ----------------
  always_comb begin
    out_valid  = s_pend || warp_valid;
    out_is_act = !s_pend;
    out_pixels = key_rdata;
    out_act    = warp_entry;
  end

  // ---------------- frame sequencing ----------------
  always_comb begin
    prod_start  = (state == T_LOAD) && pix_in_valid && pix_in_ready &&
                  (wcount == AW'(WORDS - 1)) && have_key;
    cons_start  = (state == T_PRODUCE) && prod_done;
    kfc_decide  = (state == T_CONSUME) && cons_done;
    warp_start  = (state == T_DECIDE) && dec_valid && (dec_kind == FRAME_PREDICTED);
    ab_wr_start = (state == T_SENDPIX) && (scount == (AW+1)'(WORDS)) && !s_pend;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_LOAD; key_sel <= 1'b0; have_key <= 1'b0;
      wcount <= '0; scount <= '0; s_pend <= 1'b0;
      frame_valid <= 1'b0; frame_kind <= FRAME_KEY; frame_done <= 1'b0;
    end else begin
      frame_valid <= 1'b0;
      frame_done  <= 1'b0;
      s_pend      <= 1'b0;
      unique case (state)
        T_LOAD: if (pix_in_valid) begin
          if (wcount == AW'(WORDS - 1)) begin
            wcount <= '0;
            if (have_key) state <= T_PRODUCE;
            else begin
              // first frame: key frame without motion estimation
              frame_valid <= 1'b1;
              frame_kind  <= FRAME_KEY;
              key_sel     <= ~key_sel;
              scount      <= '0;
              state       <= T_SENDPIX;
            end
          end else begin
            wcount <= wcount + 1'b1;
          end
        end
        T_PRODUCE: if (prod_done) state <= T_CONSUME;
        T_CONSUME: if (cons_done) state <= T_DECIDE;
        T_DECIDE: if (dec_valid) begin
          frame_valid <= 1'b1;
          frame_kind  <= dec_kind;
          if (dec_kind == FRAME_KEY) begin
            key_sel <= ~key_sel;
            scount  <= '0;
            state   <= T_SENDPIX;
          end else begin
            state <= T_WARP;
          end
        end
        T_SENDPIX: begin
          if (scount < (AW+1)'(WORDS)) begin
            scount <= scount + 1'b1;
            s_pend <= 1'b1;
          end else if (!s_pend) begin
            state <= T_RECVACT;
          end
        end
        T_RECVACT: if (ab_wr_done) begin
          have_key   <= 1'b1;
          frame_done <= 1'b1;
          state      <= T_LOAD;
        end
        T_WARP: if (warp_done) begin
          frame_done <= 1'b1;
          state      <= T_LOAD;
        end
        default: state <= T_LOAD;
      endcase
    end
  end

  // the two output sources never overlap
  always @(posedge clk) begin
    if (rst_n) assert (!(s_pend && warp_valid)) else $error("output mux conflict");
  end
endmodule
