// diff_tile_consumer: second stage of receptive-field block motion estimation.
//
// The producer's tile differences are written into the tile memory, organised
// as NTY banks (one per tile row) so that one read returns a whole column of
// tiles for one search offset. Once the frame's tiles are in, the consumer
// slides a receptive-field window (rf_tiles x rf_tiles tiles, starting
// pad_tiles tiles up and left of the field's own tile, clipped to the frame)
// along each row of fields. Per field and offset it reads the column entering
// the window and the column leaving it, sums each with an adder tree over the
// rows inside the window, and updates the field sum fetched from the
// past-sum memory: sum = past + new column - old column. The first steps of a
// row (the window still left of the frame) only fill the past-sum memory.
// Every field sum at an offset whose fields' pixels all lie inside the key
// frame is compared with the single-entry min-check register; after the last
// offset the field's minimum difference and its offset (the motion vector,
// in pixels) are emitted. Ties keep the earlier offset, except that the zero
// offset wins any tie.
//
// What follows the paper: tile memory, past-sum memory, column adder trees,
// add-new/subtract-old update, min-check. This design's choices: the
// consumer starts after the producer has delivered the whole frame (the
// paper streams), fields are indexed by their tile (one field per tile), and
// the loop order is field row, field column, offset.
//
// Timing: start -> done takes NTY*(NTX + rf_tiles - pad_tiles - 1)*NOFF + 2
// cycles; one (field, offset) pair per cycle through a two-stage pipeline
// (registered memory read, then add/compare).
module diff_tile_consumer
  import eva2_pkg::*;
#(
  parameter int FRAME_W       = FRAME_W_D,
  parameter int FRAME_H       = FRAME_H_D,
  parameter int TILE          = TILE_D,
  parameter int SEARCH_RADIUS = SEARCH_RADIUS_D,
  parameter int SEARCH_STRIDE = SEARCH_STRIDE_D,
  parameter int RF_TILES_MAX  = RF_TILES_D,
  localparam int NTX    = FRAME_W / TILE,
  localparam int NTY    = FRAME_H / TILE,
  localparam int NOFF1  = 2 * SEARCH_RADIUS / SEARCH_STRIDE + 1,
  localparam int NOFF   = NOFF1 * NOFF1,
  localparam int DIFF_W = $clog2(TILE * TILE * (2**PIX_W - 1) + 1),
  localparam int SUM_W  = $clog2(RF_TILES_MAX * RF_TILES_MAX * (TILE * TILE * (2**PIX_W - 1)) + 1),
  localparam int KW     = $clog2(RF_TILES_MAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [KW-1:0]           rf_tiles,   // receptive field edge in tiles (< = RF_TILES_MAX)
  input  logic [KW-1:0]           pad_tiles,  // padding in tiles (< rf_tiles)
  // tile difference stream from the producer (tile memory write port)
  input  logic                    td_valid,
  input  logic [$clog2(NTX)-1:0]  td_tx,
  input  logic [$clog2(NTY)-1:0]  td_ty,
  input  logic [$clog2(NOFF)-1:0] td_off,
  input  logic [DIFF_W-1:0]       td_diff,
  // control
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // one result per receptive field, raster order
  output logic                    rf_valid,
  output logic [$clog2(NTX)-1:0]  rf_x,
  output logic [$clog2(NTY)-1:0]  rf_y,
  output logic [SUM_W-1:0]        rf_err,
  output mv_t                     rf_mv
);
  localparam int CENTER = (NOFF - 1) / 2;

  // ---------------- memories ----------------
  logic [DIFF_W-1:0] tile_mem [NTY][NTX*NOFF];
  logic [SUM_W-1:0]  past_sum [NOFF];

  always_ff @(posedge clk) begin
    if (td_valid) tile_mem[td_ty][int'(td_tx) * NOFF + int'(td_off)] <= td_diff;
  end

  // ---------------- stage 0: loop counters ----------------
  logic              run;
  int signed         x, y;           // field column (may be negative while warming up), row
  logic [$clog2(NOFF)-1:0] o;
  int signed         x_first;

  assign x_first = int'(pad_tiles) - int'(rf_tiles) + 1;

  function automatic int signed off_dx(int oi);
    return (oi % NOFF1) * SEARCH_STRIDE - SEARCH_RADIUS;
  endfunction
  function automatic int signed off_dy(int oi);
    return (oi / NOFF1) * SEARCH_STRIDE - SEARCH_RADIUS;
  endfunction

  // columns entering and leaving the window, and field validity at offset o
  int signed cn, co, c_lo, c_hi, r_lo, r_hi;
  logic      s0_valid_off;
  always_comb begin
    cn   = x - int'(pad_tiles) + int'(rf_tiles) - 1;
    co   = x - int'(pad_tiles) - 1;
    c_lo = (x - int'(pad_tiles) < 0) ? 0 : x - int'(pad_tiles);
    c_hi = (cn > NTX - 1) ? NTX - 1 : cn;
    r_lo = (y - int'(pad_tiles) < 0) ? 0 : y - int'(pad_tiles);
    r_hi = (y - int'(pad_tiles) + int'(rf_tiles) - 1 > NTY - 1) ? NTY - 1
           : y - int'(pad_tiles) + int'(rf_tiles) - 1;
    s0_valid_off = (c_lo * TILE + off_dx(int'(o)) >= 0) &&
                   ((c_hi + 1) * TILE + off_dx(int'(o)) <= FRAME_W) &&
                   (r_lo * TILE + off_dy(int'(o)) >= 0) &&
                   ((r_hi + 1) * TILE + off_dy(int'(o)) <= FRAME_H);
  end

  // ---------------- stage 1 registers ----------------
  logic              s1_v, s1_first, s1_emit, s1_last_off, s1_valid_off;
  logic              s1_new_ok, s1_old_ok;
  logic [NTY-1:0]    s1_rowmask;
  logic [DIFF_W-1:0] s1_new_col [NTY];
  logic [DIFF_W-1:0] s1_old_col [NTY];
  logic [SUM_W-1:0]  s1_past;
  logic [$clog2(NOFF)-1:0] s1_o;
  logic [$clog2(NTX)-1:0]  s1_x;
  logic [$clog2(NTY)-1:0]  s1_y;

  always_ff @(posedge clk) begin
    for (int r = 0; r < NTY; r++) begin
      s1_new_col[r] <= tile_mem[r][((cn >= 0 && cn < NTX) ? cn : 0) * NOFF + int'(o)];
      s1_old_col[r] <= tile_mem[r][((co >= 0 && co < NTX) ? co : 0) * NOFF + int'(o)];
    end
    s1_past <= past_sum[o];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; x <= 0; y <= 0; o <= '0;
      s1_v <= 1'b0; s1_first <= 1'b0; s1_emit <= 1'b0; s1_last_off <= 1'b0;
      s1_valid_off <= 1'b0; s1_new_ok <= 1'b0; s1_old_ok <= 1'b0; s1_rowmask <= '0;
      s1_o <= '0; s1_x <= '0; s1_y <= '0;
    end else begin
      s1_v <= run;
      if (run) begin
        s1_first     <= (x == x_first);
        s1_emit      <= (x >= 0);
        s1_last_off  <= (int'(o) == NOFF - 1);
        s1_valid_off <= s0_valid_off;
        s1_new_ok    <= (cn >= 0) && (cn < NTX);
        s1_old_ok    <= (co >= 0) && (co < NTX);
        for (int r = 0; r < NTY; r++) s1_rowmask[r] <= (r >= r_lo) && (r <= r_hi);
        s1_o <= o;
        s1_x <= $clog2(NTX)'((x < 0) ? 0 : x);
        s1_y <= $clog2(NTY)'(y);
        // advance: offset, then field column, then field row
        if (int'(o) < NOFF - 1) o <= o + 1'b1;
        else begin
          o <= '0;
          if (x < NTX - 1) x <= x + 1;
          else begin
            x <= x_first;
            if (y < NTY - 1) y <= y + 1;
            else run <= 1'b0;
          end
        end
      end else if (start) begin
        run <= 1'b1; x <= x_first; y <= 0; o <= '0;
      end
    end
  end

  // ---------------- stage 1: adder trees, update, min-check ----------------
  logic [SUM_W-1:0] new_sum, old_sum, field_sum;
  always_comb begin
    new_sum = '0;
    old_sum = '0;
    for (int r = 0; r < NTY; r++) begin
      if (s1_rowmask[r] && s1_new_ok) new_sum = new_sum + SUM_W'(s1_new_col[r]);
      if (s1_rowmask[r] && s1_old_ok) old_sum = old_sum + SUM_W'(s1_old_col[r]);
    end
    field_sum = (s1_first ? '0 : s1_past) - old_sum + new_sum;
  end

  always_ff @(posedge clk) begin
    if (s1_v) past_sum[s1_o] <= field_sum;
  end

  logic [SUM_W-1:0]        min_err;
  logic [$clog2(NOFF)-1:0] min_off;
  logic                    min_any;
  logic                    take;
  logic [SUM_W-1:0]        best_err;
  logic [$clog2(NOFF)-1:0] best_off;
  logic                    pipe_busy;

  always_comb begin
    // the register holds a value only from offset 1 on
    take = s1_valid_off &&
           (!min_any || int'(s1_o) == 0 || field_sum < min_err ||
            (field_sum == min_err && int'(s1_o) == CENTER));
    best_err = take ? field_sum : min_err;
    best_off = take ? s1_o : min_off;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min_err <= '0; min_off <= '0; min_any <= 1'b0;
      rf_valid <= 1'b0; rf_x <= '0; rf_y <= '0; rf_err <= '0; rf_mv <= '0;
      done <= 1'b0; pipe_busy <= 1'b0;
    end else begin
      rf_valid  <= 1'b0;
      done      <= 1'b0;
      pipe_busy <= run;
      if (s1_v && s1_emit) begin
        min_any <= (int'(s1_o) == 0) ? s1_valid_off : (min_any || s1_valid_off);
        min_err <= best_err;
        min_off <= best_off;
        if (s1_last_off) begin
          rf_valid <= 1'b1;
          rf_x     <= s1_x;
          rf_y     <= s1_y;
          rf_err   <= best_err;
          rf_mv.dx <= 8'(off_dx(int'(best_off)));
          rf_mv.dy <= 8'(off_dy(int'(best_off)));
        end
      end
      if (pipe_busy && !run) done <= 1'b1;
    end
  end

  assign busy = run || pipe_busy;

  initial begin
    assert (NOFF >= 3) else $error("search grid too small for the past-sum pipeline");
  end
endmodule
