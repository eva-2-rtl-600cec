// warp_engine: motion compensation of the stored key frame activation.
//
// For every target-layer position (x, y), raster order, the engine takes the
// receptive field's motion vector (dx, dy) in input pixels, converts it to
// activation units (divide by TILE, the layer stride) with FRAC_BITS
// fraction bits, and locates the source point (x + dx/TILE, y + dy/TILE) in
// the key activation. (RFBME reports where in the key frame the new block
// was found, so the new activation at x is the old one at x + d.) The
// integer part selects a 2x2 neighbourhood; the four positions are decoded
// by four sparsity decoder lanes, SDL_ab at (ix+a, iy+b). All lanes walk
// their channel lists together: the min unit gives the number of channels
// that are zero in all four, every lane skips them, lanes whose next
// non-zero channel is the current one supply their value and the others
// supply 0. The bilinear interpolator weights the four values with the
// fraction bits (u, v). Lanes that fall outside the activation are inactive
// and contribute 0. In memoization mode the motion vectors are ignored
// (treated as zero), which copies the key activation unchanged.
//
// Output: the warped activation, run-length encoded in the same format as
// the buffer's input: per position, entries {gap, value, last}; a position
// whose four neighbours are all empty yields one {0, 0, last=1} entry.
//
// Follows the paper: motion vector memory feeding the warp, four SDLs with
// a shared min unit skipping common zeros, bilinear interpolator. This
// design's choices: bank crossbar, fetch scheduling, edge handling,
// memoization as a mode bit, the output format.
//
// Timing: start -> done; per position 3 set-up cycles plus one cycle per
// output channel (union of the four lanes' non-zero channels) when the
// FIFOs keep up; output trails the lanes by the interpolator's 2 cycles.
module warp_engine
  import eva2_pkg::*;
#(
  parameter int ACT_WD           = FRAME_W_D / TILE_D,
  parameter int ACT_HT           = FRAME_H_D / TILE_D,
  parameter int TILE             = TILE_D,
  parameter int FRAC_BITS        = FRAC_BITS_D,
  parameter int ENTRIES_PER_BANK = ENTRIES_PER_BANK_D,
  parameter int CHANNELS         = CHANNELS_D,
  parameter int FIFO_DEPTH       = 4,
  localparam int HW    = (ACT_WD + 1) / 2,
  localparam int HH    = (ACT_HT + 1) / 2,
  localparam int PA_W  = $clog2(HW * HH),
  localparam int EA_W  = $clog2(ENTRIES_PER_BANK),
  localparam int CNT_W = $clog2(CHANNELS + 1),
  localparam int XW    = $clog2(ACT_WD),
  localparam int YW    = $clog2(ACT_HT),
  localparam int LOG_TILE = $clog2(TILE)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             memoize,
  // motion vector memory write port (from the diff tile consumer)
  input  logic             mv_we,
  input  logic [XW-1:0]    mv_x,
  input  logic [YW-1:0]    mv_y,
  input  mv_t              mv_in,
  // control
  input  logic             start,
  output logic             busy,
  output logic             done,
  // sparse activation buffer read ports, one per bank
  output logic [PA_W-1:0]  idx_raddr [4],
  input  logic [EA_W-1:0]  idx_start [4],
  input  logic [CNT_W-1:0] idx_count [4],
  output logic [EA_W-1:0]  ent_raddr [4],
  input  rle_entry_t       ent_rdata [4],
  // warped activation output (to the layer accelerators)
  output logic             out_valid,
  output rle_entry_t       out_entry
);
  localparam int FW = $clog2(FIFO_DEPTH + 1);

  mv_t mv_mem [ACT_HT][ACT_WD];
  always_ff @(posedge clk) begin
    if (mv_we) mv_mem[mv_y][mv_x] <= mv_in;
  end

  typedef enum logic [2:0] {W_IDLE, W_SETUP, W_IDX, W_RUN, W_DRAIN} wstate_e;
  wstate_e state;
  logic [XW-1:0] px;
  logic [YW-1:0] py;
  logic [1:0]    drain;

  // ---------------- source location of the current position ----------------
  mv_t mv_cur;
  int signed sx_fx, sy_fx, ix, iy;
  logic [FRAC_BITS-1:0] u_c, v_c;
  logic [3:0]  lane_inb_c;
  logic [1:0]  lane_bank_c [4];
  logic [PA_W-1:0] lane_pos_c [4];
  always_comb begin
    mv_cur = memoize ? '0 : mv_mem[py][px];
    sx_fx = (int'(px) <<< FRAC_BITS) + ((int'(mv_cur.dx) <<< FRAC_BITS) >>> LOG_TILE);
    sy_fx = (int'(py) <<< FRAC_BITS) + ((int'(mv_cur.dy) <<< FRAC_BITS) >>> LOG_TILE);
    ix  = sx_fx >>> FRAC_BITS;
    iy  = sy_fx >>> FRAC_BITS;
    u_c = sx_fx[FRAC_BITS-1:0];
    v_c = sy_fx[FRAC_BITS-1:0];
    for (int l = 0; l < 4; l++) begin
      automatic int lx = ix + (l >> 1);
      automatic int ly = iy + (l & 1);
      lane_inb_c[l]  = (lx >= 0) && (lx < ACT_WD) && (ly >= 0) && (ly < ACT_HT);
      lane_bank_c[l] = {lx[0], ly[0]};
      lane_pos_c[l]  = PA_W'((ly >>> 1) * HW + (lx >>> 1));
    end
  end

  // ---------------- lane bookkeeping ----------------
  logic [3:0]       lane_inb;
  logic [1:0]       lane_bank [4];
  logic [EA_W-1:0]  f_addr  [4];
  logic [CNT_W-1:0] f_left  [4];
  logic [3:0]       f_pend;             // a read issued last cycle
  logic [3:0]       f_pend_last;
  logic [3:0]       issue;

  // SDL signals
  logic             sdl_activate;
  logic [3:0]       sdl_act_en;
  logic [3:0]       sdl_push;
  rle_entry_t       sdl_push_entry [4];
  logic [FW-1:0]    sdl_count [4];
  logic             step;
  logic [GAP_W-1:0] gap_lane [4];
  logic [GAP_W-1:0] gap_min;
  logic [3:0]       sdl_ready, sdl_active, sdl_hit, sdl_last;
  logic signed [ACT_W-1:0] sdl_val [4];

  // bank crossbar: lane l uses bank lane_bank[l]; the four banks are distinct
  always_comb begin
    for (int b = 0; b < 4; b++) begin
      idx_raddr[b] = '0;
      ent_raddr[b] = '0;
    end
    for (int l = 0; l < 4; l++) begin
      idx_raddr[lane_bank_c[l]] = lane_pos_c[l];
      ent_raddr[lane_bank[l]]   = f_addr[l];
    end
  end

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      issue[l] = (state == W_RUN) && (f_left[l] != '0) &&
                 (int'(sdl_count[l]) + int'(f_pend[l]) < FIFO_DEPTH);
      sdl_push[l] = f_pend[l];
      sdl_push_entry[l] = ent_rdata[lane_bank[l]];
      sdl_push_entry[l].last = f_pend_last[l];
      sdl_act_en[l] = lane_inb[l] && (idx_count[lane_bank[l]] != '0);
    end
    sdl_activate = (state == W_IDX);
  end

  for (genvar l = 0; l < 4; l++) begin : g_lane
    sparsity_decoder_lane #(.FIFO_DEPTH(FIFO_DEPTH)) sdl (
      .clk, .rst_n,
      .activate(sdl_activate), .act_en(sdl_act_en[l]),
      .push(sdl_push[l]), .push_entry(sdl_push_entry[l]), .fifo_count(sdl_count[l]),
      .step, .gap_min,
      .gap_out(gap_lane[l]), .ready(sdl_ready[l]), .active(sdl_active[l]),
      .hit(sdl_hit[l]), .cur_last(sdl_last[l]), .value_out(sdl_val[l])
    );
  end

  min_unit u_min (.gap_in(gap_lane), .gap_min);

  logic final_step, none_active;
  always_comb begin
    none_active = (sdl_active == 4'b0000);
    step        = (state == W_RUN) && (&sdl_ready) && !none_active;
    final_step  = 1'b1;
    for (int l = 0; l < 4; l++)
      if (sdl_active[l] && !(sdl_hit[l] && sdl_last[l])) final_step = 1'b0;
  end

  // positions whose four neighbours are all empty emit one zero entry
  logic empty_pos;
  assign empty_pos = (state == W_IDX) && (sdl_act_en == 4'b0000);

  logic signed [ACT_W-1:0] zero_vals [4];
  logic signed [ACT_W-1:0] interp_in [4];
  always_comb begin
    for (int l = 0; l < 4; l++) begin
      zero_vals[l] = '0;
      interp_in[l] = empty_pos ? zero_vals[l] : sdl_val[l];
    end
  end

  bilinear_interpolator #(.FRAC_BITS(FRAC_BITS)) u_interp (
    .clk, .rst_n,
    .uv_load(state == W_SETUP), .u(u_c), .v(v_c),
    .in_valid(step || empty_pos), .sdl(interp_in),
    .in_gap(empty_pos ? '0 : gap_min), .in_last(empty_pos ? 1'b1 : final_step),
    .out_valid, .out_entry
  );

  logic last_pos;
  assign last_pos = (int'(px) == ACT_WD - 1) && (int'(py) == ACT_HT - 1);
  assign busy = (state != W_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= W_IDLE; px <= '0; py <= '0; drain <= '0; done <= 1'b0;
      lane_inb <= '0; f_pend <= '0; f_pend_last <= '0;
      for (int l = 0; l < 4; l++) begin
        lane_bank[l] <= 2'(l); f_addr[l] <= '0; f_left[l] <= '0;
      end
    end else begin
      done   <= 1'b0;
      f_pend <= issue;
      for (int l = 0; l < 4; l++) begin
        f_pend_last[l] <= (f_left[l] == CNT_W'(1));
        if (issue[l]) begin
          f_addr[l] <= f_addr[l] + 1'b1;
          f_left[l] <= f_left[l] - 1'b1;
        end
      end
      unique case (state)
        W_IDLE: if (start) begin
          px <= '0; py <= '0;
          state <= W_SETUP;
        end
        W_SETUP: begin
          lane_inb  <= lane_inb_c;
          lane_bank <= lane_bank_c;
          state     <= W_IDX;
        end
        W_IDX: begin
          for (int l = 0; l < 4; l++) begin
            f_addr[l] <= idx_start[lane_bank[l]];
            f_left[l] <= sdl_act_en[l] ? idx_count[lane_bank[l]] : '0;
          end
          state <= empty_pos ? W_DRAIN : W_RUN;
        end
        W_RUN: if (step && final_step) state <= W_DRAIN;
        default: begin   // W_DRAIN: next position, or wait for the interpolator
          if (!last_pos) begin
            if (int'(px) < ACT_WD - 1) px <= px + 1'b1;
            else begin
              px <= '0;
              py <= py + 1'b1;
            end
            state <= W_SETUP;
          end else if (drain == 2'd2) begin
            drain <= '0;
            done  <= 1'b1;
            state <= W_IDLE;
          end else begin
            drain <= drain + 1'b1;
          end
        end
      endcase
    end
  end
endmodule
