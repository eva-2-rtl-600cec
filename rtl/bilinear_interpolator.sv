// bilinear_interpolator: 4-way weighted sum of the sparsity decoder lanes.
//
// out = SDL_00*(1-u)*(1-v) + SDL_01*(1-u)*v + SDL_10*u*(1-v) + SDL_11*u*v
// where (u, v) are the fraction bits of the motion vector of the current
// activation position (u along x, v along y; index "ab" = x+a, y+b). u and v
// are captured in input registers once per position (`uv_load`); 1-u and
// 1-v are formed by subtraction from 1.0. Four weighting units (stage 1)
// feed a two-level adder tree; the wide sum is shifted right by
// 2*FRAC_BITS (arithmetic shift, i.e. rounding toward minus infinity) back
// to 16-bit fixed point and registered (stage 2). The structure follows the
// paper's interpolator figure; the rounding and the side-band fields carried
// alongside (RLE gap and last flag) are this design's choices.
//
// Timing: a value presented with in_valid appears on out_* two cycles later,
// one result per cycle.
module bilinear_interpolator
  import eva2_pkg::*;
#(
  parameter int FRAC_BITS = FRAC_BITS_D,
  localparam int WF_W  = FRAC_BITS + 1,
  localparam int WT_W  = ACT_W + 2 * WF_W + 1,
  localparam int SUM_W = WT_W + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    uv_load,
  input  logic [FRAC_BITS-1:0]    u,
  input  logic [FRAC_BITS-1:0]    v,
  input  logic                    in_valid,
  input  logic signed [ACT_W-1:0] sdl [4],     // 00, 01, 10, 11
  input  logic [GAP_W-1:0]        in_gap,
  input  logic                    in_last,
  output logic                    out_valid,
  output rle_entry_t              out_entry
);
  localparam logic [WF_W-1:0] ONE = WF_W'(1) << FRAC_BITS;

  logic [FRAC_BITS-1:0] u_q, v_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_q <= '0; v_q <= '0;
    end else if (uv_load) begin
      u_q <= u; v_q <= v;
    end
  end

  logic [WF_W-1:0] wu1, wv1, wu0, wv0;
  assign wu1 = WF_W'(u_q);
  assign wv1 = WF_W'(v_q);
  assign wu0 = ONE - wu1;
  assign wv0 = ONE - wv1;

  logic signed [WT_W-1:0] wt [4];
  weighting_unit #(.FRAC_BITS(FRAC_BITS)) wu_00 (.clk, .en(in_valid), .wu(wu0), .wv(wv0), .sdl_out(sdl[0]), .weighted(wt[0]));
  weighting_unit #(.FRAC_BITS(FRAC_BITS)) wu_01 (.clk, .en(in_valid), .wu(wu0), .wv(wv1), .sdl_out(sdl[1]), .weighted(wt[1]));
  weighting_unit #(.FRAC_BITS(FRAC_BITS)) wu_10 (.clk, .en(in_valid), .wu(wu1), .wv(wv0), .sdl_out(sdl[2]), .weighted(wt[2]));
  weighting_unit #(.FRAC_BITS(FRAC_BITS)) wu_11 (.clk, .en(in_valid), .wu(wu1), .wv(wv1), .sdl_out(sdl[3]), .weighted(wt[3]));

  // stage-1 side band
  logic             s1_v, s1_last;
  logic [GAP_W-1:0] s1_gap;

  logic signed [SUM_W-1:0] sum_a, sum_b, sum, shifted;
  always_comb begin
    sum_a   = SUM_W'(wt[0]) + SUM_W'(wt[1]);
    sum_b   = SUM_W'(wt[2]) + SUM_W'(wt[3]);
    sum     = sum_a + sum_b;
    shifted = sum >>> (2 * FRAC_BITS);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_last <= 1'b0; s1_gap <= '0;
      out_valid <= 1'b0; out_entry <= '0;
    end else begin
      s1_v <= in_valid;
      if (in_valid) begin
        s1_gap  <= in_gap;
        s1_last <= in_last;
      end
      out_valid <= s1_v;
      if (s1_v) begin
        out_entry.gap   <= s1_gap;
        out_entry.value <= ACT_W'(shifted);
        out_entry.last  <= s1_last;
      end
    end
  end
endmodule
