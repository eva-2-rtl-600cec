// weighting_unit (WU): one of the four product terms of bilinear interpolation.
//
// The two weight factors ((u or 1-u) and (v or 1-v), unsigned fixed point
// with FRAC_BITS fraction bits, 1.0 = 2**FRAC_BITS) are multiplied and
// registered together with the lane's activation value; the registered
// pair is then multiplied combinationally into a wide signed weighted value
// with 2*FRAC_BITS fraction bits. Structure as in the paper's WU figure; the
// widths are this design's choice. Latency: one register stage (`en`).
module weighting_unit
  import eva2_pkg::*;
#(
  parameter int FRAC_BITS = FRAC_BITS_D,
  localparam int WF_W  = FRAC_BITS + 1,
  localparam int WP_W  = 2 * WF_W,
  localparam int OUT_W = ACT_W + WP_W + 1
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic [WF_W-1:0]         wu,     // u or 1-u
  input  logic [WF_W-1:0]         wv,     // v or 1-v
  input  logic signed [ACT_W-1:0] sdl_out,
  output logic signed [OUT_W-1:0] weighted
);
  logic [WP_W-1:0]         w_q;
  logic signed [ACT_W-1:0] a_q;
  always_ff @(posedge clk) begin
    if (en) begin
      w_q <= wu * wv;
      a_q <= sdl_out;
    end
  end
  assign weighted = OUT_W'(a_q) * $signed({1'b0, w_q});
endmodule
