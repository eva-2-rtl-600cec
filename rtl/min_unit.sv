// min_unit: minimum of the four sparsity decoder lanes' zero gaps.
//
// Each lane reports how many zero channels remain before its next non-zero
// activation (an inactive lane reports all ones). The minimum is the number
// of channels that are zero in all four neighbours and can be skipped at
// once; it is broadcast back to every lane. Purely combinational, as in the
// paper's warp engine; the two-level comparison tree is this design's choice.
module min_unit
  import eva2_pkg::*;
(
  input  logic [GAP_W-1:0] gap_in [4],
  output logic [GAP_W-1:0] gap_min
);
  logic [GAP_W-1:0] m01, m23;
  always_comb begin
    m01     = (gap_in[0] < gap_in[1]) ? gap_in[0] : gap_in[1];
    m23     = (gap_in[2] < gap_in[3]) ? gap_in[2] : gap_in[3];
    gap_min = (m01 < m23) ? m01 : m23;
  end
endmodule
