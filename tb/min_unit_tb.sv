// min_unit_tb: random and corner-case check of the four-input minimum.
//
// How: all-equal, one-small, maximum-gap and random sets of four zero gaps
// are applied to the combinational min unit and compared with a reference
// minimum after a settling delay. The unit's job (minimum zero gap of the
// four sparsity decoder lanes) is the published one.
module min_unit_tb;
  import eva2_pkg::*;
  logic [GAP_W-1:0] gi [4];
  logic [GAP_W-1:0] gm;
  int checks = 0, failures = 0;

  min_unit dut (.gap_in(gi), .gap_min(gm));

  task automatic check(string what);
    logic [GAP_W-1:0] ref_m = gi[0];
    for (int i = 1; i < 4; i++) if (gi[i] < ref_m) ref_m = gi[i];
    checks++;
    if (gm !== ref_m) begin
      failures++;
      $display("FAIL %s: in %0d %0d %0d %0d got %0d want %0d", what, gi[0], gi[1], gi[2], gi[3], gm, ref_m);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // the minimum in each position in turn, inactive lanes (all ones) elsewhere
    for (int p = 0; p < 4; p++) begin
      for (int i = 0; i < 4; i++) gi[i] = '1;
      gi[p] = GAP_W'(p + 3);
      #1 check("single");
    end
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 4; i++) gi[i] = GAP_W'($urandom_range(0, (n % 2) ? 7 : 1023));
      #1 check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
