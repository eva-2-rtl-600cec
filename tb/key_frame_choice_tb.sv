// key_frame_choice_tb: accumulation of field errors and the threshold decision.
//
// How: frames of random field errors are streamed (clear, then err_valid
// per field, then decide); one cycle after decide the testbench checks that
// dec_valid is high, that the total equals its own sum, and that the kind is
// key exactly when force_key is set or total > threshold. Directed frames
// cover low error, high error, forced key and a total equal to, one above
// and one below the threshold. Summing block errors follows the published
// key frame choice; the strict '>' and force_key are this design's choices.
module key_frame_choice_tb;
  import eva2_pkg::*;
  localparam int ERR_W = 24, TOTAL_W = 36;
  logic clk = 0, rst_n = 0;
  logic clear = 0, err_valid = 0, decide = 0, force_key = 0;
  logic [ERR_W-1:0]   err = '0;
  logic [TOTAL_W-1:0] threshold = '0, total;
  logic dec_valid;
  frame_kind_e dec_kind;
  int checks = 0, failures = 0;

  key_frame_choice #(.ERR_W(ERR_W), .TOTAL_W(TOTAL_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rel_eq: threshold set relative to the frame's own total (sum + eq_delta)
  task automatic run_frame(int n, logic [TOTAL_W-1:0] thr, logic fk, logic rel_eq = 0, int eq_delta = 0);
    longint sum = 0;
    frame_kind_e want;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int i = 0; i < n; i++) begin
      err = ERR_W'($urandom_range(0, 100000));
      sum += err;
      err_valid = 1;
      @(negedge clk);
    end
    err_valid = 0;
    if (rel_eq) thr = TOTAL_W'(sum + eq_delta);
    threshold = thr; force_key = fk;
    decide = 1;
    @(negedge clk) decide = 0;
    want = (fk || sum > thr) ? FRAME_KEY : FRAME_PREDICTED;
    checks += 3;
    if (!dec_valid) begin failures++; $display("FAIL: no decision one cycle after decide"); end
    if (dec_kind != want) begin failures++; $display("FAIL: kind %0d want %0d (sum %0d thr %0d)", dec_kind, want, sum, thr); end
    if (total != TOTAL_W'(sum)) begin failures++; $display("FAIL: total %0d want %0d", total, sum); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(10, 36'd1_000_000_000, 0);   // low error: predicted
    run_frame(10, 36'd1, 0);               // high error: key
    run_frame(10, 36'd1_000_000_000, 1);   // forced key
    run_frame(10, '0, 0, 1, 0);            // total == threshold: still predicted
    run_frame(10, '0, 0, 1, -1);           // total one above threshold: key
    run_frame(10, '0, 0, 1, 1);            // total one below threshold: predicted
    for (int f = 0; f < 30; f++) run_frame($urandom_range(1, 50), TOTAL_W'($urandom_range(0, 3_000_000)), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
