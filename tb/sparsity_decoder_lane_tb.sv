// sparsity_decoder_lane_tb: one lane decodes random run-length encoded
// channel lists while a random common minimum (as the other three lanes would
// produce) is broadcast. Every step is checked against the dense channel
// vector the list encodes: the channel advanced to, the value driven, the
// hit flag, and deactivation after the last entry.
module sparsity_decoder_lane_tb;
  import eva2_pkg::*;
  localparam int DEPTH = 4;
  localparam int CH = 64;
  logic clk = 0, rst_n = 0;
  logic activate = 0, act_en = 0, push = 0, step = 0;
  rle_entry_t push_entry;
  logic [$clog2(DEPTH+1)-1:0] fifo_count;
  logic [GAP_W-1:0] gap_min = '0, gap_out;
  logic ready, active, hit, cur_last;
  logic signed [ACT_W-1:0] value_out;
  int checks = 0, failures = 0;

  sparsity_decoder_lane #(.FIFO_DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  // one position: random dense vector -> entries; push them while stepping
  task automatic run_list(int density_pct);
    int dense[CH];
    rle_entry_t ents[$];
    int gap = 0, pushed = 0, ch = -1, hits = 0, nz = 0, steps = 0;
    for (int c = 0; c < CH; c++) begin
      dense[c] = ($urandom_range(0, 99) < density_pct) ? $urandom_range(1, 30000) : 0;
      if (dense[c] != 0) begin
        ents.push_back('{gap: GAP_W'(gap), value: ACT_W'(dense[c]), last: 1'b0});
        gap = 0;
        nz++;
      end else gap++;
    end
    if (ents.size() == 0) begin
      ents.push_back('{gap: '0, value: '0, last: 1'b1});
      nz = 1;
    end
    ents[ents.size() - 1].last = 1'b1;

    @(negedge clk) activate = 1; act_en = 1;
    @(negedge clk) activate = 0;
    while (active && steps < 1000) begin
      // feed the FIFO when there is room
      push = (pushed < ents.size()) && (fifo_count < DEPTH);
      if (push) begin
        push_entry = ents[pushed];
      end
      step = 0;
      if (ready && active && $urandom_range(0, 3) != 0) begin
        automatic int g = int'(gap_out);
        automatic int m = $urandom_range(0, g);
        gap_min = GAP_W'(m);
        step = 1;
        #1;
        ch += m + 1;
        checks++;
        if (ch >= CH) fail($sformatf("walked past channel %0d", CH - 1));
        else if (hit != (m == g)) fail("hit flag");
        else if (hit && (int'(value_out) != dense[ch] || (dense[ch] == 0 && nz != 1)))
          fail($sformatf("ch %0d value %0d want %0d", ch, value_out, dense[ch]));
        else if (!hit && (value_out != 0 || dense[ch] != 0))
          fail($sformatf("ch %0d non-hit value %0d dense %0d", ch, value_out, dense[ch]));
        if (hit) hits++;
        steps++;
      end
      @(negedge clk);
      if (push) pushed++;
      push = 0;
      step = 0;
    end
    checks++;
    if (hits != nz || active) fail($sformatf("delivered %0d of %0d entries, active=%0d", hits, nz, active));
  endtask

  initial begin
    push_entry = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // a lane activated without entries stays inactive and reports all ones
    @(negedge clk) activate = 1; act_en = 0;
    @(negedge clk) activate = 0;
    checks++;
    if (active || !ready || gap_out != '1) fail("empty lane");
    for (int n = 0; n < 200; n++) run_list((n % 4 == 0) ? 0 : ((n % 4 == 1) ? 90 : 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
