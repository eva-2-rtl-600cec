// pixel_buffer_tb: write a frame of pseudo-random words, read it back in a
// different order and check data and the one-cycle read latency.
//
// How: a small frame is written one word per cycle, then read back with a
// stride permutation of the addresses, each read checked on the following
// cycle; a write and a read of another word in the same cycle are checked too.
// The frame store role follows the published design; the word width and 1-cycle synchronous read are this
// design's choices.
module pixel_buffer_tb;
  import eva2_pkg::*;
  localparam int FW = 64, FH = 16, PPW = 8;
  localparam int WORDS = FW * FH / PPW, AW = $clog2(WORDS), WW = PIX_W * PPW;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WW-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  pixel_buffer #(.FRAME_W(FW), .FRAME_H(FH), .PIX_PER_WORD(PPW)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WW-1:0] pattern(int a);
    return {WW'(a) * 64'h9E37_79B9_7F4A_7C15} ^ WW'(a << 3);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk) we = 1; waddr = AW'(a); wdata = pattern(a);
    end
    @(negedge clk) we = 0;
    for (int k = 0; k < WORDS; k++) begin
      automatic int a = (k * 37) % WORDS;
      @(negedge clk) re = 1; raddr = AW'(a);
      @(negedge clk) re = 0;
      checks++;
      if (rdata !== pattern(a)) begin
        failures++;
        $display("FAIL addr %0d: %h want %h", a, rdata, pattern(a));
      end
    end
    // write and read of different addresses in the same cycle
    @(negedge clk) we = 1; waddr = 0; wdata = '1; re = 1; raddr = 5;
    @(negedge clk) we = 0; re = 0;
    checks++;
    if (rdata !== pattern(5)) begin failures++; $display("FAIL: simultaneous read"); end
    @(negedge clk) re = 1; raddr = 0;
    @(negedge clk) re = 0;
    checks++;
    if (rdata !== '1) begin failures++; $display("FAIL: overwrite"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
