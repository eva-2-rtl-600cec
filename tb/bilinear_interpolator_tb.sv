// bilinear_interpolator_tb: random lane values and fractions against an
// integer reference of the weighted sum; checks the two-cycle latency.
//
// How: each cycle a new set of four signed 16-bit lane values, with random
// (u, v) loaded through uv_load, is presented; the expected result
// (SDL_00(1-u)(1-v) + SDL_01(1-u)v + SDL_10 u(1-v) + SDL_11 uv) >>> 2F is
// queued with its issue cycle and compared with the output, whose side-band
// gap/last fields must travel with it. The weighted-sum formula follows the
// published interpolator; the 2-cycle latency and floor rounding of the
// shift are this design's choices and are checked as such.
module bilinear_interpolator_tb;
  import eva2_pkg::*;
  localparam int F = 4;
  logic clk = 0, rst_n = 0;
  logic uv_load = 0, in_valid = 0, in_last = 0;
  logic [F-1:0] u = '0, v = '0;
  logic signed [ACT_W-1:0] sdl [4];
  logic [GAP_W-1:0] in_gap = '0;
  logic out_valid;
  rle_entry_t out_entry;
  int checks = 0, failures = 0;

  bilinear_interpolator #(.FRAC_BITS(F)) dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_interp(int a00, int a01, int a10, int a11, int uu, int vv);
    int one = 1 << F;
    int s = a00 * (one - uu) * (one - vv) + a01 * (one - uu) * vv
          + a10 * uu * (one - vv) + a11 * uu * vv;
    return s >>> (2 * F);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q[$];
  int gap_q[$];
  int lat_q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int e = exp_q.pop_front();
    automatic int g = gap_q.pop_front();
    automatic int t = lat_q.pop_front();
    checks += 2;
    if (int'(out_entry.value) != e || int'(out_entry.gap) != g) begin
      failures++;
      $display("FAIL value %0d want %0d gap %0d want %0d", out_entry.value, e, out_entry.gap, g);
    end
    // t is the cycle in which the input was presented; the result is visible
    // two cycles later, i.e. it is sampled here with cyc = t + 2
    if (cyc - t != 2) begin
      failures++;
      $display("FAIL latency %0d", cyc - t);
    end
  end

  initial begin
    for (int i = 0; i < 4; i++) sdl[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 100; p++) begin
      automatic int uu = (p < 4) ? ((p & 1) ? 15 : 0) : $urandom_range(0, 15);
      automatic int vv = (p < 4) ? ((p & 2) ? 15 : 0) : $urandom_range(0, 15);
      @(negedge clk) uv_load = 1; u = F'(uu); v = F'(vv);
      @(negedge clk) uv_load = 0;
      for (int c = 0; c < 8; c++) begin
        automatic int a[4];
        for (int i = 0; i < 4; i++) begin
          a[i] = (c == 0) ? 32767 : ((c == 1) ? -32768 : int'($signed(16'($urandom))));
          sdl[i] = ACT_W'(a[i]);
        end
        in_valid = 1;
        in_gap = GAP_W'(c);
        exp_q.push_back(ref_interp(a[0], a[1], a[2], a[3], uu, vv));
        gap_q.push_back(c);
        lat_q.push_back(cyc);
        @(negedge clk);
        in_valid = (c % 3 == 2) ? 0 : in_valid;
        if (c % 3 == 2) @(negedge clk);
      end
      in_valid = 0;
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
