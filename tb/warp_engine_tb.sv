// warp_engine_tb: a random sparse key activation is stored through the real
// sparse_act_buffer; random motion vectors are written; the warped,
// run-length encoded output of every position is compared entry by entry
// with a dense reference: bilinear interpolation of the 2x2 neighbourhood at
// x + dx/TILE (neighbours outside the activation read as zero), emitted for
// every channel that is non-zero in at least one neighbour. Memoization mode
// must reproduce the stored activation exactly. Also bounds the run time by
// (channels emitted + 8) cycles per position.
module warp_engine_tb;
  import eva2_pkg::*;
  localparam int AWD = 5, AHT = 4, T = 8, F = 3, EPB = 96, CH = 16;  // EPB: no overflow
  localparam int HW = (AWD + 1) / 2, HH = (AHT + 1) / 2;
  localparam int PA_W = $clog2(HW * HH), EA_W = $clog2(EPB), CNT_W = $clog2(CH + 1);

  logic clk = 0, rst_n = 0;
  logic memoize = 0, mv_we = 0, start = 0;
  logic [$clog2(AWD)-1:0] mv_x = '0;
  logic [$clog2(AHT)-1:0] mv_y = '0;
  mv_t mv_in;
  logic busy, done, out_valid;
  rle_entry_t out_entry;
  logic wr_start = 0, wr_valid = 0, wr_ready, wr_done, overflow;
  rle_entry_t wr_entry;
  logic [PA_W-1:0]  idx_raddr [4];
  logic [EA_W-1:0]  idx_start [4];
  logic [CNT_W-1:0] idx_count [4];
  logic [EA_W-1:0]  ent_raddr [4];
  rle_entry_t       ent_rdata [4];
  int checks = 0, failures = 0;

  sparse_act_buffer #(.ACT_WD(AWD), .ACT_HT(AHT), .ENTRIES_PER_BANK(EPB), .CHANNELS(CH)) u_buf (.*);
  warp_engine #(.ACT_WD(AWD), .ACT_HT(AHT), .TILE(T), .FRAC_BITS(F),
                .ENTRIES_PER_BANK(EPB), .CHANNELS(CH)) dut (.*);
  always #5 clk = ~clk;

  int act [AHT][AWD][CH];
  int mvx [AHT][AWD], mvy [AHT][AWD];
  rle_entry_t expq[$];
  int skipped_zero_runs = 0, edge_lanes = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    rle_entry_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL unexpected output entry");
    end else begin
      e = expq.pop_front();
      if (out_entry != e) begin
        failures++;
        $display("FAIL t=%0t out %h want %h", $time, out_entry, e); if (0) $display("", out_entry.gap, out_entry.value,
                 out_entry.last, e.gap, e.value, e.last);
      end
    end
  end
  always @(posedge clk) if (rst_n && dut.step && dut.gap_min != 0) skipped_zero_runs++;
  always @(posedge clk) if (rst_n && dut.sdl_activate && dut.lane_inb != 4'hf) edge_lanes++;

  function automatic int at(int x, int y, int c);
    if (x < 0 || y < 0 || x >= AWD || y >= AHT) return 0;
    return act[y][x][c];
  endfunction

  task automatic build_expected(logic memo);
    for (int y = 0; y < AHT; y++)
      for (int x = 0; x < AWD; x++) begin
        automatic int dx = memo ? 0 : mvx[y][x], dy = memo ? 0 : mvy[y][x];
        automatic int sx = x * (1 << F) + (dx * (1 << F)) / T;   // T = 2**F: exact
        automatic int sy = y * (1 << F) + (dy * (1 << F)) / T;
        automatic int ix = sx >>> F, iy = sy >>> F;
        automatic int u = sx - ix * (1 << F), v = sy - iy * (1 << F);
        automatic int one = 1 << F, gap = 0, n = 0;
        for (int c = 0; c < CH; c++) begin
          automatic int a00 = at(ix, iy, c), a01 = at(ix, iy + 1, c);
          automatic int a10 = at(ix + 1, iy, c), a11 = at(ix + 1, iy + 1, c);
          if (a00 == 0 && a01 == 0 && a10 == 0 && a11 == 0) begin
            gap++;
            continue;
          end
          expq.push_back('{gap: GAP_W'(gap), last: 1'b0,
                           value: ACT_W'((a00 * (one - u) * (one - v) + a01 * (one - u) * v +
                                          a10 * u * (one - v) + a11 * u * v) >>> (2 * F))});
          gap = 0;
          n++;
        end
        if (n == 0) expq.push_back('{gap: '0, value: '0, last: 1'b0});
        expq[expq.size() - 1].last = 1'b1;
      end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, n_out_bound;
    wr_entry = '0;
    mv_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 12; frame++) begin
      automatic int density = (frame % 3 == 0) ? 10 : ((frame % 3 == 1) ? 40 : 80);
      // key activation
      @(negedge clk) wr_start = 1;
      @(negedge clk) wr_start = 0;
      for (int y = 0; y < AHT; y++)
        for (int x = 0; x < AWD; x++) begin
          automatic int gap = 0;
          automatic rle_entry_t el[$];
          for (int c = 0; c < CH; c++) begin
            act[y][x][c] = ($urandom_range(0, 99) < density) ? $urandom_range(1, 20000) - 4000 : 0;
            if (act[y][x][c] != 0) begin
              el.push_back('{gap: GAP_W'(gap), value: ACT_W'(act[y][x][c]), last: 1'b0});
              gap = 0;
            end else gap++;
          end
          if (el.size() == 0) el.push_back('{gap: '0, value: '0, last: 1'b0});
          el[el.size() - 1].last = 1'b1;
          foreach (el[i]) begin
            wr_valid = 1;
            wr_entry = el[i];
            @(negedge clk);
          end
          wr_valid = 0;
        end
      @(negedge clk);
      // motion vectors
      for (int y = 0; y < AHT; y++)
        for (int x = 0; x < AWD; x++) begin
          mvx[y][x] = (frame == 0) ? 0 : $urandom_range(0, 32) - 16;
          mvy[y][x] = (frame == 0) ? 0 : $urandom_range(0, 32) - 16;
          @(negedge clk) mv_we = 1; mv_x = $clog2(AWD)'(x); mv_y = $clog2(AHT)'(y);
          mv_in.dx = 8'(mvx[y][x]); mv_in.dy = 8'(mvy[y][x]);
        end
      @(negedge clk) mv_we = 0;
      memoize = (frame % 4 == 3);
      build_expected(memoize);
      n_out_bound = expq.size() + 8 * AWD * AHT;
      @(negedge clk) start = 1;
      t0 = $time;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      checks += 2;
      if (expq.size() != 0) begin failures++; $display("FAIL %0d entries missing", expq.size()); end
      if (($time - t0) / 10 > n_out_bound) begin
        failures++;
        $display("FAIL took %0d cycles, bound %0d", ($time - t0) / 10, n_out_bound);
      end
      expq.delete();
    end
    checks++;
    if (skipped_zero_runs == 0 || edge_lanes == 0) begin
      failures++;
      $display("FAIL zero skipping %0d / edge lanes %0d never exercised", skipped_zero_runs, edge_lanes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
