// sparse_act_buffer_tb: writes run-length encoded activations (sparse ones
// that fit and dense ones that overflow the banks) and reads every position
// back through the four bank ports: index {start, count} and each entry are
// compared with a model of the bank fill, as are wr_done and overflow.
module sparse_act_buffer_tb;
  import eva2_pkg::*;
  localparam int AWD = 5, AHT = 4, EPB = 24, CH = 16;
  localparam int HW = (AWD + 1) / 2, HH = (AHT + 1) / 2;
  localparam int PA_W = $clog2(HW * HH), EA_W = $clog2(EPB), CNT_W = $clog2(CH + 1);

  logic clk = 0, rst_n = 0;
  logic wr_start = 0, wr_valid = 0, wr_ready, wr_done, overflow;
  rle_entry_t wr_entry;
  logic [PA_W-1:0]  idx_raddr [4];
  logic [EA_W-1:0]  idx_start [4];
  logic [CNT_W-1:0] idx_count [4];
  logic [EA_W-1:0]  ent_raddr [4];
  rle_entry_t       ent_rdata [4];
  int checks = 0, failures = 0;

  sparse_act_buffer #(.ACT_WD(AWD), .ACT_HT(AHT), .ENTRIES_PER_BANK(EPB), .CHANNELS(CH)) dut (.*);
  always #5 clk = ~clk;

  rle_entry_t ents [AHT][AWD][$];
  int stored [AHT][AWD];
  int done_seen;
  always @(posedge clk) if (rst_n && wr_done) done_seen++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  task automatic one_frame(int density);
    int fill[4] = '{0, 0, 0, 0};
    logic want_ovf = 0;
    done_seen = 0;
    @(negedge clk) wr_start = 1;
    @(negedge clk) wr_start = 0;
    for (int y = 0; y < AHT; y++)
      for (int x = 0; x < AWD; x++) begin
        automatic int gap = 0;
        automatic int b = (x % 2) * 2 + (y % 2);
        ents[y][x].delete();
        for (int c = 0; c < CH; c++)
          if ($urandom_range(0, 99) < density) begin
            ents[y][x].push_back('{gap: GAP_W'(gap), value: ACT_W'($urandom), last: 1'b0});
            gap = 0;
          end else gap++;
        // an empty position is sent as the stand-in {0, 0, last}, not stored
        if (ents[y][x].size() == 0) ents[y][x].push_back('{gap: '0, value: '0, last: 1'b0});
        ents[y][x][ents[y][x].size() - 1].last = 1'b1;
        stored[y][x] = 0;
        foreach (ents[y][x][i]) begin
          automatic logic stand_in = (ents[y][x].size() == 1 && ents[y][x][0].value == 0);
          wr_valid = 1;
          wr_entry = ents[y][x][i];
          if (stand_in) ;
          else if (fill[b] < EPB) begin fill[b]++; stored[y][x]++; end
          else want_ovf = 1;
          @(negedge clk);
          // idle cycles between entries now and then
          if ($urandom_range(0, 3) == 0) begin wr_valid = 0; @(negedge clk); end
        end
      end
    wr_valid = 0;
    @(negedge clk);
    checks += 2;
    if (done_seen != 1) fail($sformatf("wr_done seen %0d times", done_seen));
    if (overflow != want_ovf) fail($sformatf("overflow %0d want %0d", overflow, want_ovf));
    // read back through the bank ports
    for (int y = 0; y < AHT; y++)
      for (int x = 0; x < AWD; x++) begin
        automatic int b = (x % 2) * 2 + (y % 2);
        automatic int st;
        idx_raddr[b] = PA_W'((y / 2) * HW + x / 2);
        @(negedge clk);
        checks++;
        if (int'(idx_count[b]) != stored[y][x])
          fail($sformatf("pos (%0d,%0d) count %0d want %0d", x, y, idx_count[b], stored[y][x]));
        st = int'(idx_start[b]);
        for (int i = 0; i < stored[y][x]; i++) begin
          ent_raddr[b] = EA_W'(st + i);
          @(negedge clk);
          checks++;
          if (ent_rdata[b] != ents[y][x][i]) fail($sformatf("pos (%0d,%0d) entry %0d", x, y, i));
        end
      end
  endtask

  initial begin
    wr_entry = '0;
    for (int b = 0; b < 4; b++) begin idx_raddr[b] = '0; ent_raddr[b] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    one_frame(20);
    one_frame(0);
    one_frame(100);   // 6 positions x 16 entries in bank 0: overflows
    one_frame(30);    // overflow flag clears on the next frame
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
