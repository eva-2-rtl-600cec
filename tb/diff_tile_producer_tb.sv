// diff_tile_producer_tb: a small frame pair in behavioural pixel memories;
// every tile difference (value, tile, offset, in-bounds flag) is compared
// with a sum of absolute differences computed here, the number of results
// is checked, and the frame's cycle count is checked against the schedule
// (TW+1 per tile load, TW+3 per in-bounds offset, 2 per out-of-bounds one).
module diff_tile_producer_tb;
  import eva2_pkg::*;
  localparam int FW = 32, FH = 24, PPW = 4, T = 8, R = 8, SS = 4;
  localparam int NTX = FW / T, NTY = FH / T, NOFF1 = 2 * R / SS + 1, NOFF = NOFF1 * NOFF1;
  localparam int WORDS = FW * FH / PPW, AW = $clog2(WORDS), WW = PIX_W * PPW;
  localparam int TW = T * T / PPW;
  localparam int DIFF_W = $clog2(T * T * 255 + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, new_re, key_re;
  logic [AW-1:0] new_raddr, key_raddr;
  logic [WW-1:0] new_rdata, key_rdata;
  logic td_valid, td_inb;
  logic [$clog2(NTX)-1:0] td_tx;
  logic [$clog2(NTY)-1:0] td_ty;
  logic [$clog2(NOFF)-1:0] td_off;
  logic [DIFF_W-1:0] td_diff;
  int checks = 0, failures = 0;

  diff_tile_producer #(.FRAME_W(FW), .FRAME_H(FH), .PIX_PER_WORD(PPW), .TILE(T),
                       .SEARCH_RADIUS(R), .SEARCH_STRIDE(SS)) dut (.*);
  always #5 clk = ~clk;

  logic [7:0] newf [FH][FW];
  logic [7:0] keyf [FH][FW];

  function automatic logic [WW-1:0] word_of(logic [7:0] f [FH][FW], int a);
    logic [WW-1:0] w;
    int p = a * PPW;
    for (int i = 0; i < PPW; i++) w[i*8 +: 8] = f[(p + i) / FW][(p + i) % FW];
    return w;
  endfunction

  always @(posedge clk) begin
    if (new_re) new_rdata <= word_of(newf, int'(new_raddr));
    if (key_re) key_rdata <= word_of(keyf, int'(key_raddr));
  end

  int seen [NTY][NTX][NOFF];
  int results = 0;
  always @(posedge clk) if (rst_n && td_valid) begin
    automatic int tx = int'(td_tx), ty = int'(td_ty), o = int'(td_off);
    automatic int dx = (o % NOFF1) * SS - R, dy = (o / NOFF1) * SS - R;
    automatic int x0 = tx * T + dx, y0 = ty * T + dy;
    automatic logic inb = x0 >= 0 && y0 >= 0 && x0 + T <= FW && y0 + T <= FH;
    automatic int sad = 0;
    if (inb)
      for (int y = 0; y < T; y++)
        for (int x = 0; x < T; x++) begin
          automatic int a = newf[ty*T + y][tx*T + x], b = keyf[y0 + y][x0 + x];
          sad += (a > b) ? a - b : b - a;
        end
    results++;
    seen[ty][tx][o]++;
    checks++;
    if (td_inb != inb || int'(td_diff) != sad) begin
      failures++;
      $display("FAIL tile (%0d,%0d) off %0d: inb %0d diff %0d want inb %0d diff %0d",
               tx, ty, o, td_inb, td_diff, inb, sad);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, want_cycles;
    for (int frame = 0; frame < 3; frame++) begin
      for (int y = 0; y < FH; y++)
        for (int x = 0; x < FW; x++) begin
          keyf[y][x] = 8'($urandom);
          newf[y][x] = (frame == 0) ? 8'($urandom) : 8'(x * 7 + y * 3 + frame);
        end
      foreach (seen[a, b, c]) seen[a][b][c] = 0;
      results = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      @(negedge clk) start = 1;
      t0 = $time;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      t1 = $time;
      want_cycles = 0;
      for (int ty = 0; ty < NTY; ty++)
        for (int tx = 0; tx < NTX; tx++) begin
          want_cycles += TW + 1;
          for (int o = 0; o < NOFF; o++) begin
            automatic int x0 = tx * T + (o % NOFF1) * SS - R, y0 = ty * T + (o / NOFF1) * SS - R;
            want_cycles += (x0 >= 0 && y0 >= 0 && x0 + T <= FW && y0 + T <= FH) ? TW + 3 : 2;
          end
        end
      checks += 2;
      if (results != NTX * NTY * NOFF) begin failures++; $display("FAIL %0d results", results); end
      if ((t1 - t0) / 10 != want_cycles + 1) begin
        failures++;
        $display("FAIL cycles %0d want %0d", (t1 - t0) / 10, want_cycles + 1);
      end
      foreach (seen[a, b, c]) if (seen[a][b][c] != 1) begin
        failures++; checks++;
        $display("FAIL tile (%0d,%0d) off %0d reported %0d times", b, a, c, seen[a][b][c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
