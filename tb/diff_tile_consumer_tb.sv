// diff_tile_consumer_tb: random tile differences are written into the tile
// memory; for several receptive-field sizes and paddings the consumer's
// per-field minimum error and motion vector are compared with a direct
// (non-sliding) evaluation of every field at every in-bounds offset, using
// the same tie rule (earliest offset, zero offset wins ties). The frame's
// cycle count is checked against NTY*(NTX+rf-pad-1)*NOFF.
module diff_tile_consumer_tb;
  import eva2_pkg::*;
  localparam int FW = 48, FH = 40, T = 8, R = 8, SS = 4, KMAX = 4;
  localparam int NTX = FW / T, NTY = FH / T, NOFF1 = 2 * R / SS + 1, NOFF = NOFF1 * NOFF1;
  localparam int DIFF_W = $clog2(T * T * 255 + 1);
  localparam int SUM_W = $clog2(KMAX * KMAX * T * T * 255 + 1);
  localparam int KW = $clog2(KMAX + 1);
  localparam int CENTER = (NOFF - 1) / 2;

  logic clk = 0, rst_n = 0, start = 0;
  logic [KW-1:0] rf_tiles = '0, pad_tiles = '0;
  logic td_valid = 0;
  logic [$clog2(NTX)-1:0] td_tx = '0;
  logic [$clog2(NTY)-1:0] td_ty = '0;
  logic [$clog2(NOFF)-1:0] td_off = '0;
  logic [DIFF_W-1:0] td_diff = '0;
  logic busy, done, rf_valid;
  logic [$clog2(NTX)-1:0] rf_x;
  logic [$clog2(NTY)-1:0] rf_y;
  logic [SUM_W-1:0] rf_err;
  mv_t rf_mv;
  int checks = 0, failures = 0;

  diff_tile_consumer #(.FRAME_W(FW), .FRAME_H(FH), .TILE(T), .SEARCH_RADIUS(R),
                       .SEARCH_STRIDE(SS), .RF_TILES_MAX(KMAX)) dut (.*);
  always #5 clk = ~clk;

  int td [NTY][NTX][NOFF];
  int K, P;
  int results;

  always @(posedge clk) if (rst_n && rf_valid) begin
    automatic int x = int'(rf_x), y = int'(rf_y);
    automatic int best = -1, best_o = 0;
    automatic int c_lo = (x - P < 0) ? 0 : x - P, c_hi = (x - P + K - 1 > NTX - 1) ? NTX - 1 : x - P + K - 1;
    automatic int r_lo = (y - P < 0) ? 0 : y - P, r_hi = (y - P + K - 1 > NTY - 1) ? NTY - 1 : y - P + K - 1;
    for (int o = 0; o < NOFF; o++) begin
      automatic int dx = (o % NOFF1) * SS - R, dy = (o / NOFF1) * SS - R;
      automatic int s = 0;
      if (c_lo * T + dx < 0 || (c_hi + 1) * T + dx > FW || r_lo * T + dy < 0 || (r_hi + 1) * T + dy > FH)
        continue;
      for (int r = r_lo; r <= r_hi; r++)
        for (int c = c_lo; c <= c_hi; c++) s += td[r][c][o];
      if (best < 0 || s < best || (s == best && o == CENTER)) begin
        best = s;
        best_o = o;
      end
    end
    results++;
    checks++;
    if (int'(rf_err) != best || int'(rf_mv.dx) != (best_o % NOFF1) * SS - R ||
        int'(rf_mv.dy) != (best_o / NOFF1) * SS - R) begin
      failures++;
      $display("FAIL K=%0d P=%0d field (%0d,%0d): err %0d mv (%0d,%0d) want %0d (%0d,%0d)", K, P, x, y,
               rf_err, rf_mv.dx, rf_mv.dy, best, (best_o % NOFF1) * SS - R, (best_o / NOFF1) * SS - R);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      K = 2 + run % 3;          // 2, 3, 4 tiles
      P = (run / 3) % K;        // padding below K
      for (int y = 0; y < NTY; y++)
        for (int x = 0; x < NTX; x++)
          for (int o = 0; o < NOFF; o++) begin
            td[y][x][o] = (run % 2) ? $urandom_range(0, 3) : $urandom_range(0, 16320);
            @(negedge clk);
            td_valid = 1; td_tx = $clog2(NTX)'(x); td_ty = $clog2(NTY)'(y);
            td_off = $clog2(NOFF)'(o); td_diff = DIFF_W'(td[y][x][o]);
          end
      @(negedge clk) td_valid = 0;
      rf_tiles = KW'(K); pad_tiles = KW'(P);
      results = 0;
      @(negedge clk) start = 1;
      t0 = $time;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      cyc = int'(($time - t0) / 10);
      @(negedge clk);   // the last field is reported with done
      checks += 2;
      if (results != NTX * NTY) begin failures++; $display("FAIL %0d results", results); end
      if (cyc != NTY * (NTX + K - P - 1) * NOFF + 2) begin
        failures++;
        $display("FAIL cycles %0d want %0d", cyc, NTY * (NTX + K - P - 1) * NOFF + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
