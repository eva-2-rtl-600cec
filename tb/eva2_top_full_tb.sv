// eva2_top_full_tb: one complete operation of the EVA^2 unit at its default
// size (1000x562 frames, 16-pixel tiles, +-24 search at stride 8, 12x12-tile
// receptive fields with 6 tiles of padding, 512 channels, 4 activation banks).
//
// Two frames go through the unit with no parameter override: a textured
// first frame, which becomes the key frame (its pixels are forwarded to the
// layer accelerator and the testbench returns a 15%-dense run-length-encoded
// target activation), then the same scene moved by half a tile, which is
// predicted: RFBME runs over the whole frame, the key frame decision uses
// its error total, and the warp engine produces the predicted activation.
// A reference model (tile SADs reused for every receptive field, minimum
// search with the centre tie rule, bilinear warp) predicts the error total
// and every output beat. Cycle counts per phase are printed.
module eva2_top_full_tb;
  import eva2_pkg::*;
  localparam int FW = FRAME_W_D, FH = FRAME_H_D, PPW = PIX_PER_WORD_D, T = TILE_D, R = SEARCH_RADIUS_D,
                 SS = SEARCH_STRIDE_D, KMAX = RF_TILES_D, CH = CHANNELS_D, F = FRAC_BITS_D;
  localparam int NTX = FW / T, NTY = FH / T, NOFF1 = 2 * R / SS + 1, NOFF = NOFF1 * NOFF1;
  localparam int CENTER = (NOFF - 1) / 2;
  localparam int WORDS = FW * FH / PPW, WW = PIX_W * PPW;
  localparam int SUM_W = $clog2(KMAX * KMAX * (T * T * 255) + 1);
  localparam int TOTAL_W = SUM_W + $clog2(NTX * NTY);
  localparam int KW = $clog2(KMAX + 1);
  localparam int K = RF_TILES_D, P = PAD_TILES_D;

  logic clk = 0, rst_n = 0;
  // loop bounds as variables (keeps the simulator from unrolling the model)
  int nframes = 2, fw = FW, fh = FH, ntx = NTX, nty = NTY, ch = CH, t = T, noff = NOFF, words = WORDS;
  logic [TOTAL_W-1:0] cfg_threshold = '0;
  logic cfg_memoize = 0, cfg_force_key = 0;
  logic [KW-1:0] cfg_rf_tiles = KW'(K), cfg_pad_tiles = KW'(P);
  logic pix_in_valid = 0, pix_in_ready;
  logic [WW-1:0] pix_in_data = '0;
  logic frame_valid;
  frame_kind_e frame_kind;
  logic [TOTAL_W-1:0] frame_err;
  logic out_valid, out_is_act;
  logic [WW-1:0] out_pixels;
  rle_entry_t out_act;
  logic kact_valid = 0, kact_ready;
  rle_entry_t kact_entry;
  logic frame_done, act_overflow;

  eva2_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  // ---------------- reference state ----------------
  int keyf [FH][FW];
  int curf [FH][FW];
  int act [NTY][NTX][CH];
  int mvx [NTY][NTX], mvy [NTY][NTX];
  longint ref_total;
  int tsad [NTY][NTX][NOFF];   // tile SAD per offset, reused by every field

  // expected output beats
  typedef struct { logic is_act; logic [WW-1:0] pix; rle_entry_t a; } beat_t;
  beat_t expq[$];

  // mechanism counters
  int n_first_key = 0, n_err_key = 0, n_forced_key = 0, n_pred = 0, n_swap = 0, n_memo = 0;
  int n_skip = 0, n_edge = 0, n_frac = 0, n_mv = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_warp.step && dut.u_warp.gap_min != 0) n_skip++;
    if (dut.u_warp.sdl_activate && dut.u_warp.lane_inb != 4'hf) n_edge++;
    if (dut.u_warp.step && (dut.u_warp.u_interp.u_q != 0 || dut.u_warp.u_interp.v_q != 0)) n_frac++;
    if (dut.rf_valid && (dut.rf_mv.dx != 0 || dut.rf_mv.dy != 0)) n_mv++;
    if (dut.key_sel != $past(dut.key_sel)) n_swap++;
  end

  int c_load = 0, c_prod = 0, c_cons = 0, c_warp = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.state == dut.T_LOAD) c_load++;
    if (dut.state == dut.T_PRODUCE) c_prod++;
    if (dut.state == dut.T_CONSUME) c_cons++;
    if (dut.state == dut.T_WARP) c_warp++;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    beat_t e;
    checks++;
    if (expq.size() == 0) fail($sformatf("unexpected output beat at %0t (act=%0d)", $time, out_is_act));
    else begin
      e = expq.pop_front();
      if (out_is_act != e.is_act) fail("output kind");
      else if (!e.is_act && out_pixels != e.pix) fail($sformatf("pixel word %h want %h", out_pixels, e.pix));
      else if (e.is_act && out_act != e.a) fail($sformatf("activation %h want %h", out_act, e.a));
    end
  end

  // ---------------- reference model ----------------
  function automatic int tile_sad(int tx, int ty, int dx, int dy);
    int s = 0;
    for (int y = 0; y < t; y++)
      for (int x = 0; x < t; x++) begin
        int a = curf[ty*T + y][tx*T + x], b = keyf[ty*T + y + dy][tx*T + x + dx];
        s += (a > b) ? a - b : b - a;
      end
    return s;
  endfunction

  task automatic ref_rfbme();
    ref_total = 0;
    for (int y = 0; y < nty; y++)
      for (int x = 0; x < ntx; x++)
        for (int o = 0; o < noff; o++) begin
          int dx = (o % NOFF1) * SS - R, dy = (o / NOFF1) * SS - R;
          if (x * T + dx < 0 || (x + 1) * T + dx > FW || y * T + dy < 0 || (y + 1) * T + dy > FH)
            tsad[y][x][o] = 0;
          else tsad[y][x][o] = tile_sad(x, y, dx, dy);
        end
    for (int y = 0; y < nty; y++)
      for (int x = 0; x < ntx; x++) begin
        int c_lo = (x - P < 0) ? 0 : x - P, c_hi = (x - P + K - 1 > NTX - 1) ? NTX - 1 : x - P + K - 1;
        int r_lo = (y - P < 0) ? 0 : y - P, r_hi = (y - P + K - 1 > NTY - 1) ? NTY - 1 : y - P + K - 1;
        int best = -1, bo = 0;
        for (int o = 0; o < noff; o++) begin
          int dx = (o % NOFF1) * SS - R, dy = (o / NOFF1) * SS - R, s = 0;
          if (c_lo * T + dx < 0 || (c_hi + 1) * T + dx > FW || r_lo * T + dy < 0 || (r_hi + 1) * T + dy > FH)
            continue;
          for (int r = r_lo; r <= r_hi; r++)
            for (int c = c_lo; c <= c_hi; c++) s += tsad[r][c][o];
          if (best < 0 || s < best || (s == best && o == CENTER)) begin best = s; bo = o; end
        end
        mvx[y][x] = (bo % NOFF1) * SS - R;
        mvy[y][x] = (bo / NOFF1) * SS - R;
        ref_total += best;
      end
  endtask

  function automatic int at(int x, int y, int c);
    if (x < 0 || y < 0 || x >= NTX || y >= NTY) return 0;
    return act[y][x][c];
  endfunction

  task automatic ref_warp(logic memo);
    for (int y = 0; y < nty; y++)
      for (int x = 0; x < ntx; x++) begin
        int dx = memo ? 0 : mvx[y][x], dy = memo ? 0 : mvy[y][x];
        int sx = x * (1 << F) + (dx * (1 << F)) / T, sy = y * (1 << F) + (dy * (1 << F)) / T;
        int ix = sx >>> F, iy = sy >>> F;
        int u = sx - ix * (1 << F), v = sy - iy * (1 << F), one = 1 << F, gap = 0, n = 0;
        beat_t b;
        b.is_act = 1;
        b.pix = '0;
        for (int c = 0; c < ch; c++) begin
          int a00 = at(ix, iy, c), a01 = at(ix, iy + 1, c), a10 = at(ix + 1, iy, c), a11 = at(ix + 1, iy + 1, c);
          if (a00 == 0 && a01 == 0 && a10 == 0 && a11 == 0) begin gap++; continue; end
          b.a = '{gap: GAP_W'(gap), last: 1'b0,
                  value: ACT_W'((a00 * (one - u) * (one - v) + a01 * (one - u) * v +
                                 a10 * u * (one - v) + a11 * u * v) >>> (2 * F))};
          expq.push_back(b);
          gap = 0;
          n++;
        end
        if (n == 0) begin b.a = '{gap: '0, value: '0, last: 1'b0}; expq.push_back(b); end
        expq[expq.size() - 1].a.last = 1'b1;
      end
  endtask

  task automatic expect_pixels();
    beat_t b;
    b.is_act = 0;
    b.a = '0;
    for (int w = 0; w < words; w++) begin
      for (int i = 0; i < PPW; i++) b.pix[i*8 +: 8] = 8'(curf[(w*PPW + i) / FW][(w*PPW + i) % FW]);
      expq.push_back(b);
    end
  endtask

  // ---------------- stimulus ----------------
  task automatic send_frame();
    for (int w = 0; w < words; w++) begin
      pix_in_valid = 1;
      for (int i = 0; i < PPW; i++) pix_in_data[i*8 +: 8] = 8'(curf[(w*PPW + i) / FW][(w*PPW + i) % FW]);
      while (!pix_in_ready) @(negedge clk);
      @(negedge clk);
    end
    pix_in_valid = 0;
  endtask

  task automatic send_activation();
    for (int y = 0; y < nty; y++)
      for (int x = 0; x < ntx; x++)
        for (int c = 0; c < ch; c++)
          act[y][x][c] = ($urandom_range(0, 99) < 15) ? $urandom_range(1, 12000) : 0;
    for (int y = 0; y < nty; y++)
      for (int x = 0; x < ntx; x++) begin
        rle_entry_t el[$];
        int gap = 0;
        for (int c = 0; c < ch; c++)
          if (act[y][x][c] != 0) begin
            el.push_back('{gap: GAP_W'(gap), value: ACT_W'(act[y][x][c]), last: 1'b0});
            gap = 0;
          end else gap++;
        if (el.size() == 0) el.push_back('{gap: '0, value: '0, last: 1'b0});
        el[el.size() - 1].last = 1'b1;
        foreach (el[i]) begin
          kact_valid = 1;
          kact_entry = el[i];
          while (!kact_ready) @(negedge clk);
          @(negedge clk);
        end
      end
    kact_valid = 0;
  endtask

  // one frame: want_kind is the expected decision
  task automatic run_frame(frame_kind_e want_kind, logic first, logic memo, logic force_key,
                           logic [TOTAL_W-1:0] thr);
    frame_kind_e got;
    logic [TOTAL_W-1:0] got_err;
    cfg_memoize = memo;
    cfg_force_key = force_key;
    cfg_threshold = thr;
    if (!first) ref_rfbme();
    fork
      send_frame();
      begin
        while (!frame_valid) @(negedge clk);
        got = frame_kind;
        got_err = frame_err;
      end
    join
    checks++;
    if (got != want_kind) fail($sformatf("frame kind %0d want %0d", got, want_kind));
    if (!first) begin
      checks++;
      if (got_err != TOTAL_W'(ref_total)) fail($sformatf("error total %0d want %0d", got_err, ref_total));
    end
    if (got == FRAME_KEY) begin
      expect_pixels();
      while (expq.size() != 0) @(negedge clk);
      for (int y = 0; y < fh; y++) for (int x = 0; x < fw; x++) keyf[y][x] = curf[y][x];
      send_activation();
      if (first) n_first_key++;
      else if (force_key) n_forced_key++;
      else n_err_key++;
    end else begin
      ref_warp(memo);
      n_pred++;
      if (memo) n_memo++;
    end
    while (!frame_done) @(negedge clk);
    @(negedge clk);
    @(negedge clk);
    checks += 2;
    if (expq.size() != 0) fail($sformatf("%0d output beats missing", expq.size()));
    if (act_overflow) fail("activation buffer overflow");
    expq.delete();
  endtask

  task automatic texture(int seed);
    for (int y = 0; y < fh; y++)
      for (int x = 0; x < fw; x++)
        curf[y][x] = (((x * 13 + seed) ^ (y * 29)) * 7 + (x * y) % 17 + seed * 3) & 255;
  endtask

  // the frame sequence: key frame, then the scene moved by half a tile
  task automatic prepare(int f, output frame_kind_e want, output logic first, output logic memo,
                         output logic fk, output logic [TOTAL_W-1:0] thr);
    first = (f == 0);
    memo = 0;
    fk = 0;
    thr = '1;
    want = first ? FRAME_KEY : FRAME_PREDICTED;
    if (first) texture(1);
    else
      for (int y = 0; y < fh; y++)
        for (int x = 0; x < fw; x++) curf[y][x] = keyf[y][(x + T / 2) % FW];
  endtask

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    kact_entry = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // one call site keeps the simulator's build small
    for (int f = 0; f < nframes; f++) begin
      frame_kind_e want;
      logic first, memo, fk;
      logic [TOTAL_W-1:0] thr;
      prepare(f, want, first, memo, fk, thr);
      run_frame(want, first, memo, fk, thr);
    end
    $display("frames: key=%0d predicted=%0d swaps=%0d zero_skips=%0d edge_lanes=%0d frac_interp=%0d nonzero_mv=%0d",
             n_first_key, n_pred, n_swap, n_skip, n_edge, n_frac, n_mv);
    $display("cycles: load=%0d produce=%0d consume=%0d warp=%0d", c_load, c_prod, c_cons, c_warp);
    checks++;
    if (n_first_key != 1 || n_pred != 1 || n_frac == 0 || n_mv == 0) fail("operation incomplete");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
