// tb_svt_top: end-to-end test of the whole trigger at its full size
// (12 slices, 30 planes each, 256 AM chips x 128 patterns per slice, spy
// buffers of 100000 words).
//
// The host loads bin widths (4 strips per superstrip), fit coefficients and,
// for three slices, a few patterns with their fit constants.  Each event then
// feeds strip data to all 360 planes and XFT tracks to all 12 slices:
//   slice 3  one clean track                    -> one fitted track
//   slice 7  a track with two hits in one layer  -> two candidates with the
//            same XFT track; the clean-up board keeps the lower chi2 (ghost)
//   slice 9  a track whose constraint is large   -> removed by the chi2 cut
// Expected words are computed here from the fit formula and the beam
// correction.  Event 1 runs with the output held for 200 cycles (stall);
// event 2 has a wrong event tag on one plane, which must raise the error
// line and freeze all spy buffers.  The clean-up output spy buffer is read
// back and compared with the words seen on the output cable.
module tb_svt_top;
  import svt_pkg::*;
  localparam int NSL = 12, NPL = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  svt_word_t [NSL-1:0][NPL-1:0] strip_word;
  logic [NSL-1:0][NPL-1:0]      strip_valid, strip_hold;
  svt_word_t [NSL-1:0]          xft_word;
  logic [NSL-1:0]               xft_valid, xft_hold;
  logic                         l1_accept = 0;
  svt_word_t                    out_word;
  logic                         out_valid, out_hold;
  logic [7:0]                   threshold = 8'd10;
  bin_cfg_t                     cfg;
  logic [3:0]                   cfg_slice = '0;
  logic                         pat_we = 0;
  logic [ROAD_W-1:0]            pat_id = '0;
  logic [AM_LAYERS-1:0][SS_W-1:0] pat_data = '0;
  logic signed [5:0][5:0][7:0]  coef = '0;
  logic [3:0]                   shift = 4'd3;
  logic [25:0]                  chi2_max = 26'd10000;
  logic                         const_we = 0;
  logic [5:0][15:0]             const_edge = '0;
  logic signed [5:0][17:0]      const_base = '0;
  logic signed [11:0]           beam_x = 12'sd40, beam_y = -12'sd25;
  logic                         host_freeze = 0, err_clear = 0;
  logic [5:0]                   spy_sel = 6'd49;
  logic                         spy_source_mode = 0, spy_source_start = 0, spy_we = 0;
  logic [16:0]                  spy_source_len = '0, spy_addr = '0, spy_wptr;
  svt_word_t                    spy_wdata = '0, spy_rdata;
  logic                         error_line, frozen, ghost, trk_overflow;
  logic [NSL-1:0]               fit_start, hb_overflow;

  svt_top dut (.*);

  cable_sink #(.HOLD_PCT(10)) u_snk (.clk, .rst_n, .word(out_word), .valid(out_valid), .hold(out_hold));

  // ---- drivers for the 372 input cables
  svt_word_t sq [NSL][NPL+1][$];
  for (genvar s = 0; s < NSL; s++) begin : g_s
    for (genvar p = 0; p <= NPL; p++) begin : g_p
      svt_word_t w;
      logic      v, h;
      if (p < NPL) begin : g_strip
        assign strip_word[s][p]  = w;
        assign strip_valid[s][p] = v;
        assign h = strip_hold[s][p];
      end else begin : g_xft
        assign xft_word[s]  = w;
        assign xft_valid[s] = v;
        assign h = xft_hold[s];
      end
      always @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          v <= 1'b0;
          w <= '0;
        end else begin
          if (v && !h) void'(sq[s][p].pop_front());
          if (sq[s][p].size() > 0) begin
            v <= 1'b1;
            w <= sq[s][p][0];
          end else v <= 1'b0;
        end
      end
    end
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- mechanism counters
  int n_stall = 0, n_ghost = 0, n_fit = 0, n_err = 0, n_frozen = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_hold) n_stall++;
    if (ghost) n_ghost++;
    n_fit += $countones(fit_start);
    if (error_line) n_err++;
    if (frozen) n_frozen++;
  end

  // ---- scenario
  // a track: XFT (c, phi) and one strip channel per used layer (0..3), barrel b
  typedef struct { int s, road, c6, phi, b; int ch[4]; int off[6]; int chi_base; } trk_t;
  trk_t tracks[$];

  function automatic int clipi(int v, int lo, int hi);
    return v < lo ? lo : v > hi ? hi : v;
  endfunction

  // fit coefficients: c = b0 + dx0, phi = b1 + dx1, d = b2 + (dx2+dx3+dx4+dx5)/4,
  // chi0 = b3 + dx2 - dx3, chi1 = chi2 = 0
  function automatic void fit(trk_t t, int x[6], int edge_[6], output int res[6]);
    int dx[6];
    for (int i = 0; i < 6; i++) dx[i] = clipi(x[i] - edge_[i], 0, 255);
    res[0] = 20 + ((8 * dx[0]) >>> 3);
    res[1] = 900 + ((8 * dx[1]) >>> 3);
    res[2] = -30 + ((2 * (dx[2] + dx[3] + dx[4] + dx[5])) >>> 3);
    res[3] = t.chi_base + ((8 * dx[2] - 8 * dx[3]) >>> 3);
    res[4] = 0;
    res[5] = 0;
  endfunction

  function automatic void coords(trk_t t, int extra, output int x[6]);
    x[0] = (t.c6 & 63) ^ 32;
    x[1] = t.phi;
    for (int i = 0; i < 4; i++) x[2 + i] = (t.ch[i] + ((i == 1) ? extra : 0)) * 8;
  endfunction

  task automatic load_track(trk_t t);
    int x[6], e[6];
    coords(t, 0, x);
    for (int i = 0; i < 6; i++) e[i] = x[i] - t.off[i];
    @(negedge clk);
    cfg_slice = 4'(t.s);
    pat_we = 1; const_we = 1; pat_id = ROAD_W'(t.road);
    pat_data[0] = SS_W'(t.phi * 2048 >> 16);
    for (int a = 1; a < 5; a++) pat_data[a] = {3'(t.b), 10'((t.ch[a-1] * 8 * 2048) >> 16)};
    for (int i = 0; i < 6; i++) const_edge[i] = 16'(e[i]);
    const_base[0] = 18'sd20; const_base[1] = 18'sd900; const_base[2] = -18'sd30;
    const_base[3] = 18'(t.chi_base); const_base[4] = '0; const_base[5] = '0;
    @(negedge clk);
    pat_we = 0; const_we = 0;
  endtask

  svt_word_t expq[$];
  int        exp_time_idx[$];

  // expected cleanup output of one track combination
  function automatic void expect_track(trk_t t, int extra, ref int best_chi2, ref svt_word_t bw[3]);
    int x[6], e[6], res[6], chi2, dd;
    real phi_g, corr;
    coords(t, 0, x);
    for (int i = 0; i < 6; i++) e[i] = x[i] - t.off[i];
    coords(t, extra, x);
    fit(t, x, e, res);
    chi2 = clipi(res[3], -4095, 4095) ** 2;
    if (chi2 > 10000 || chi2 >= best_chi2) return;
    best_chi2 = chi2;
    phi_g = real'(t.s * 64 + (clipi(res[1], 0, 2047) >> 5)) * 2.0 * 3.14159265358979 / 768.0;
    corr  = 40.0 * $sin(phi_g) + 25.0 * $cos(phi_g);
    dd = clipi(res[2], -1024, 1023) - $rtoi(corr + ((corr >= 0) ? 0.5 : -0.5));
    bw[0] = make_word({4'(t.s), 6'(t.c6), 11'(t.phi)}, 1'b0, 1'b0);
    bw[1] = make_word({10'(clipi(res[0], -512, 511)), 11'(clipi(res[1], 0, 2047))}, 1'b0, 1'b0);
    bw[2] = make_word({11'(dd), 10'(chi2 > 1023 ? 1023 : chi2)}, 1'b1, 1'b0);
  endfunction

  task automatic send_event(int ev, int bad_tag);
    // strips: every plane gets its track strips (if any) then EE
    for (int s = 0; s < NSL; s++) begin
      for (int p = 0; p < NPL; p++) begin
        automatic int chs[$];
        automatic logic par = 0;
        foreach (tracks[k]) if (tracks[k].s == s && p / 5 == tracks[k].b && p % 5 < 4) begin
          chs.push_back(tracks[k].ch[p % 5]);
          if (k == 1 && p % 5 == 1) chs.push_back(tracks[k].ch[1] + 2);   // second hit, same superstrip
        end
        if (p % 5 == 4) chs.push_back(300);                               // unused layer
        chs.sort();
        foreach (chs[i]) begin
          automatic svt_word_t w = make_word({1'b0, 12'(chs[i]), 8'd100}, 1'b1, 1'b0);
          sq[s][p].push_back(w);
          par ^= ^w.data;
        end
        begin
          automatic svt_word_t e = make_ee(8'((bad_tag && s == 0 && p == 1) ? 99 : ev));
          e.data[PARITY_BIT] = par;
          sq[s][p].push_back(e);
        end
      end
      begin
        automatic logic par = 0;
        foreach (tracks[k]) if (tracks[k].s == s) begin
          automatic svt_word_t w = make_word({3'd5, 1'b0, 6'(tracks[k].c6), 11'(tracks[k].phi)}, 1'b1, 1'b0);
          sq[s][NPL].push_back(w);
          par ^= ^w.data;
        end
        begin
          automatic svt_word_t e = make_ee(8'(ev));
          e.data[PARITY_BIT] = par;
          sq[s][NPL].push_back(e);
        end
      end
    end
    // expected output: slice order, one track per XFT track
    foreach (tracks[k]) begin
      automatic int best = 1 << 30;
      automatic svt_word_t bw[3];
      expect_track(tracks[k], 0, best, bw);
      if (k == 1) expect_track(tracks[k], 2, best, bw);
      if (best != (1 << 30)) for (int i = 0; i < 3; i++) expq.push_back(bw[i]);
    end
    exp_time_idx.push_back(expq.size());
    expq.push_back(make_word('0, 1'b1, 1'b0));   // timing word, value checked apart
    expq.push_back(make_ee(8'(ev)));
  endtask

  function automatic int n_ee();
    int n = 0;
    foreach (u_snk.got[i]) if (u_snk.got[i].ee) n++;
    return n;
  endfunction

  task automatic wait_ee(int n);
    while (n_ee() < n) @(posedge clk);
  endtask

  initial begin
    trk_t t;
    for (int l = 0; l < 5; l++) begin
      cfg.sil_use[l] = (l != 4);
      cfg.sil_am_layer[l] = (l != 4) ? 3'(l + 1) : 3'd0;
      cfg.recip[l] = 16'd2048;            // superstrip = 4 strips (32 units)
    end
    cfg.swim_k = '0;
    coef[0][0] = 8'sd8; coef[1][1] = 8'sd8;
    for (int i = 2; i < 6; i++) coef[2][i] = 8'sd2;
    coef[3][2] = 8'sd8; coef[3][3] = -8'sd8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // tracks: slice, road, c6, phi, barrel, 4 channels, edge offsets, chi base
    t.s = 3; t.road = 200;   t.c6 = 5;  t.phi = 700;  t.b = 2; t.ch = '{64, 129, 300, 401};
    t.off = '{3, 7, 5, 9, 2, 4}; t.chi_base = 10; tracks.push_back(t);
    t.s = 7; t.road = 31000; t.c6 = 60; t.phi = 1500; t.b = 4; t.ch = '{500, 600, 700, 800};
    t.off = '{1, 2, 3, 4, 5, 6}; t.chi_base = 40; tracks.push_back(t);
    t.s = 9; t.road = 5;     t.c6 = 33; t.phi = 100;  t.b = 0; t.ch = '{10, 20, 30, 40};
    t.off = '{0, 0, 0, 0, 0, 0}; t.chi_base = 500; tracks.push_back(t);
    foreach (tracks[k]) load_track(tracks[k]);

    // event 0: plain
    @(negedge clk) l1_accept = 1;
    @(negedge clk) l1_accept = 0;
    send_event(0, 0);
    wait_ee(1);
    // read back the output spy buffer and compare with the cable
    for (int i = 0; i < u_snk.got.size(); i++) begin
      @(negedge clk) spy_addr = 17'(i);
      @(negedge clk);
      check(spy_rdata == u_snk.got[i], $sformatf("spy word %0d %h, cable %h", i, spy_rdata, u_snk.got[i]));
    end
    // event 1: output held for 200 cycles
    u_snk.force_hold = 1;
    @(negedge clk) l1_accept = 1;
    @(negedge clk) l1_accept = 0;
    send_event(1, 0);
    repeat (200) @(posedge clk);
    u_snk.force_hold = 0;
    wait_ee(2);
    check(!error_line && !frozen, "no error before event 2");
    // event 2: wrong tag on one plane
    @(negedge clk) l1_accept = 1;
    @(negedge clk) l1_accept = 0;
    send_event(2, 1);
    wait_ee(3);
    repeat (20) @(posedge clk);
    check(error_line && frozen, "tag mismatch raises the error line and freezes");
    begin
      automatic logic [16:0] wp = spy_wptr;
      check(int'(wp) < u_snk.got.size(), "frozen spy stopped recording");
    end
    @(negedge clk) err_clear = 1;
    @(negedge clk) err_clear = 0;
    @(negedge clk);
    check(!error_line, "error cleared");

    // compare the cable
    check(u_snk.got.size() == expq.size(), $sformatf("%0d words out, expected %0d", u_snk.got.size(), expq.size()));
    foreach (expq[k]) begin
      automatic svt_word_t g = u_snk.got[k];
      automatic bit is_time = 0;
      foreach (exp_time_idx[j]) if (exp_time_idx[j] == k) is_time = 1;
      if (g.ee) g.data[PARITY_BIT] = 1'b0;
      if (is_time) check(g.ep && g.data[19:0] > 20'd10, $sformatf("timing word %0d", g.data[19:0]));
      else         check(g == expq[k], $sformatf("word %0d %h expected %h", k, g, expq[k]));
    end
    // every mechanism happened
    check(n_stall > 0,  $sformatf("stall seen %0d cycles", n_stall));
    check(n_ghost == 3, $sformatf("ghost removals %0d, expected 3", n_ghost));
    check(n_fit == 12,  $sformatf("fits %0d, expected 12", n_fit));
    check(n_err > 0 && n_frozen > 0, "error line and freeze");
    begin
      automatic int n_out = 0, n_rej;
      foreach (u_snk.got[i]) if (u_snk.got[i].ep && !u_snk.got[i].ee && i > 0 && !u_snk.got[i-1].ep && !u_snk.got[i-1].ee) n_out++;
      n_rej = n_fit - n_out - n_ghost;
      check(n_rej == 3, $sformatf("chi2 cut rejections %0d, expected 3", n_rej));
      $display("mechanisms: stall=%0d ghost=%0d fits=%0d chi2_rejects=%0d error=%0d frozen=%0d",
               n_stall, n_ghost, n_fit, n_rej, n_err, n_frozen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
