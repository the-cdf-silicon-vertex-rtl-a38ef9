// tb_svt_slice: end-to-end test of one slice (4 AM chips x 8 patterns,
// 64-word spy buffers, all 30 planes).
// Three tracks in the slice: a clean one (road 3), one with two hits in one
// layer (road 17, giving two candidates and two fitted tracks, since ghost
// removal happens only after the slices), and one with a large constraint
// (road 30, removed by the chi2 cut).  Expected track words come from the
// fit formula.  Event 1 holds the output for 100 cycles; event 2 has a wrong
// tag on plane 1, which must pulse `error`.  The track-cable spy buffer is
// read back and compared with the output.
module tb_svt_slice;
  import svt_pkg::*;
  localparam int NPL = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  svt_word_t [NPL-1:0] strip_word;
  logic [NPL-1:0]      strip_valid, strip_hold;
  svt_word_t           xft_word, trk_word;
  logic                xft_valid, xft_hold, trk_valid, trk_hold;
  logic [3:0]          wedge = 4'd5;
  logic [7:0]          threshold = 8'd10;
  bin_cfg_t            cfg;
  logic                pat_we = 0;
  logic [ROAD_W-1:0]   pat_id = '0;
  logic [AM_LAYERS-1:0][SS_W-1:0] pat_data = '0;
  logic signed [5:0][5:0][7:0] coef = '0;
  logic [3:0]          shift = 4'd3;
  logic [25:0]         chi2_max = 26'd10000;
  logic                const_we = 0;
  logic [5:0][15:0]    const_edge = '0;
  logic signed [5:0][17:0] const_base = '0;
  logic                freeze = 0;
  logic [1:0]          spy_sel = 2'd3;
  logic [3:0]          spy_source_mode = '0;
  logic                spy_source_start = 0, spy_we = 0;
  logic [5:0]          spy_source_len = '0, spy_addr = '0, spy_wptr;
  svt_word_t           spy_wdata = '0, spy_rdata;
  logic                error, hb_overflow, fit_start;

  svt_slice #(.NCHIPS(4), .NPATT(8), .SPY_DEPTH(64)) dut (.*);
  cable_sink #(.HOLD_PCT(10)) u_snk (.clk, .rst_n, .word(trk_word), .valid(trk_valid), .hold(trk_hold));

  svt_word_t sq [NPL+1][$];
  for (genvar p = 0; p <= NPL; p++) begin : g_p
    svt_word_t w;
    logic      v, h;
    if (p < NPL) begin : g_strip
      assign strip_word[p]  = w;
      assign strip_valid[p] = v;
      assign h = strip_hold[p];
    end else begin : g_xft
      assign xft_word  = w;
      assign xft_valid = v;
      assign h = xft_hold;
    end
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v <= 1'b0;
        w <= '0;
      end else begin
        if (v && !h) void'(sq[p].pop_front());
        if (sq[p].size() > 0) begin
          v <= 1'b1;
          w <= sq[p][0];
        end else v <= 1'b0;
      end
    end
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_stall = 0, n_fit = 0, n_err = 0;
  always @(posedge clk) if (rst_n) begin
    if (trk_valid && trk_hold) n_stall++;
    if (fit_start) n_fit++;
    if (error) n_err++;
  end

  typedef struct { int road, c6, phi, b; int ch[4]; int off[6]; int chi_base; } trk_t;
  trk_t tracks[$];

  function automatic int clipi(int v, int lo, int hi);
    return v < lo ? lo : v > hi ? hi : v;
  endfunction

  function automatic void coords(trk_t t, int extra, output int x[6]);
    x[0] = (t.c6 & 63) ^ 32;
    x[1] = t.phi;
    for (int i = 0; i < 4; i++) x[2 + i] = (t.ch[i] + ((i == 1) ? extra : 0)) * 8;
  endfunction

  task automatic load_track(trk_t t);
    int x[6];
    coords(t, 0, x);
    @(negedge clk);
    pat_we = 1; const_we = 1; pat_id = ROAD_W'(t.road);
    pat_data[0] = SS_W'(t.phi * 2048 >> 16);
    for (int a = 1; a < 5; a++) pat_data[a] = {3'(t.b), 10'((t.ch[a-1] * 8 * 2048) >> 16)};
    for (int i = 0; i < 6; i++) const_edge[i] = 16'(x[i] - t.off[i]);
    const_base[0] = 18'sd20; const_base[1] = 18'sd900; const_base[2] = -18'sd30;
    const_base[3] = 18'(t.chi_base); const_base[4] = '0; const_base[5] = '0;
    @(negedge clk);
    pat_we = 0; const_we = 0;
  endtask

  svt_word_t expq[$];

  task automatic expect_track(trk_t t, int extra);
    int x[6], e[6], dx[6], res[6], chi2;
    coords(t, 0, e);
    for (int i = 0; i < 6; i++) e[i] -= t.off[i];
    coords(t, extra, x);
    for (int i = 0; i < 6; i++) dx[i] = clipi(x[i] - e[i], 0, 255);
    res[0] = 20 + dx[0];
    res[1] = 900 + dx[1];
    res[2] = -30 + ((2 * (dx[2] + dx[3] + dx[4] + dx[5])) >>> 3);
    res[3] = t.chi_base + dx[2] - dx[3];
    chi2 = res[3] ** 2;
    if (chi2 > 10000) return;
    expq.push_back(make_word({4'd5, 6'(t.c6), 11'(t.phi)}, 1'b0, 1'b0));
    expq.push_back(make_word({10'(res[0]), 11'(clipi(res[1], 0, 2047))}, 1'b0, 1'b0));
    expq.push_back(make_word({11'(res[2]), 10'(chi2 > 1023 ? 1023 : chi2)}, 1'b1, 1'b0));
  endtask

  task automatic send_event(int ev, int bad_tag);
    for (int p = 0; p < NPL; p++) begin
      automatic int chs[$];
      automatic logic par = 0;
      foreach (tracks[k]) if (p / 5 == tracks[k].b && p % 5 < 4) begin
        chs.push_back(tracks[k].ch[p % 5]);
        if (k == 1 && p % 5 == 1) chs.push_back(tracks[k].ch[1] + 2);
      end
      chs.sort();
      foreach (chs[i]) begin
        automatic svt_word_t w = make_word({1'b0, 12'(chs[i]), 8'd100}, 1'b1, 1'b0);
        sq[p].push_back(w);
        par ^= ^w.data;
      end
      begin
        automatic svt_word_t e = make_ee(8'((bad_tag && p == 1) ? 99 : ev));
        e.data[PARITY_BIT] = par;
        sq[p].push_back(e);
      end
    end
    begin
      automatic logic par = 0;
      foreach (tracks[k]) begin
        automatic svt_word_t w = make_word({3'd5, 1'b0, 6'(tracks[k].c6), 11'(tracks[k].phi)}, 1'b1, 1'b0);
        sq[NPL].push_back(w);
        par ^= ^w.data;
      end
      begin
        automatic svt_word_t e = make_ee(8'(ev));
        e.data[PARITY_BIT] = par;
        sq[NPL].push_back(e);
      end
    end
    foreach (tracks[k]) begin
      expect_track(tracks[k], 0);
      if (k == 1) expect_track(tracks[k], 2);
    end
    expq.push_back(make_ee(8'(ev)));
  endtask

  function automatic int n_ee();
    int n = 0;
    foreach (u_snk.got[i]) if (u_snk.got[i].ee) n++;
    return n;
  endfunction

  initial begin
    trk_t t;
    for (int l = 0; l < 5; l++) begin
      cfg.sil_use[l] = (l != 4);
      cfg.sil_am_layer[l] = (l != 4) ? 3'(l + 1) : 3'd0;
      cfg.recip[l] = 16'd2048;
    end
    cfg.swim_k = '0;
    coef[0][0] = 8'sd8; coef[1][1] = 8'sd8;
    for (int i = 2; i < 6; i++) coef[2][i] = 8'sd2;
    coef[3][2] = 8'sd8; coef[3][3] = -8'sd8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    t.road = 3;  t.c6 = 5;  t.phi = 700;  t.b = 2; t.ch = '{64, 129, 300, 401};
    t.off = '{3, 7, 5, 9, 2, 4}; t.chi_base = 10; tracks.push_back(t);
    t.road = 17; t.c6 = 60; t.phi = 1500; t.b = 4; t.ch = '{500, 600, 700, 800};
    t.off = '{1, 2, 3, 4, 5, 6}; t.chi_base = 40; tracks.push_back(t);
    t.road = 30; t.c6 = 33; t.phi = 100;  t.b = 0; t.ch = '{10, 20, 30, 40};
    t.off = '{0, 0, 0, 0, 0, 0}; t.chi_base = 500; tracks.push_back(t);
    foreach (tracks[k]) load_track(tracks[k]);

    send_event(0, 0);
    while (n_ee() < 1) @(posedge clk);
    for (int i = 0; i < u_snk.got.size(); i++) begin
      @(negedge clk) spy_addr = 6'(i);
      @(negedge clk);
      check(spy_rdata == u_snk.got[i], $sformatf("spy word %0d", i));
    end
    u_snk.force_hold = 1;
    send_event(1, 0);
    repeat (100) @(posedge clk);
    u_snk.force_hold = 0;
    while (n_ee() < 2) @(posedge clk);
    check(n_err == 0, "no error before event 2");
    send_event(2, 1);
    while (n_ee() < 3) @(posedge clk);
    repeat (10) @(posedge clk);
    check(n_err == 1, $sformatf("%0d error pulses, expected 1", n_err));
    check(u_snk.got.size() == expq.size(), $sformatf("%0d words, expected %0d", u_snk.got.size(), expq.size()));
    foreach (expq[k]) begin
      automatic svt_word_t g = u_snk.got[k];
      if (g.ee) g.data[PARITY_BIT] = 1'b0;
      check(g == expq[k], $sformatf("word %0d %h expected %h", k, g, expq[k]));
    end
    check(n_stall > 0, "stall happened");
    check(n_fit == 12, $sformatf("%0d fits, expected 12", n_fit));
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
