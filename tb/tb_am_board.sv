// tb_am_board: checks the AM board (4 chips x 8 patterns = 32 roads).
// Bins are 8 coordinate units wide (recip = 8192); silicon layers 0..3 feed
// AM layers 1..4 and layer 4 is unused.  Each of 6 events holds hits that
// complete a few random patterns, partial hits and hits on the unused
// layer.  The expected roads come from a brute-force match over the stored
// patterns.  Roads must come out in increasing ID order followed by the EE
// word, and with no gaps or hold the event must take exactly
// (words in) + (roads out) + a constant number of cycles.
module tb_am_board;
  import svt_pkg::*;
  localparam int NCH = 4, NP = 8, NR = NCH * NP;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bin_cfg_t cfg;
  logic pat_we = 0;
  logic [ROAD_W-1:0] pat_id = '0;
  logic [AM_LAYERS-1:0][SS_W-1:0] pat_data = '0;
  svt_word_t in_word, out_word;
  logic in_valid, in_hold, out_valid, out_hold, parity_err;

  am_board #(.NCHIPS(NCH), .NPATT(NP), .FIFO_DEPTH(64)) dut (.*);
  cable_source #(.GAP_PCT(0)) u_src (.clk, .rst_n, .word(in_word), .valid(in_valid), .hold(in_hold));
  cable_sink #(.HOLD_PCT(0)) u_snk (.clk, .rst_n, .word(out_word), .valid(out_valid), .hold(out_hold));

  logic [AM_LAYERS-1:0][SS_W-1:0] pats [NR];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [DATA_W-1:0] hit_for(int a, logic [SS_W-1:0] s);
    if (a == 0) return {3'd5, 1'b0, 6'd0, 11'(s[7:0] * 8 + $urandom_range(0, 7))};
    return {3'(a - 1), s[12:10], 15'(s[9:0] * 8 + $urandom_range(0, 7))};
  endfunction

  function automatic logic [SS_W-1:0] rand_ss(int a);
    if (a == 0) return SS_W'($urandom_range(0, 7));
    return {3'($urandom_range(0, 1)), 10'($urandom_range(0, 5))};
  endfunction

  int t_first, t_ee, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    int base_const = -1;
    for (int l = 0; l < 5; l++) begin
      cfg.sil_use[l] = (l != 4);
      cfg.sil_am_layer[l] = (l != 4) ? 3'(l + 1) : 3'd0;
      cfg.recip[l] = 16'd8192;
    end
    cfg.swim_k = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++) begin
      for (int a = 0; a < AM_LAYERS; a++) pats[r][a] = rand_ss(a);
      @(negedge clk);
      pat_we = 1; pat_id = ROAD_W'(r); pat_data = pats[r];
    end
    @(negedge clk) pat_we = 0;
    for (int ev = 0; ev < 6; ev++) begin
      automatic bit [AM_LAYERS-1:0] m [NR];
      automatic int exp_r[$];
      automatic int nin = 0, n0;
      for (int r = 0; r < NR; r++) m[r] = '0;
      for (int k = 0; k < 3; k++) begin
        automatic int r = $urandom_range(0, NR-1);
        for (int a = 0; a < AM_LAYERS; a++) begin
          u_src.push(make_word(hit_for(a, pats[r][a]), 1'b1, 1'b0)); nin++;
          for (int q = 0; q < NR; q++) if (pats[q][a] == pats[r][a]) m[q][a] = 1;
        end
      end
      for (int k = 0; k < 10; k++) begin
        automatic int a = $urandom_range(0, 4);
        automatic logic [SS_W-1:0] s = rand_ss(a);
        u_src.push(make_word(hit_for(a, s), 1'b1, 1'b0)); nin++;
        for (int q = 0; q < NR; q++) if (pats[q][a] == s) m[q][a] = 1;
      end
      u_src.push(make_word({3'd4, 3'd0, 15'd100}, 1'b1, 1'b0)); nin++;   // unused layer
      u_src.push(make_ee(8'(ev))); nin++;
      for (int r = 0; r < NR; r++) if (&m[r]) exp_r.push_back(r);
      n0 = u_snk.got.size();
      t_first = cyc;
      wait (u_snk.got.size() > n0 && u_snk.got[$].ee);
      t_ee = u_snk.when[$];
      check(u_snk.got.size() - n0 == exp_r.size() + 1, $sformatf("ev %0d: %0d words, expected %0d", ev, u_snk.got.size() - n0, exp_r.size() + 1));
      foreach (exp_r[k])
        check(u_snk.got[n0 + k].data == DATA_W'(exp_r[k]) && u_snk.got[n0 + k].ep, $sformatf("ev %0d road %0d", ev, k));
      check(u_snk.got[$].data[TAG_W-1:0] == 8'(ev), "EE tag");
      if (base_const < 0) base_const = (t_ee - t_first) - nin - exp_r.size();
      check((t_ee - t_first) - nin - exp_r.size() == base_const,
            $sformatf("ev %0d latency %0d not linear (const %0d)", ev, t_ee - t_first, base_const));
      repeat (3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
