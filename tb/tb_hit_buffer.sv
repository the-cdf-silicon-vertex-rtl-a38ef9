// tb_hit_buffer: checks the hit buffer (64 roads, up to 4 hits per bucket).
// Each of 5 events sends hits for a few random roads, with some superstrips
// getting two or three hits and one getting six (overflow expected), then a
// road list that also holds roads with an empty superstrip.  The expected
// candidates are enumerated here: for every road with hits in all five
// superstrips, every combination of one hit per layer, layer 4 varying
// fastest, as road word + five hit words with EP on the last.  Random gaps
// and hold on all cables.
module tb_hit_buffer;
  import svt_pkg::*;
  localparam int NR = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bin_cfg_t cfg;
  logic pat_we = 0;
  logic [ROAD_W-1:0] pat_id = '0;
  logic [AM_LAYERS-1:0][SS_W-1:0] pat_data = '0;
  svt_word_t hit_word, road_word, out_word;
  logic hit_valid, hit_hold, road_valid, road_hold, out_valid, out_hold, overflow, parity_err;

  hit_buffer #(.NROADS(NR), .MAXH(4), .FIFO_DEPTH(8)) dut (.*);
  cable_source #(.GAP_PCT(20)) u_hs (.clk, .rst_n, .word(hit_word), .valid(hit_valid), .hold(hit_hold));
  cable_source #(.GAP_PCT(20)) u_rs (.clk, .rst_n, .word(road_word), .valid(road_valid), .hold(road_hold));
  cable_sink #(.HOLD_PCT(20)) u_snk (.clk, .rst_n, .word(out_word), .valid(out_valid), .hold(out_hold));

  logic [AM_LAYERS-1:0][SS_W-1:0] pats [NR];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [DATA_W-1:0] hit_for(int a, logic [SS_W-1:0] s);
    if (a == 0) return {3'd5, 1'b0, 6'($urandom_range(0, 63)), 11'(s[7:0] * 8 + $urandom_range(0, 7))};
    return {3'(a - 1), s[12:10], 15'(s[9:0] * 8 + $urandom_range(0, 7))};
  endfunction

  svt_word_t expq[$];

  initial begin
    for (int l = 0; l < 5; l++) begin
      cfg.sil_use[l] = (l != 4);
      cfg.sil_am_layer[l] = (l != 4) ? 3'(l + 1) : 3'd0;
      cfg.recip[l] = 16'd8192;
    end
    cfg.swim_k = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++) begin
      for (int a = 0; a < AM_LAYERS; a++)
        pats[r][a] = (a == 0) ? SS_W'($urandom_range(0, 15)) : {3'($urandom_range(0, 1)), 10'($urandom_range(0, 7))};
      @(negedge clk);
      pat_we = 1; pat_id = ROAD_W'(r); pat_data = pats[r];
    end
    @(negedge clk) pat_we = 0;
    for (int ev = 0; ev < 5; ev++) begin
      automatic logic [DATA_W-1:0] bk [int][$];
      automatic int roads[$];
      for (int k = 0; k < 4; k++) begin
        automatic int r = $urandom_range(0, NR-1);
        for (int a = 0; a < AM_LAYERS; a++) begin
          automatic int n = (ev == 2 && k == 0 && a == 2) ? 6 : $urandom_range(1, 2);
          for (int h = 0; h < n; h++) begin
            automatic logic [DATA_W-1:0] d = hit_for(a, pats[r][a]);
            automatic int key = a * 8192 + int'(pats[r][a]);
            u_hs.push(make_word(d, 1'b1, 1'b0));
            if (bk[key].size() < 4) bk[key].push_back(d);
          end
        end
        roads.push_back(r);
      end
      for (int k = 0; k < 4; k++) roads.push_back($urandom_range(0, NR-1));
      u_hs.push(make_ee(8'(ev)));
      foreach (roads[i]) u_rs.push(make_word(DATA_W'(roads[i]), 1'b1, 1'b0));
      u_rs.push(make_ee(8'(ev)));
      foreach (roads[i]) begin
        automatic int r = roads[i];
        automatic int key[AM_LAYERS];
        automatic bit ok = 1;
        for (int a = 0; a < AM_LAYERS; a++) begin
          key[a] = a * 8192 + int'(pats[r][a]);
          if (!bk.exists(key[a]) || bk[key[a]].size() == 0) ok = 0;
        end
        if (ok)
          foreach (bk[key[0]][i0]) foreach (bk[key[1]][i1]) foreach (bk[key[2]][i2])
            foreach (bk[key[3]][i3]) foreach (bk[key[4]][i4]) begin
              expq.push_back(make_word(DATA_W'(r), 1'b0, 1'b0));
              expq.push_back(make_word(bk[key[0]][i0], 1'b0, 1'b0));
              expq.push_back(make_word(bk[key[1]][i1], 1'b0, 1'b0));
              expq.push_back(make_word(bk[key[2]][i2], 1'b0, 1'b0));
              expq.push_back(make_word(bk[key[3]][i3], 1'b0, 1'b0));
              expq.push_back(make_word(bk[key[4]][i4], 1'b1, 1'b0));
            end
      end
      expq.push_back(make_ee(8'(ev)));
    end
    while (!(u_snk.got.size() >= expq.size() && u_hs.pending() == 0 && u_rs.pending() == 0)) @(posedge clk);
    repeat (20) @(posedge clk);
    check(u_snk.got.size() == expq.size(), $sformatf("%0d words, expected %0d", u_snk.got.size(), expq.size()));
    foreach (expq[k]) begin
      svt_word_t g;
      g = u_snk.got[k];
      if (g.ee) g.data[PARITY_BIT] = 1'b0;
      check(g == expq[k], $sformatf("word %0d %h expected %h", k, g, expq[k]));
    end
    check(overflow, "bucket overflow flagged");
    check(expq.size() > 100, "enough candidates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("timeout: got %0d of %0d, hits left %0d roads left %0d, state %0d", u_snk.got.size(), expq.size(), u_hs.pending(), u_rs.pending(), dut.state);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
