// tb_cleanup: checks ghost removal, beam-offset subtraction and timing.
// Four events of random tracks where several tracks share an XFT track (same
// first word).  Expected output, computed here: one track per key in order of
// first appearance, the one with the lowest chi2 (first one on a tie), with
// d' = d - (bx sin(phi) - by cos(phi)) evaluated with real sin/cos (one unit
// of rounding allowed), then a timing word equal to the cycles from the L1
// accept pulse to the arrival of the EE word (within 4 cycles), then EE.
module tb_cleanup;
  import svt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [11:0] bx = 12'sd300, by = -12'sd170;
  logic l1_accept = 0;
  svt_word_t in_word, out_word;
  logic in_valid, in_hold, out_valid, out_hold, overflow, parity_err, ghost;

  cleanup #(.MAXTRK(16), .FIFO_DEPTH(8)) dut (.*);
  cable_source #(.GAP_PCT(30)) u_src (.clk, .rst_n, .word(in_word), .valid(in_valid), .hold(in_hold));
  cable_sink #(.HOLD_PCT(20)) u_snk (.clk, .rst_n, .word(out_word), .valid(out_valid), .hold(out_hold));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc = 0, l1_cyc[$], ee_cyc[$];
  int nghost = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && l1_accept) l1_cyc.push_back(cyc);
    if (rst_n && in_valid && !in_hold && in_word.ee) ee_cyc.push_back(cyc);
    if (rst_n && ghost) nghost++;
  end

  typedef struct { logic [20:0] k, w1, w2; } trk_t;
  trk_t expt[4][$];
  int   exp_dups = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 4; ev++) begin
      automatic trk_t list[$];
      @(negedge clk) l1_accept = 1;
      @(negedge clk) l1_accept = 0;
      repeat ($urandom_range(5, 40)) @(negedge clk);
      for (int t = 0; t < 10; t++) begin
        automatic trk_t tr;
        automatic int found = -1;
        if (t > 0 && $urandom_range(0, 2) == 0) tr.k = list[$urandom_range(0, list.size()-1)].k;
        else tr.k = {4'($urandom_range(0, 11)), 17'($urandom)};
        tr.w1 = {10'($urandom), 11'($urandom)};
        tr.w2 = {11'($urandom_range(0, 2047)), 10'($urandom_range(0, 1023))};
        u_src.push(make_word(tr.k, 1'b0, 1'b0));
        u_src.push(make_word(tr.w1, 1'b0, 1'b0));
        u_src.push(make_word(tr.w2, 1'b1, 1'b0));
        foreach (list[i]) if (list[i].k == tr.k) found = i;
        if (found < 0) list.push_back(tr);
        else begin
          exp_dups++;
          if (tr.w2[9:0] < list[found].w2[9:0]) begin list[found].w1 = tr.w1; list[found].w2 = tr.w2; end
        end
      end
      u_src.push(make_ee(8'(ev)));
      expt[ev] = list;
    end
    begin
      automatic int nee = 0;
      while (nee < 4) begin
        @(posedge clk);
        nee = 0;
        foreach (u_snk.got[i]) if (u_snk.got[i].ee) nee++;
      end
    end
    repeat (5) @(posedge clk);
    begin
      automatic int p = 0;
      for (int ev = 0; ev < 4; ev++) begin
        foreach (expt[ev][i]) begin
          automatic trk_t e = expt[ev][i];
          automatic real phi = (real'(int'(e.k[20:17]) * 64 + int'(e.w1[10:5]))) * 2.0 * 3.14159265358979 / 768.0;
          automatic real dr = real'($signed(e.w2[20:10])) - (300.0 * $sin(phi) + 170.0 * $cos(phi));
          automatic int dg;
          if (dr > 1023.0) dr = 1023.0;
          if (dr < -1024.0) dr = -1024.0;
          check(u_snk.got[p].data == e.k, $sformatf("ev %0d trk %0d key", ev, i));
          check(u_snk.got[p+1].data == e.w1, $sformatf("ev %0d trk %0d w1", ev, i));
          check(u_snk.got[p+2].data[9:0] == e.w2[9:0] && u_snk.got[p+2].ep, $sformatf("ev %0d trk %0d chi2", ev, i));
          dg = int'($signed(u_snk.got[p+2].data[20:10]));
          check(dg - dr < 1.5 && dr - dg < 1.5, $sformatf("ev %0d trk %0d d %0d expected %f", ev, i, dg, dr));
          p += 3;
        end
        begin
          automatic longint dt = ee_cyc[ev] - l1_cyc[ev];
          automatic longint tw = longint'(u_snk.got[p].data[19:0]);
          check(u_snk.got[p].ep && tw >= dt && tw <= dt + 4, $sformatf("ev %0d time %0d, EE sent %0d after L1", ev, tw, dt));
        end
        check(u_snk.got[p+1].ee && u_snk.got[p+1].data[TAG_W-1:0] == 8'(ev), "EE");
        p += 2;
      end
      check(p == u_snk.got.size(), "no extra words");
    end
    check(nghost == exp_dups && exp_dups > 0, $sformatf("%0d ghosts removed, expected %0d", nghost, exp_dups));
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
