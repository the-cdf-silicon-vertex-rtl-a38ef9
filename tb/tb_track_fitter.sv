// tb_track_fitter: checks the linearized fit (64 patterns).
// Random coefficients, shift, pattern-edge constants and a chi2 cut that
// passes about half the tracks.  Each candidate's fit is recomputed here:
// dx = clip(x - edge, 0, 255), p_j / chi_j = base_j + (sum coef_j . dx) >>> shift,
// chi2 = sum of the three squared constraints (each clipped to +-4095),
// output fields clipped as documented.  Tracks above the cut must vanish.
// Candidates arrive back to back with no hold, so consecutive fits must
// start exactly 10 cycles apart (250 ns at 40 MHz).
module tb_track_fitter;
  import svt_pkg::*;
  localparam int NR = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] wedge = 4'd7;
  logic signed [5:0][5:0][7:0] coef;
  logic [3:0] shift;
  logic [25:0] chi2_max;
  logic const_we = 0;
  logic [ROAD_W-1:0] const_addr = '0;
  logic [5:0][15:0] const_edge = '0;
  logic signed [5:0][17:0] const_base = '0;
  svt_word_t in_word, out_word;
  logic in_valid, in_hold, out_valid, out_hold, parity_err, fit_start;

  track_fitter #(.NROADS(NR), .FIFO_DEPTH(16)) dut (.*);
  cable_source #(.GAP_PCT(0)) u_src (.clk, .rst_n, .word(in_word), .valid(in_valid), .hold(in_hold));
  cable_sink #(.HOLD_PCT(0)) u_snk (.clk, .rst_n, .word(out_word), .valid(out_valid), .hold(out_hold));

  logic [5:0][15:0] edg [NR];
  int base [NR][6];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int clipi(int v, int lo, int hi);
    return v < lo ? lo : v > hi ? hi : v;
  endfunction

  // fit starts
  longint starts[$];
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && fit_start) starts.push_back(cyc);
  end

  svt_word_t expq[$];
  int npass = 0, nfail = 0;

  initial begin
    for (int j = 0; j < 6; j++) for (int i = 0; i < 6; i++)
      coef[j][i] = (j < 3) ? 8'($urandom_range(0, 255)) : 8'($urandom_range(0, 6) - 3);
    shift = 4'd3;
    chi2_max = 26'd30000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      const_we = 1; const_addr = ROAD_W'(r);
      for (int i = 0; i < 6; i++) begin
        edg[r][i] = 16'($urandom_range(0, 1500));
        base[r][i] = (i < 3) ? $urandom_range(0, 1000) - 500 : $urandom_range(0, 400) - 200;
        if (i == 1) base[r][i] += 1000;
        const_edge[i] = edg[r][i];
        const_base[i] = 18'(base[r][i]);
      end
    end
    @(negedge clk) const_we = 0;
    for (int ev = 0; ev < 3; ev++) begin
      for (int t = 0; t < 20; t++) begin
        automatic int r = $urandom_range(0, NR-1);
        automatic int x[6];
        automatic int c6 = $urandom_range(0, 63);
        automatic int ph = $urandom_range(0, 2047);
        automatic int res[6];
        automatic longint chi2 = 0;
        automatic logic [DATA_W-1:0] xw = {3'd5, 1'b0, 6'(c6), 11'(ph)};
        x[0] = c6 ^ 32; x[1] = ph;
        for (int i = 2; i < 6; i++) x[i] = int'(edg[r][i]) + $urandom_range(0, 300) - 20;
        u_src.push(make_word(DATA_W'(r), 1'b0, 1'b0));
        u_src.push(make_word(xw, 1'b0, 1'b0));
        for (int i = 2; i < 6; i++) u_src.push(make_word({3'(i-2), 3'd0, 15'(x[i])}, i == 5, 1'b0));
        for (int j = 0; j < 6; j++) begin
          automatic longint acc = 0;
          for (int i = 0; i < 6; i++) acc += longint'($signed(coef[j][i])) * clipi(x[i] - int'(edg[r][i]), 0, 255);
          res[j] = base[r][j] + int'(acc >>> 3);
        end
        for (int j = 3; j < 6; j++) chi2 += longint'(clipi(res[j], -4095, 4095)) ** 2;
        if (chi2 <= 30000) begin
          npass++;
          expq.push_back(make_word({4'd7, xw[16:0]}, 1'b0, 1'b0));
          expq.push_back(make_word({10'(clipi(res[0], -512, 511)), 11'(clipi(res[1], 0, 2047))}, 1'b0, 1'b0));
          expq.push_back(make_word({11'(clipi(res[2], -1024, 1023)), 10'(chi2 > 1023 ? 1023 : chi2)}, 1'b1, 1'b0));
        end else nfail++;
      end
      u_src.push(make_ee(8'(ev)));
      expq.push_back(make_ee(8'(ev)));
    end
    while (u_snk.got.size() < expq.size()) @(posedge clk);
    repeat (10) @(posedge clk);
    check(u_snk.got.size() == expq.size(), "word count");
    foreach (expq[k]) begin
      svt_word_t g;
      g = u_snk.got[k];
      if (g.ee) g.data[PARITY_BIT] = 1'b0;
      check(g == expq[k], $sformatf("word %0d %h expected %h", k, g, expq[k]));
    end
    check(npass > 5 && nfail > 5, $sformatf("cut exercised: %0d pass %0d fail", npass, nfail));
    check(starts.size() == 60, $sformatf("%0d fits", starts.size()));
    begin
      automatic int n10 = 0;
      for (int k = 1; k < starts.size(); k++) if (starts[k] - starts[k-1] == 10) n10++;
      check(n10 >= 50, $sformatf("%0d of %0d fits spaced 10 cycles", n10, starts.size() - 1));
      for (int k = 1; k < starts.size(); k++) check(starts[k] - starts[k-1] >= 10, "never faster than 10 cycles");
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
