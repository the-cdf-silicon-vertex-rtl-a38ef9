// tb_ss_compute: checks superstrip binning of silicon hits and XFT tracks.
// A random configuration (four of five layers in use, random bin widths,
// random swim constant) and 2000 random hit and XFT words are compared with
// a reference computed here: AM layer, validity and superstrip number, with
// the XFT phi swum to the outer radius and clipped to the slice.
module tb_ss_compute;
  import svt_pkg::*;
  int checks = 0, failures = 0;

  bin_cfg_t          cfg;
  logic [DATA_W-1:0] hit;
  logic              valid;
  logic [2:0]        am_layer;
  logic [SS_W-1:0]   ss;
  logic [COORD_W-1:0] coord;

  ss_compute dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int unused_l;
    int a;
    unused_l = $urandom_range(0, 4);
    a = 1;
    for (int l = 0; l < 5; l++) begin
      cfg.sil_use[l] = (l != unused_l);
      cfg.sil_am_layer[l] = (l != unused_l) ? 3'(a) : 3'd0;
      if (l != unused_l) a++;
    end
    for (int l = 0; l < 5; l++) cfg.recip[l] = 16'($urandom_range(600, 2100));  // widths 31..109
    cfg.swim_k = 8'sd0;
    for (int t = 0; t < 2000; t++) begin
      int ex_l, ex_ss, cc, ph, phr;
      bit ex_v;
      if (t % 400 == 0) cfg.swim_k = 8'($urandom_range(0, 255));
      if ($urandom_range(0, 3) == 0) begin
        cc = $urandom_range(0, 63) - 32;   // signed curvature
        ph = $urandom_range(0, 2047);
        hit = {3'd5, 1'b0, 6'(cc), 11'(ph)};
        phr = ph + ((cc * int'(cfg.swim_k)) >>> 4);
        if (phr < 0) phr = 0;
        if (phr > 2047) phr = 2047;
        ex_v = 1; ex_l = 0;
        ex_ss = (phr * int'(cfg.recip[0])) >> 16;
      end else begin
        int l, b, c;
        l = $urandom_range(0, 4); b = $urandom_range(0, 5); c = $urandom_range(0, 32767);
        hit = {3'(l), 3'(b), 15'(c)};
        ex_v = (l != unused_l);
        ex_l = cfg.sil_am_layer[l];
        ex_ss = (b << 10) | (((longint'(c) * cfg.recip[ex_l]) >> 16) & 1023);
      end
      #1;
      check(valid == ex_v, $sformatf("valid for %h", hit));
      if (ex_v) begin
        check(am_layer == 3'(ex_l), $sformatf("layer for %h: %0d vs %0d", hit, am_layer, ex_l));
        check(ss == SS_W'(ex_ss), $sformatf("ss for %h: %0d vs %0d", hit, ss, ex_ss));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
