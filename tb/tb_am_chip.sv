// tb_am_chip: checks one associative-memory chip (32 patterns).
// Random patterns are loaded (two left unloaded).  For each of 8 events a
// random pattern gets hits on all five layers, another on its first four
// layers only, plus random noise hits; the matched set is computed here by brute
// force over the stored patterns.  After end_event the chip must give the
// matched addresses in increasing order, one per cycle, while the next
// event's hits are already accumulating.
module tb_am_chip;
  import svt_pkg::*;
  localparam int NP = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pat_we = 0, hit_valid = 0, end_event = 0, road_valid, road_pop = 0;
  logic [4:0] pat_addr = '0, road_addr;
  logic [AM_LAYERS-1:0][SS_W-1:0] pat_data = '0;
  logic [2:0] hit_layer = '0;
  logic [SS_W-1:0] hit_ss = '0;

  am_chip #(.NPATT(NP)) dut (.*);

  logic [AM_LAYERS-1:0][SS_W-1:0] pats [NP];
  bit loaded [NP];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      for (int l = 0; l < AM_LAYERS; l++) pats[p][l] = SS_W'($urandom_range(0, 63));
      loaded[p] = (p != 7 && p != 20);
      if (loaded[p]) begin
        @(negedge clk);
        pat_we = 1; pat_addr = 5'(p); pat_data = pats[p];
      end
    end
    @(negedge clk) pat_we = 0;
    for (int ev = 0; ev < 8; ev++) begin
      bit [AM_LAYERS-1:0] m [NP];
      automatic int exp_list[$];
      automatic int got_list[$];
      for (int p = 0; p < NP; p++) m[p] = '0;
      // hits
      for (int h = 0; h < 40; h++) begin
        int l, s;
        l = $urandom_range(0, 4);
        if ($urandom_range(0, 1)) s = pats[$urandom_range(0, NP-1)][l];
        else s = $urandom_range(0, 63);
        @(negedge clk);
        hit_valid = 1; hit_layer = 3'(l); hit_ss = SS_W'(s);
        for (int p = 0; p < NP; p++) if (pats[p][l] == SS_W'(s)) m[p][l] = 1'b1;
      end
      // complete one random pattern fully
      begin
        int p = $urandom_range(0, NP-1);
        for (int l = 0; l < AM_LAYERS; l++) begin
          @(negedge clk);
          hit_valid = 1; hit_layer = 3'(l); hit_ss = pats[p][l];
          for (int q = 0; q < NP; q++) if (pats[q][l] == pats[p][l]) m[q][l] = 1'b1;
        end
      end
      // give another pattern layers 0..3 only: a near miss
      begin
        int p = $urandom_range(0, NP-1);
        for (int l = 0; l < AM_LAYERS-1; l++) begin
          @(negedge clk);
          hit_valid = 1; hit_layer = 3'(l); hit_ss = pats[p][l];
          for (int q = 0; q < NP; q++) if (pats[q][l] == pats[p][l]) m[q][l] = 1'b1;
        end
      end
      @(negedge clk);
      hit_valid = 0; end_event = 1;
      @(negedge clk);
      end_event = 0;
      for (int p = 0; p < NP; p++) if (loaded[p] && &m[p]) exp_list.push_back(p);
      // read out, one per cycle
      while (road_valid) begin
        got_list.push_back(road_addr);
        road_pop = 1;
        @(negedge clk);
        road_pop = 0;
      end
      check(got_list.size() == exp_list.size(), $sformatf("ev %0d: %0d roads, expected %0d", ev, got_list.size(), exp_list.size()));
      foreach (exp_list[k]) check(k < got_list.size() && got_list[k] == exp_list[k], $sformatf("ev %0d road %0d", ev, k));
      check(exp_list.size() > 0, "at least one match");
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
