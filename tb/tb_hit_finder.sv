// tb_hit_finder: checks strip clustering and centroids.
// Ten events of random sparsified strips (runs of adjacent channels, some
// below threshold, some runs longer than MAX_WIDTH) go in under random gaps
// and hold.  A reference model written here clusters the same list and
// computes 8*sum(ch*ph)/sum(ph); hit words and EE words must match exactly.
module tb_hit_finder;
  import svt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  svt_word_t in_word, out_word;
  logic in_valid, in_hold, out_valid, out_hold, parity_err;
  logic [2:0] layer = 3'd3, barrel = 3'd2;
  logic [7:0] threshold = 8'd20;

  hit_finder #(.MAX_WIDTH(8), .FIFO_DEPTH(4)) dut (.*);
  cable_source #(.GAP_PCT(20)) u_src (.clk, .rst_n, .word(in_word), .valid(in_valid), .hold(in_hold));
  cable_sink #(.HOLD_PCT(25)) u_snk (.clk, .rst_n, .word(out_word), .valid(out_valid), .hold(out_hold));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  svt_word_t expq[$];
  int nclusters = 0;

  task automatic flush(ref int n, ref longint sxq, ref longint sq, ref logic par);
    if (n > 0) begin
      svt_word_t h;
      h = make_word({3'd3, 3'd2, 15'((sxq * 8) / sq)}, 1'b1, 1'b0);
      expq.push_back(h);
      par ^= ^h.data;
      nclusters++;
    end
    n = 0; sxq = 0; sq = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 10; ev++) begin
      automatic int ch = $urandom_range(0, 20);
      automatic int n = 0, last = -10;
      automatic longint sxq = 0, sq = 0;
      automatic logic par = 0, ipar = 0;
      while (ch < 4000 - 20) begin
        automatic int run = $urandom_range(1, 11);
        for (int k = 0; k < run; k++) begin
          automatic int ph = $urandom_range(0, 9) == 0 ? $urandom_range(1, 19) : $urandom_range(20, 255);
          svt_word_t w;
          w = make_word({1'b0, 12'(ch), 8'(ph)}, 1'b1, 1'b0);
          u_src.push(w);
          ipar ^= ^w.data;
          // reference clustering
          if (ph >= 20) begin
            if (n > 0 && ch == last + 1 && n < 8) begin
              n++; sxq += ch * ph; sq += ph;
            end else begin
              flush(n, sxq, sq, par);
              n = 1; sxq = ch * ph; sq = ph;
            end
          end else begin
            flush(n, sxq, sq, par);
          end
          last = ch;
          ch++;
        end
        ch += $urandom_range(1, 400);
      end
      flush(n, sxq, sq, par);
      begin
        svt_word_t e;
        e = make_ee(8'(ev));
        e.data[PARITY_BIT] = ipar;
        u_src.push(e);
        e.data[PARITY_BIT] = par;
        expq.push_back(e);
      end
    end
    wait (u_snk.got.size() == expq.size());
    repeat (20) @(posedge clk);
    check(u_snk.got.size() == expq.size(), $sformatf("%0d words, expected %0d", u_snk.got.size(), expq.size()));
    foreach (expq[k])
      check(u_snk.got[k] == expq[k], $sformatf("word %0d %h expected %h", k, u_snk.got[k], expq[k]));
    check(nclusters > 50, "enough clusters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
