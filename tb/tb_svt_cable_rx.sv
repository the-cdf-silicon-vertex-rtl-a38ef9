// tb_svt_cable_rx: checks the SVT cable receiver FIFO.
// Sends three events of random words with random strobe gaps while the
// reader pops at random; checks word order, that hold rises exactly when the
// FIFO is full (no word lost), and that parity_err flags only the event whose
// EE parity bit was deliberately inverted.
module tb_svt_cable_rx;
  import svt_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  svt_word_t in_word, out_word;
  logic in_valid, in_hold, out_valid, out_pop, parity_err;
  int checks = 0, failures = 0;

  svt_cable_rx #(.DEPTH(DEPTH)) dut (.*);

  svt_word_t exp_q[$];
  int nperr = 0, full_seen = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reader
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_pop) begin
      svt_word_t e;
      e = exp_q.pop_front();
      check(out_word == e, $sformatf("word %h expected %h", out_word, e));
    end
    if (parity_err) nperr++;
    if (in_hold) full_seen++;
  end
  always @(negedge clk) out_pop = ($urandom_range(0, 3) == 0) && out_valid;

  // inputs change on the falling edge; acceptance is sampled on the rising edge
  logic acc;
  always @(posedge clk) begin
    acc <= in_valid && !in_hold;
    if (in_valid && !in_hold) exp_q.push_back(in_word);
  end

  task automatic send(svt_word_t w);
    @(negedge clk);
    in_word  = w;
    in_valid = 1'b1;
    do @(negedge clk); while (!acc);
    in_valid = 1'b0;
    if ($urandom_range(0, 1)) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_word = '0; out_pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // event parities alternate 0,1,0,1,...; event 1 carries a wrong parity bit
    for (int ev = 0; ev < 6; ev++) begin
      automatic logic par = 0;
      for (int i = 0; i < 12; i++) begin
        svt_word_t w;
        w = make_word(DATA_W'($urandom), i == 11, 1'b0);
        if (i == 11 && ((par ^ (^w.data)) != 1'(ev))) w.data[0] = !w.data[0];
        par ^= ^w.data;
        send(w);
      end
      begin
        svt_word_t e;
        e = make_ee(8'(ev));
        e.data[PARITY_BIT] = (ev == 1) ? !par : par;
        send(e);
      end
    end
    repeat (60) @(posedge clk);
    check(exp_q.size() == 0, "all words delivered");
    check(nperr == 1, $sformatf("one parity error expected, saw %0d", nperr));
    check(full_seen > 0, "hold raised when full");
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
