// tb_merger: checks the merger board.
// Four inputs with input 2 disabled, two outputs with independent random
// hold.  Each event gives every input a random number of random packets;
// the expected output is the data of inputs 0, 1, 3 in that order and one
// EE word with input 0's tag and the right parity.  Event 3 has a wrong tag
// on input 3 (tag_err expected once) and event 4 a wrong parity bit on
// input 1 (parity_err expected once).  Both outputs must carry identical
// streams.
module tb_merger;
  import svt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  svt_word_t [3:0] in_word;
  logic [3:0]      in_valid, in_hold;
  svt_word_t [1:0] out_word;
  logic [1:0]      out_valid, out_hold;
  logic            tag_err, parity_err;
  logic [3:0]      in_enable = 4'b1011;

  merger #(.NIN(4), .NOUT(2), .FIFO_DEPTH(4)) dut (.*);

  for (genvar i = 0; i < 4; i++) begin : g_src
    cable_source #(.GAP_PCT(30)) u_src (.clk, .rst_n, .word(in_word[i]), .valid(in_valid[i]), .hold(in_hold[i]));
  end
  cable_sink #(.HOLD_PCT(20)) u_k0 (.clk, .rst_n, .word(out_word[0]), .valid(out_valid[0]), .hold(out_hold[0]));
  cable_sink #(.HOLD_PCT(35)) u_k1 (.clk, .rst_n, .word(out_word[1]), .valid(out_valid[1]), .hold(out_hold[1]));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_terr = 0, n_perr = 0;
  always @(posedge clk) if (rst_n) begin
    if (tag_err) n_terr++;
    if (parity_err) n_perr++;
  end

  svt_word_t expq[$];
  localparam int NEV = 6;

  task automatic push_in(int i, svt_word_t w);
    case (i)
      0: g_src[0].u_src.push(w);
      1: g_src[1].u_src.push(w);
      2: g_src[2].u_src.push(w);
      default: g_src[3].u_src.push(w);
    endcase
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < NEV; ev++) begin
      automatic logic opar = 0;
      for (int i = 0; i < 4; i++) begin
        automatic logic par = 0;
        automatic int npk = $urandom_range(0, 3);
        for (int p = 0; p < npk; p++) begin
          automatic int len = $urandom_range(1, 4);
          for (int k = 0; k < len; k++) begin
            svt_word_t w;
            w = make_word(DATA_W'($urandom), k == len-1, 1'b0);
            par ^= ^w.data;
            push_in(i, w);
            if (in_enable[i]) begin
              expq.push_back(w);
              opar ^= ^w.data;
            end
          end
        end
        begin
          svt_word_t e;
          e = make_ee(8'(ev + ((ev == 3 && i == 3) ? 100 : 0)));
          e.data[PARITY_BIT] = (ev == 4 && i == 1) ? !par : par;
          push_in(i, e);
        end
      end
      begin
        svt_word_t e;
        e = make_ee(8'(ev));
        e.data[PARITY_BIT] = opar;
        expq.push_back(e);
      end
    end
    wait (u_k0.got.size() == expq.size() && u_k1.got.size() == expq.size());
    repeat (5) @(posedge clk);
    check(u_k0.got.size() == expq.size(), "output 0 word count");
    check(u_k1.got.size() == expq.size(), "output 1 word count");
    foreach (expq[k]) begin
      check(u_k0.got[k] == expq[k], $sformatf("out0 word %0d %h expected %h", k, u_k0.got[k], expq[k]));
      check(u_k1.got[k] == expq[k], $sformatf("out1 word %0d %h expected %h", k, u_k1.got[k], expq[k]));
    end
    check(n_terr == 1, $sformatf("tag errors %0d, expected 1", n_terr));
    check(n_perr == 1, $sformatf("parity errors %0d, expected 1", n_perr));
    check(u_k0.hold_cycles > 0 && u_k1.hold_cycles > 0, "outputs were held");
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
