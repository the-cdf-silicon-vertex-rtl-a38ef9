// tb_spy_buffer: checks the circular spy memory (DEPTH reduced to 16).
// 1) 20 words pass through under random hold: all arrive unchanged, the
//    write pointer has wrapped to 4 and the memory holds the last 16 words.
// 2) With freeze high, 5 more words pass but nothing is recorded.
// 3) Source mode: a 6-word test pattern written by the host is played out
//    in order and the upstream sender is held off meanwhile.
module tb_spy_buffer;
  import svt_pkg::*;
  localparam int DEPTH = 16;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  svt_word_t in_word, out_word, host_wdata, host_rdata;
  logic in_valid, in_hold, out_valid, out_hold;
  logic freeze = 0, source_mode = 0, source_start = 0, source_busy, host_we = 0, wrapped, frozen;
  logic [AW-1:0] source_len = '0, host_addr = '0, wptr;

  spy_buffer #(.DEPTH(DEPTH)) dut (.*);
  cable_source #(.GAP_PCT(20)) u_src (.clk, .rst_n, .word(in_word), .valid(in_valid), .hold(in_hold));
  cable_sink #(.HOLD_PCT(30)) u_snk (.clk, .rst_n, .word(out_word), .valid(out_valid), .hold(out_hold));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic svt_word_t w_of(int i);
    return make_word(DATA_W'(i * 7919 + 3), i % 3 == 0, 1'b0);
  endfunction

  task automatic host_read(int a, output svt_word_t d);
    @(negedge clk);
    host_addr = AW'(a);
    @(negedge clk);
    d = host_rdata;
  endtask

  initial begin
    svt_word_t d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) u_src.push(w_of(i));
    wait (u_snk.got.size() == 20);
    repeat (3) @(posedge clk);
    for (int i = 0; i < 20; i++) check(u_snk.got[i] == w_of(i), $sformatf("pass-through word %0d", i));
    check(wptr == AW'(4) && wrapped, $sformatf("wptr %0d wrapped %0d", wptr, wrapped));
    for (int a = 0; a < DEPTH; a++) begin
      host_read(a, d);
      // address a holds word a+16 for a < 4, else word a
      check(d == w_of(a < 4 ? a + 16 : a), $sformatf("spy word at %0d", a));
    end
    // freeze
    @(negedge clk) freeze = 1;
    for (int i = 20; i < 25; i++) u_src.push(w_of(i));
    wait (u_snk.got.size() == 25);
    repeat (3) @(posedge clk);
    check(wptr == AW'(4) && frozen, "frozen buffer does not record");
    host_read(5, d);
    check(d == w_of(5), "frozen content kept");
    // source mode
    @(negedge clk) source_mode = 1;
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      host_we = 1; host_addr = AW'(i); host_wdata = w_of(100 + i);
    end
    @(negedge clk) host_we = 0;
    u_src.push(w_of(200));           // must be held off
    source_len = AW'(6);
    source_start = 1;
    @(negedge clk) source_start = 0;
    wait (u_snk.got.size() == 31);
    wait (!source_busy);
    repeat (5) @(posedge clk);
    for (int i = 0; i < 6; i++) check(u_snk.got[25 + i] == w_of(100 + i), $sformatf("source word %0d", i));
    check(u_src.pending() == 1 && u_snk.got.size() == 31, "upstream held in source mode");
    @(negedge clk) source_mode = 0;
    wait (u_snk.got.size() == 32);
    check(u_snk.got[31] == w_of(200), "normal mode resumes");
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
