// tb_fit_unit: checks one fit engine.
// 200 random operand sets (signed base, 8-bit signed coefficients, 8-bit
// unsigned offsets, shift 0..7); the result must equal
// base + (sum coef*dx) >>> shift computed here, and done must rise exactly
// six cycles after start.
module tb_fit_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done;
  logic signed [17:0] base = '0, result;
  logic [5:0][7:0] dx = '0;
  logic signed [5:0][7:0] coef = '0;
  logic [3:0] shift = '0;

  fit_unit #(.NIN(6)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic longint acc = 0, ex;
      automatic int cyc = 0;
      @(negedge clk);
      base = 18'($urandom_range(0, 2**18-1));
      shift = 4'($urandom_range(0, 7));
      for (int i = 0; i < 6; i++) begin
        dx[i] = 8'($urandom);
        coef[i] = 8'($urandom);
        acc += longint'($signed(coef[i])) * longint'(dx[i]);
      end
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done && cyc < 20) begin @(negedge clk); cyc++; end
      ex = longint'($signed(base)) + (acc >>> shift);
      check(cyc == 6, $sformatf("done after %0d cycles", cyc + 1));
      check(result == 18'(ex), $sformatf("result %0d expected %0d", result, ex));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
