// tb_fx_div: divides random and corner-case Q16.16 operands and compares the
// quotient with real-number division done in the testbench (allowed error
// one least significant bit), checks saturation, division by zero and the
// 49-cycle latency (start to done).
module tb_fx_div;
  import bp_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fx_t a, b, q;
  int checks = 0, failures = 0;
  fx_div dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(fx_t x, fx_t y);
    int cyc;
    real r;
    longint expq;
    @(negedge clk); a = x; b = y; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    if (y == 0) expq = (x < 0) ? -longint'(FX_MAX) : longint'(FX_MAX);
    else begin
      r = (real'(x) / real'(y)) * 65536.0;
      if (r > 2147483647.0) expq = FX_MAX;
      else if (r < -2147483647.0) expq = -longint'(FX_MAX);
      else expq = longint'($rtoi(r));
    end
    check(longint'(q) - expq <= 1 && expq - longint'(q) <= 1,
          $sformatf("%0d / %0d = %0d expected %0d", x, y, q, expq));
    if (y != 0) check(cyc == 49, $sformatf("latency %0d", cyc));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(FX_ONE, 32'sd4 <<< 16);
    run(-(32'sd7 <<< 16), 32'sd2 <<< 16);
    run(32'sd3 <<< 16, 32'sd3);           // saturates
    run(32'sd5 <<< 16, 0);
    run(32'sd1, 32'sd1 <<< 16);
    for (int i = 0; i < 300; i++) run(fx_t'($urandom) >>> ($urandom % 16), fx_t'($urandom) >>> ($urandom % 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
