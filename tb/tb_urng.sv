// tb_urng: checks the xorshift32 sequence of urng against a reference model
// written in the testbench, the hold behaviour when `next` is low, seed
// loading, the zero-seed substitute and a coarse uniformity test (mean of
// 4096 words near 2^31, every 16-bucket histogram bin populated).
module tb_urng;
  logic clk = 0, rst_n = 0, seed_load = 0, next = 0;
  logic [31:0] seed = 0, rnd;
  int checks = 0, failures = 0;
  urng dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] ref_next(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5; return x;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model;
    longint sum;
    int hist[16];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rnd == 32'h2545_F491, "reset value");
    seed = 32'h1234_5678; seed_load = 1;
    @(negedge clk); seed_load = 0;
    check(rnd == 32'h1234_5678, "seed load");
    model = rnd;
    next = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      model = ref_next(model);
      check(rnd == model, $sformatf("sequence step %0d", i));
    end
    next = 0;
    repeat (3) @(negedge clk);
    check(rnd == model, "holds without next");
    seed = 0; seed_load = 1;
    @(negedge clk); seed_load = 0;
    check(rnd == 32'h2545_F491, "zero seed replaced");
    sum = 0;
    foreach (hist[b]) hist[b] = 0;
    next = 1;
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk);
      sum += rnd;
      hist[rnd[31:28]]++;
    end
    next = 0;
    check((sum / 4096) > 64'd2040109465 && (sum / 4096) < 64'd2254857830, "mean near 2^31");
    foreach (hist[b]) check(hist[b] > 180 && hist[b] < 340, $sformatf("histogram bin %0d = %0d", b, hist[b]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
