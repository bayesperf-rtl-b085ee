// tb_noc_butterfly: random all-to-all traffic through the 16-port butterfly
// with random back-pressure on the ejection side. Every flit carries its
// source, destination and a per-pair sequence number; the testbench checks
// that each arrives exactly once, at the right port, unchanged and in order
// per source/destination pair (a butterfly has one path per pair). It also
// checks the unloaded latency (4 switch stages + 1 FIFO = 5 cycles) and
// that the load caused arbitration conflicts.
module tb_noc_butterfly;
  import bp_pkg::*;
  localparam int NP = 16;
  localparam int PER_PORT = 200;
  logic clk = 0, rst_n = 0;
  flit_t in_flit[NP], out_flit[NP];
  logic in_valid[NP], in_ready[NP], out_valid[NP], out_ready[NP];
  logic [31:0] conflicts;
  int checks = 0, failures = 0;
  int sent_seq[NP][NP], recv_seq[NP][NP];
  int sent_cnt[NP], recv_total;
  bit random_ready;

  noc_butterfly dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receivers
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) out_ready[p] = random_ready ? ($urandom % 4 != 0) : 1'b1;
  end
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) if (out_valid[p] && out_ready[p]) begin
      automatic flit_t f = out_flit[p];
      automatic int s = int'(f.src);
      check(int'(f.dst) == p, $sformatf("flit for %0d arrived at %0d", f.dst, p));
      check(f.data == {8'(s), 8'(p), 16'(recv_seq[s][p])} && f.addr == 8'(s ^ p),
            $sformatf("payload %h at port %0d from %0d seq %0d", f.data, p, s, recv_seq[s][p]));
      recv_seq[s][p]++;
      recv_total++;
    end
  end

  initial begin
    int t0, lat;
    for (int p = 0; p < NP; p++) begin
      in_valid[p] = 0; in_flit[p] = '0; out_ready[p] = 1; sent_cnt[p] = 0;
      for (int q = 0; q < NP; q++) begin sent_seq[p][q] = 0; recv_seq[p][q] = 0; end
    end
    recv_total = 0; random_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // unloaded latency: port 3 -> port 12
    @(negedge clk);
    in_flit[3] = '{dst: 4'd12, src: 4'd3, addr: 8'(3 ^ 12), data: {8'd3, 8'd12, 16'd0}};
    in_valid[3] = 1; sent_seq[3][12] = 1;
    t0 = $time;
    @(negedge clk); in_valid[3] = 0;
    while (!out_valid[12]) @(negedge clk);
    lat = ($time - t0) / 10;
    check(lat == 5, $sformatf("unloaded latency %0d", lat));
    @(negedge clk);
    // loaded random traffic
    random_ready = 1;
    fork
      for (int p = 0; p < NP; p++) begin
        automatic int pp = p;
        fork
          begin
            while (sent_cnt[pp] < PER_PORT) begin
              automatic int d = $urandom % NP;
              @(negedge clk);
              in_flit[pp] = '{dst: 4'(d), src: 4'(pp), addr: 8'(pp ^ d), data: {8'(pp), 8'(d), 16'(sent_seq[pp][d])}};
              in_valid[pp] = 1;
              @(posedge clk);
              while (!in_ready[pp]) @(posedge clk);
              sent_seq[pp][d]++;
              sent_cnt[pp]++;
              @(negedge clk); in_valid[pp] = 0;
            end
          end
        join_none
      end
    join_none
    wait (recv_total == NP * PER_PORT + 1);
    repeat (20) @(negedge clk);
    check(recv_total == NP * PER_PORT + 1, "no extra flits");
    for (int p = 0; p < NP; p++)
      for (int q = 0; q < NP; q++)
        check(sent_seq[p][q] == recv_seq[p][q], $sformatf("pair %0d->%0d sent %0d got %0d", p, q, sent_seq[p][q], recv_seq[p][q]));
    check(conflicts > 0, "contention occurred");
    $display("conflicts=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
