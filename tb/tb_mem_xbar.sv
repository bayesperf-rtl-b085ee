// tb_mem_xbar: the memory crossbar with four behavioural DRAM channels
// (random stalls, 8-cycle read latency). The testbench plays the host data
// port and four EP read ports. Checks:
//   - every host write lands in all four channel replicas (compared word by
//     word with a reference array after the write phase),
//   - a host write drives all four channels in the same cycle,
//   - random EP reads, issued on all four ports at once, return the right
//     data in order, and reads on different channels overlap in time,
//   - host reads interleaved with EP 0 reads on channel 0 return the right
//     data to the right requester (the issue-order tag FIFO),
//   - no EP request is accepted in a cycle where a host write is offered.
module tb_mem_xbar;
  import bp_pkg::*;
  localparam int N = 4, WORDS = 512, NRD = 300;
  logic clk = 0, rst_n = 0;
  mem_req_t host_req;
  logic     host_ready;
  mem_rsp_t host_rsp;
  mem_req_t ep_req [N];
  logic     ep_ready [N];
  mem_rsp_t ep_rsp [N];
  mem_req_t ch_req [N];
  logic     ch_ready [N];
  mem_rsp_t ch_rsp [N];
  int checks = 0, failures = 0;

  mem_xbar #(.N_CH(N)) dut (.*);
  for (genvar c = 0; c < N; c++) begin : g_dram
    dram_model #(.WORDS(WORDS)) u_dram (.clk, .rst_n, .req(ch_req[c]), .ready(ch_ready[c]), .rsp(ch_rsp[c]));
  end
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ref_mem [WORDS];
  int n_overlap = 0;

  // structural checks every cycle
  always @(posedge clk) if (rst_n) begin
    automatic int rd = 0;
    if (host_req.valid && host_req.we) begin
      for (int c = 0; c < N; c++) if (ep_ready[c] && ep_req[c].valid) check(0, $sformatf("EP %0d accepted during host write", c));
      if (host_ready)
        for (int c = 0; c < N; c++)
          check(ch_req[c].valid && ch_req[c].we && ch_req[c].addr == host_req.addr && ch_req[c].wdata == host_req.wdata,
                $sformatf("write replicated to channel %0d", c));
    end
    for (int c = 0; c < N; c++) if (ep_req[c].valid && ep_ready[c]) rd++;
    if (rd >= 2) n_overlap++;
  end

  // EP read ports: each issues NRD random reads, expecting in-order data
  int ep_done [N];
  bit ep_go = 0;
  for (genvar c = 0; c < N; c++) begin : g_ep
    logic [31:0] exp_q [$];
    int issued = 0, got = 0;
    always @(negedge clk) begin
      if (!rst_n || !ep_go) ep_req[c] = '0;
      else begin
        if (ep_req[c].valid && ep_acc[c]) begin issued++; ep_req[c] = '0; end
        if (issued < NRD && !ep_req[c].valid && ($urandom % 4 != 0)) begin
          automatic logic [31:0] a = 32'($urandom % WORDS);
          ep_req[c] = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
        end
      end
    end
    always @(posedge clk) if (rst_n) begin
      if (ep_req[c].valid && ep_ready[c]) exp_q.push_back(ref_mem[ep_req[c].addr]);
      if (ep_rsp[c].rvalid) begin
        automatic logic [31:0] e = (exp_q.size() > 0) ? exp_q.pop_front() : 32'hDEAD_BEEF;
        check(ep_rsp[c].rdata == e, $sformatf("EP %0d read %h expected %h", c, ep_rsp[c].rdata, e));
        got++;
        if (got == NRD) ep_done[c] = 1;
      end
    end
  end
  logic ep_acc [N];
  always @(posedge clk) for (int c = 0; c < N; c++) ep_acc[c] = ep_req[c].valid && ep_ready[c];

  task automatic host_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(posedge clk);
    while (!host_ready) @(posedge clk);
    ref_mem[a] = d;
    @(negedge clk); host_req = '0;
  endtask

  task automatic host_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(posedge clk);
    while (!host_ready) @(posedge clk);
    @(negedge clk); host_req = '0;
    while (!host_rsp.rvalid) @(posedge clk);
    d = host_rsp.rdata;
  endtask

  initial begin
    logic [31:0] d;
    host_req = '0;
    for (int c = 0; c < N; c++) begin ep_req[c] = '0; ep_done[c] = 0; ep_acc[c] = 0; end
    for (int a = 0; a < WORDS; a++) ref_mem[a] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // write phase: fill the whole array
    for (int a = 0; a < WORDS; a++) host_write(32'(a), $urandom);
    repeat (20) @(negedge clk);
    for (int c = 0; c < N; c++) begin
      automatic int bad = 0;
      case (c)
        0: for (int a = 0; a < WORDS; a++) if (g_dram[0].u_dram.mem[a] != ref_mem[a]) bad++;
        1: for (int a = 0; a < WORDS; a++) if (g_dram[1].u_dram.mem[a] != ref_mem[a]) bad++;
        2: for (int a = 0; a < WORDS; a++) if (g_dram[2].u_dram.mem[a] != ref_mem[a]) bad++;
        default: for (int a = 0; a < WORDS; a++) if (g_dram[3].u_dram.mem[a] != ref_mem[a]) bad++;
      endcase
      check(bad == 0, $sformatf("channel %0d replica has %0d wrong words", c, bad));
    end

    // read phase: all EPs read while the host reads channel 0 too
    ep_go = 1;
    for (int n = 0; n < 60; n++) begin
      automatic logic [31:0] a = 32'($urandom % WORDS);
      host_read(a, d);
      check(d == ref_mem[a], $sformatf("host read %0d: %h expected %h", a, d, ref_mem[a]));
      repeat ($urandom % 6) @(negedge clk);
    end
    while (!(ep_done[0] && ep_done[1] && ep_done[2] && ep_done[3])) @(negedge clk);
    check(n_overlap > 0, $sformatf("concurrent channel reads: %0d cycles", n_overlap));
    $display("cycles with two or more EP reads accepted: %0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
