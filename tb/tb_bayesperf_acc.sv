// tb_bayesperf_acc: end-to-end test of the accelerator at its default sizes
// (4 EP engines, 12 samplers, 16-port network, 8 events), with four
// behavioural DRAM channels.
//
// The host side is played by the testbench: it writes four time-slice
// records through the host data port (replicated into every channel), reads
// one back, programs the controller, starts a run and waits for the
// interrupt. Each slice measures three of the eight events, with one event
// shared with the next slice, the overlap pattern of multiplexed counters.
//
//   run 1: no invariant. With Gaussian measurements the exact posterior is
//          known in closed form (precision = prior + sum of measurement
//          precisions, mean = precision-weighted average); the read-back
//          means and precisions are compared with it.
//   run 2: the host points the slices at a second buffer (as after a
//          context switch) whose data differ, and adds a strong invariant
//          tying events 0 and 1 together; the means must follow the new data
//          and events 0 and 1 must be pulled together.
//   run 3: a large tolerance; the run must stop early as converged.
//
// Mechanisms counted, each must occur: replicated host writes, host reads,
// concurrent EP reads on different channels, EPs working in parallel,
// global updates, warm-started samplers, contention in the network
// (results of an engine's three samplers meet on its port), early stop on
// convergence, re-pointing of slice buffers, completion interrupt.
module tb_bayesperf_acc;
  import bp_pkg::*;
  localparam int K = 4, D = 8;
  logic clk = 0, rst_n = 0;
  logic mmio_valid, mmio_we, irq;
  logic [7:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  mem_req_t host_req;
  logic     host_ready;
  mem_rsp_t host_rsp;
  mem_req_t ch_req [K];
  logic     ch_ready [K];
  mem_rsp_t ch_rsp [K];
  int checks = 0, failures = 0;

  bayesperf_acc dut (.*);

  for (genvar c = 0; c < K; c++) begin : g_dram
    dram_model u_dram (.clk, .rst_n, .req(ch_req[c]), .ready(ch_ready[c]), .rsp(ch_rsp[c]));
  end

  always #2 clk = ~clk;   // 250 MHz

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real to_r(logic [31:0] f); return real'(signed'(f)) / 65536.0; endfunction

  // ------------------------------------------------------ mechanism counters
  int n_repl_wr, n_host_rd, n_conc_rd, n_par_ep, n_updates, n_warm, n_irq;
  int n_conv_stop, n_repoint;
  always @(posedge clk) if (rst_n) begin
    automatic int rd = 0, busy = 0;
    if (ch_req[0].valid && ch_req[0].we && ch_ready[0] && ch_req[1].valid && ch_req[1].we &&
        ch_req[2].valid && ch_req[2].we && ch_req[3].valid && ch_req[3].we) n_repl_wr++;
    if (host_rsp.rvalid) n_host_rd++;
    for (int c = 0; c < K; c++) if (ch_req[c].valid && !ch_req[c].we && ch_ready[c]) rd++;
    if (rd >= 2) n_conc_rd++;
    for (int e = 0; e < K; e++) if (!dut.job_ready[e]) busy++;
    if (busy >= 2) n_par_ep++;
    if (dut.u_ctrl.sel_valid) n_updates++;
    for (int p = 0; p < K; p++)
      if (dut.in_valid[p] && dut.in_ready[p] && dut.in_flit[p].addr == SR_START && dut.in_flit[p].data[0]) n_warm++;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host tasks
  task automatic mmio_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_valid = 0; mmio_we = 0;
  endtask

  task automatic mmio_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); mmio_addr = a; #1 d = mmio_rdata;
  endtask

  task automatic host_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(posedge clk);
    while (!host_ready) @(posedge clk);
    @(negedge clk); host_req.valid = 0;
  endtask

  task automatic host_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(posedge clk);
    while (!host_ready) @(posedge clk);
    @(negedge clk); host_req.valid = 0;
    while (!host_rsp.rvalid) @(posedge clk);
    d = host_rsp.rdata;
  endtask

  // slice k measures events 2k, 2k+1, 2k+2 (mod 8)
  function automatic bit observed(int k, int i);
    return i == (2 * k) % D || i == (2 * k + 1) % D || i == (2 * k + 2) % D;
  endfunction

  real tau = 4.0, prior = 0.1;
  real obs [K][D];

  task automatic load_slices(logic [31:0] base, real shift, real coef0, real coef1);
    logic [31:0] back;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < D; i++)
        obs[k][i] = shift + 2.0 + 0.5 * i + ((k % 2 == 0) ? 0.3 : -0.3);
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < D; i++) begin
        host_write(base + 64 * k + i, observed(k, i) ? to_fx(obs[k][i]) : 32'd0);
        host_write(base + 64 * k + D + i, observed(k, i) ? to_fx(tau) : 32'd0);
        host_write(base + 64 * k + 2 * D + i,
                   (k == 0 && i == 0) ? to_fx(coef0) : (k == 0 && i == 1) ? to_fx(coef1) : 32'd0);
      end
      mmio_wr(8'h08 + 8'(k), base + 64 * k);
    end
    host_read(base + 64 * 1 + D + 2, back);
    check(back == to_fx(tau), $sformatf("host read back %h", back));
  endtask

  task automatic run_and_wait(output int cycles);
    int t0;
    mmio_wr(8'h00, 32'd1);
    t0 = $time;
    while (!irq) @(negedge clk);
    cycles = ($time - t0) / 4;
    n_irq++;
  endtask

  task automatic read_post(output real mean [D], output real prec [D]);
    logic [31:0] r, s;
    for (int i = 0; i < D; i++) begin
      mmio_rd(8'h40 + 8'(i), r);
      mmio_rd(8'h50 + 8'(i), s);
      prec[i] = to_r(r);
      mean[i] = (prec[i] != 0.0) ? to_r(s) / prec[i] : 0.0;
    end
  endtask

  initial begin
    real mean [D], prec [D], emean [D], eprec [D], mean_free01;
    logic [31:0] st, disp;
    int cyc;
    mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0; host_req = '0;
    n_repl_wr = 0; n_host_rd = 0; n_conc_rd = 0; n_par_ep = 0; n_updates = 0; n_warm = 0;
    n_irq = 0; n_conv_stop = 0; n_repoint = 0;
    repeat (5) @(negedge clk); rst_n = 1;

    // ---------------------------------------------------------------- run 1
    load_slices(32'd0, 0.0, 0.0, 0.0);
    mmio_wr(8'h02, 32'd5);                       // 5 jobs per EP
    mmio_wr(8'h03, {16'd512, 16'd13});           // 8192 samples, 512 burn-in
    mmio_wr(8'h04, to_fx(1.5));
    mmio_wr(8'h05, 32'd0);
    mmio_wr(8'h06, to_fx(prior));
    mmio_wr(8'h07, to_fx(0.001));
    run_and_wait(cyc);
    $display("run 1: %0d cycles", cyc);
    mmio_rd(8'h0C, disp);
    check(disp == 32'(5 * K), $sformatf("run 1 dispatched %0d jobs", disp));
    read_post(mean, prec);
    for (int i = 0; i < D; i++) begin
      real sp, sm;
      sp = prior; sm = 0.0;
      for (int k = 0; k < K; k++) if (observed(k, i)) begin sp += tau; sm += tau * obs[k][i]; end
      eprec[i] = sp; emean[i] = sm / sp;
      $display("  event %0d: mean %f (exact %f)  precision %f (exact %f)", i, mean[i], emean[i], prec[i], eprec[i]);
      check(mean[i] - emean[i] < 0.25 && emean[i] - mean[i] < 0.25, $sformatf("run 1 mean %0d", i));
      check(prec[i] > 0.6 * eprec[i] && prec[i] < 1.5 * eprec[i], $sformatf("run 1 precision %0d", i));
    end
    mean_free01 = mean[1] - mean[0];

    // ---------------------------------------------------------------- run 2
    load_slices(32'd1024, 1.0, 1.0, -1.0);
    n_repoint++;
    mmio_wr(8'h05, to_fx(16.0));
    run_and_wait(cyc);
    $display("run 2: %0d cycles", cyc);
    read_post(mean, prec);
    for (int i = 2; i < D; i++)
      check(mean[i] - emean[i] - 1.0 < 0.3 && emean[i] + 1.0 - mean[i] < 0.3,
            $sformatf("run 2 mean %0d = %f expected %f", i, mean[i], emean[i] + 1.0));
    $display("  events 0,1: %f %f (gap without invariant %f)", mean[0], mean[1], mean_free01);
    check((mean[1] - mean[0]) < 0.6 * mean_free01 && mean[1] - mean[0] > -0.2,
          "run 2 invariant pulls events 0 and 1 together");

    // ---------------------------------------------------------------- run 3
    mmio_wr(8'h05, 32'd0);
    mmio_wr(8'h07, to_fx(1000.0));
    run_and_wait(cyc);
    $display("run 3: %0d cycles", cyc);
    mmio_rd(8'h01, st);
    mmio_rd(8'h0C, disp);
    check(st[2] == 1'b1 && st[1] == 1'b1, $sformatf("run 3 status %h", st));
    check(disp < 32'(5 * K), $sformatf("run 3 stopped early after %0d jobs", disp));
    if (st[2] && disp < 32'(5 * K)) n_conv_stop++;

    // --------------------------------------------------------- mechanisms
    $display("mechanisms: replicated writes %0d, host reads %0d, concurrent EP reads %0d, parallel EP cycles %0d, global updates %0d, warm starts %0d, NoC conflicts %0d, early stops %0d, buffer re-points %0d, interrupts %0d, clamps %0d",
             n_repl_wr, n_host_rd, n_conc_rd, n_par_ep, n_updates, n_warm, dut.noc_conflicts,
             n_conv_stop, n_repoint, n_irq,
             dut.n_clamp[0] + dut.n_clamp[1] + dut.n_clamp[2] + dut.n_clamp[3]);
    check(n_repl_wr > 0, "replicated writes happened");
    check(n_host_rd > 0, "host reads happened");
    check(n_conc_rd > 0, "concurrent EP reads happened");
    check(n_par_ep > 0, "EPs ran in parallel");
    check(n_updates > 0, "global updates happened");
    check(n_warm > 0, "warm starts happened");
    mmio_rd(8'h0D, st);
    check(st > 0 && st == dut.noc_conflicts, $sformatf("network contention happened (%0d)", st));
    mmio_rd(8'h0F, st);
    check(st == 0, "no sampler busy after the runs");
    check(n_conv_stop > 0, "early stop on convergence happened");
    check(n_repoint > 0, "buffer re-pointing happened");
    check(n_irq == 3, "three completion interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
