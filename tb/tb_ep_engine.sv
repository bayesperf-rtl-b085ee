// tb_ep_engine: one EP engine with its network port and DRAM read port
// driven by the testbench. A memory model serves the slice record; three
// sampler models answer the engine's sampler programs with the exact
// moments of the tilted distribution, computed in the testbench from the
// cavity and the measurements they were sent (Gaussian product). Checks:
//   - the slice record is read and forwarded to every sampler,
//   - job 1 (cold): cavity = g, START without warm bit, and the returned
//     Delta equals (lambda+tau) - g_r and (lambda*mu + tau*m) - g_s,
//   - job 2 (warm, g advanced by Delta as the controller would): the cavity
//     recovers job 1's g exactly, START carries the warm bit, Delta is ~0
//     and flagged small,
//   - job 3: a cavity precision below the limit is clamped and centred on
//     the mean of g.
module tb_ep_engine;
  import bp_pkg::*;
  localparam int D = 8, NSP = 3;
  logic clk = 0, rst_n = 0;
  ep_cfg_t cfg;
  logic [ADDR_W-1:0] site_base;
  logic job_valid, job_ready, job_cold, res_valid, res_ready, res_small;
  fx_t job_r [D], job_s [D], res_dr [D], res_ds [D];
  mem_req_t mem_req; logic mem_ready; mem_rsp_t mem_rsp;
  flit_t tx_flit, rx_flit; logic tx_valid, tx_ready, rx_valid, rx_ready;
  logic [15:0] n_clamp;
  int checks = 0, failures = 0;

  ep_engine #(.D(D), .PORT_ID(1), .SAMP_BASE(7), .N_SAMP(NSP)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real to_r(logic [31:0] f); return real'(signed'(f)) / 65536.0; endfunction
  function automatic bit near(real a, real b, real tol); return (a - b < tol) && (b - a < tol); endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired in engine state %s", dut.state.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- memory model
  logic [31:0] mem [256];
  logic [31:0] pipe_d [3];
  logic        pipe_v [3];
  int n_mem_reads = 0;
  always @(negedge clk) mem_ready = ($urandom % 4 != 0);
  always @(posedge clk) begin
    pipe_v[0] <= mem_req.valid && mem_ready;
    pipe_d[0] <= mem[mem_req.addr[7:0]];
    pipe_v[1] <= pipe_v[0]; pipe_d[1] <= pipe_d[0];
    pipe_v[2] <= pipe_v[1]; pipe_d[2] <= pipe_d[1];
    if (mem_req.valid && mem_ready) n_mem_reads++;
  end
  assign mem_rsp.rvalid = pipe_v[2];
  assign mem_rsp.rdata  = pipe_d[2];

  // --------------------------------------------------------- sampler models
  real s_mu [NSP][D], s_lam [NSP][D], s_m [NSP][D], s_tau [NSP][D], s_a [NSP][D];
  int  s_warm [NSP];
  bit  s_started [NSP];
  flit_t rq [$];
  assign tx_ready = 1'b1;
  always @(posedge clk) if (tx_valid) begin
    automatic int j = int'(tx_flit.dst) - 7;
    automatic int i = int'(tx_flit.addr[2:0]);
    check(j >= 0 && j < NSP && tx_flit.src == 4'd1, $sformatf("flit to port %0d", tx_flit.dst));
    if (j >= 0 && j < NSP) begin
      case (tx_flit.addr[7:4])
        4'h0: s_mu[j][i]  = to_r(tx_flit.data);
        4'h1: s_lam[j][i] = to_r(tx_flit.data);
        4'h2: s_m[j][i]   = to_r(tx_flit.data);
        4'h3: s_tau[j][i] = to_r(tx_flit.data);
        4'h4: s_a[j][i]   = to_r(tx_flit.data);
        default: if (tx_flit.addr == SR_START) begin
          s_warm[j] = int'(tx_flit.data[0]);
          s_started[j] = 1;
          // exact tilted moments (no invariant in this test)
          for (int e = 0; e < D; e++) begin
            real p, mn;
            p  = s_lam[j][e] + s_tau[j][e];
            mn = (s_lam[j][e] * s_mu[j][e] + s_tau[j][e] * s_m[j][e]) / p;
            rq.push_back('{dst: 4'd1, src: 4'(7 + j), addr: ER_MEAN + 8'(e), data: to_fx(mn)});
            rq.push_back('{dst: 4'd1, src: 4'(7 + j), addr: ER_M2 + 8'(e), data: to_fx(mn * mn + 1.0 / p)});
          end
          rq.push_back('{dst: 4'd1, src: 4'(7 + j), addr: ER_DONE, data: 32'd100});
        end
      endcase
    end
  end
  always @(negedge clk) begin
    if (rq.size() > 0 && ($urandom % 2 == 0)) begin rx_flit = rq.pop_front(); rx_valid = 1; end
    else rx_valid = 0;
  end

  // ------------------------------------------------------------- jobs
  real g_r [D], g_s [D], lam_exp [D], s_exp [D];
  real obs_v [D], obs_t [D];

  task automatic do_job(bit cold, output real dr [D], output real ds [D], output bit sm);
    @(negedge clk);
    for (int i = 0; i < D; i++) begin job_r[i] = to_fx(g_r[i]); job_s[i] = to_fx(g_s[i]); end
    job_cold = cold; job_valid = 1;
    @(posedge clk); while (!job_ready) @(posedge clk);
    @(negedge clk); job_valid = 0;
    for (int j = 0; j < NSP; j++) s_started[j] = 0;
    while (!res_valid) @(negedge clk);
    for (int i = 0; i < D; i++) begin dr[i] = to_r(res_dr[i]); ds[i] = to_r(res_ds[i]); end
    sm = res_small;
    res_ready = 1;
    @(negedge clk); res_ready = 0;
    check(!res_valid, "result handshake");
    for (int j = 0; j < NSP; j++) check(s_started[j], $sformatf("sampler %0d started", j));
  endtask

  initial begin
    real dr [D], ds [D], g1_r [D], g1_s [D];
    bit sm;
    job_valid = 0; res_ready = 0; rx_valid = 0; rx_flit = '0; job_cold = 0;
    for (int i = 0; i < D; i++) begin job_r[i] = 0; job_s[i] = 0; end
    cfg = '{kappa: 0, step: FX_ONE, log2_nsamp: 4'd8, burnin: 16'd16, tol: to_fx(0.01)};
    site_base = 32'd40;
    for (int a = 0; a < 256; a++) mem[a] = '0;
    for (int i = 0; i < D; i++) begin
      obs_v[i] = 1.0 + i;
      obs_t[i] = (i % 3 == 0) ? 0.0 : 2.0 + i;
      mem[40 + i] = to_fx(obs_v[i]);
      mem[40 + D + i] = to_fx(obs_t[i]);
      mem[40 + 2 * D + i] = to_fx(0.25 * i);
      g_r[i] = 1.0 + 0.25 * i;
      g_s[i] = 0.5 * i;
    end
    repeat (3) @(negedge clk); rst_n = 1;

    // job 1: cold
    do_job(1'b1, dr, ds, sm);
    check(n_mem_reads == 3 * D, $sformatf("%0d record reads", n_mem_reads));
    for (int j = 0; j < NSP; j++) begin
      check(s_warm[j] == 0, "job 1 cold start");
      for (int i = 0; i < D; i++) begin
        check(near(s_lam[j][i], g_r[i], 1e-4) && near(s_mu[j][i], g_s[i] / g_r[i], 1e-3),
              $sformatf("job 1 cavity %0d/%0d: %f %f", j, i, s_lam[j][i], s_mu[j][i]));
        check(near(s_m[j][i], obs_v[i], 1e-4) && near(s_tau[j][i], obs_t[i], 1e-4) &&
              near(s_a[j][i], 0.25 * i, 1e-4), $sformatf("job 1 record %0d/%0d", j, i));
      end
    end
    for (int i = 0; i < D; i++) begin
      real pr, sh;
      pr = g_r[i] + obs_t[i];
      sh = g_s[i] + obs_t[i] * obs_v[i];
      check(near(dr[i], pr - g_r[i], 0.02 * pr) && near(ds[i], sh - g_s[i], 0.02 * (1.0 + sh)),
            $sformatf("job 1 delta %0d: %f %f expected %f %f", i, dr[i], ds[i], pr - g_r[i], sh - g_s[i]));
      g1_r[i] = g_r[i]; g1_s[i] = g_s[i];
      g_r[i] += dr[i]; g_s[i] += ds[i];
    end

    // job 2: warm, g advanced by this site's own update
    do_job(1'b0, dr, ds, sm);
    check(n_mem_reads == 3 * D, "no record reload on a warm job");
    for (int j = 0; j < NSP; j++) begin
      check(s_warm[j] == 1, "job 2 warm start");
      for (int i = 0; i < D; i++)
        check(near(s_lam[j][i], g1_r[i], 1e-3) && near(s_mu[j][i], g1_s[i] / g1_r[i], 2e-3),
              $sformatf("job 2 cavity %0d/%0d: %f %f expected %f %f", j, i, s_lam[j][i], s_mu[j][i], g1_r[i], g1_s[i] / g1_r[i]));
    end
    for (int i = 0; i < D; i++) check(near(dr[i], 0.0, 0.01) && near(ds[i], 0.0, 0.01), $sformatf("job 2 delta %0d: %f %f", i, dr[i], ds[i]));
    check(sm == 1'b1, "job 2 flagged small");

    // job 3: event 0 with a global precision below the site's own
    g_r[0] = 0.001 + (g_r[0] - g1_r[0]); g_s[0] = 3.0 * g_r[0];
    do_job(1'b0, dr, ds, sm);
    check(near(s_lam[0][0], 256.0 / 65536.0, 1e-6), $sformatf("job 3 clamped precision %f", s_lam[0][0]));
    check(near(s_mu[0][0], 3.0, 0.05), $sformatf("job 3 clamped cavity mean %f", s_mu[0][0]));
    check(n_clamp >= 1, "clamp counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
