// tb_mcmc_sampler: programs one sampler through its network port and checks
// the moments it returns against the exact Gaussian posterior worked out in
// the testbench with real arithmetic:
//   1. independent events, half of them measured: mean and variance of each;
//   2. a linear invariant (kappa > 0) coupling events 0 and 1: the 2x2
//      posterior is solved in closed form;
//   3. the same with a warm start.
// It also checks that each flit goes to the starting EP, that the
// acceptance count is plausible and that a run takes (1+burnin+N)*(D+1)
// clocks plus the 2D+1 result flits.
module tb_mcmc_sampler;
  import bp_pkg::*;
  localparam int D = 8;
  localparam int L2N = 14, BURN = 512;
  logic clk = 0, rst_n = 0;
  flit_t rx_flit, tx_flit;
  logic rx_valid, rx_ready, tx_valid, tx_ready, busy;
  int checks = 0, failures = 0;
  real r_mean[D], r_m2[D];
  int n_res, n_acc_got;
  bit done_seen;

  mcmc_sampler #(.D(D), .PORT_ID(9)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real to_r(logic [31:0] f); return real'(signed'(f)) / 65536.0; endfunction

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    rx_flit = '{dst: 4'd9, src: 4'd2, addr: a, data: d};
    rx_valid = 1;
    @(negedge clk);
    rx_valid = 0;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result collector
  always @(negedge clk) tx_ready = ($urandom % 3 != 0);
  always @(posedge clk) if (tx_valid && tx_ready) begin
    check(tx_flit.dst == 4'd2 && tx_flit.src == 4'd9, "result routing");
    if (tx_flit.addr < ER_M2) r_mean[tx_flit.addr[2:0]] = to_r(tx_flit.data);
    else if (tx_flit.addr < ER_DONE) r_m2[tx_flit.addr[2:0]] = to_r(tx_flit.data);
    else begin n_acc_got = int'(tx_flit.data); done_seen = 1; end
    n_res++;
  end

  task automatic run_case(string name, real mu[D], real lam[D], real m[D], real tau[D],
                          real a[D], real kap, bit warm);
    real pm[D], pv[D];
    int t0, cyc, expect_cyc;
    // exact posterior: diagonal part plus kappa*a*a^T (a nonzero only on 0 and 1)
    for (int i = 0; i < D; i++) begin
      pv[i] = 1.0 / (lam[i] + tau[i]);
      pm[i] = (lam[i] * mu[i] + tau[i] * m[i]) * pv[i];
    end
    begin
      real p00, p01, p11, h0, h1, det;
      p00 = lam[0] + tau[0] + kap * a[0] * a[0];
      p11 = lam[1] + tau[1] + kap * a[1] * a[1];
      p01 = kap * a[0] * a[1];
      h0 = lam[0] * mu[0] + tau[0] * m[0];
      h1 = lam[1] * mu[1] + tau[1] * m[1];
      det = p00 * p11 - p01 * p01;
      pm[0] = (p11 * h0 - p01 * h1) / det;
      pm[1] = (p00 * h1 - p01 * h0) / det;
      pv[0] = p11 / det;
      pv[1] = p00 / det;
    end
    for (int i = 0; i < D; i++) begin
      wr(SR_CAV_MU + 8'(i), to_fx(mu[i]));
      wr(SR_CAV_PREC + 8'(i), to_fx(lam[i]));
      wr(SR_OBS_VAL + 8'(i), to_fx(m[i]));
      wr(SR_OBS_PREC + 8'(i), to_fx(tau[i]));
      wr(SR_COEF + 8'(i), to_fx(a[i]));
    end
    wr(SR_KAPPA, to_fx(kap));
    wr(SR_STEP, to_fx(0.6));
    wr(SR_NSAMP, {16'(BURN), 12'd0, 4'(L2N)});
    n_res = 0; done_seen = 0;
    @(negedge clk);
    rx_flit = '{dst: 4'd9, src: 4'd2, addr: SR_START, data: 32'(warm)};
    rx_valid = 1;
    t0 = $time;
    @(negedge clk); rx_valid = 0;
    while (!done_seen) @(negedge clk);
    cyc = ($time - t0) / 10;
    expect_cyc = (1 + BURN + (1 << L2N)) * (D + 1) + 2 * D + 1;
    check(cyc >= expect_cyc && cyc <= expect_cyc + 40, $sformatf("%s: run took %0d cycles, expected about %0d", name, cyc, expect_cyc));
    check(n_res == 2 * D + 1, $sformatf("%s: %0d result flits", name, n_res));
    check(n_acc_got > (1 << L2N) / 20 && n_acc_got < BURN + (1 << L2N),
          $sformatf("%s: accepted %0d", name, n_acc_got));
    for (int i = 0; i < D; i++) begin
      real v;
      v = r_m2[i] - r_mean[i] * r_mean[i];
      check(r_mean[i] - pm[i] < 0.3 * $sqrt(pv[i]) && pm[i] - r_mean[i] < 0.3 * $sqrt(pv[i]),
            $sformatf("%s: mean[%0d] = %f expected %f", name, i, r_mean[i], pm[i]));
      check(v > 0.6 * pv[i] && v < 1.6 * pv[i],
            $sformatf("%s: var[%0d] = %f expected %f", name, i, v, pv[i]));
    end
  endtask

  initial begin
    real mu[D], lam[D], m[D], tau[D], a[D];
    rx_valid = 0; rx_flit = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    wr(SR_SEED, 32'hC0FFEE11);
    for (int i = 0; i < D; i++) begin
      mu[i] = 1.0 + 0.5 * i; lam[i] = 2.0;
      m[i] = mu[i] + 1.0; tau[i] = (i % 2 == 0) ? 6.0 : 0.0;
      a[i] = 0.0;
    end
    run_case("independent", mu, lam, m, tau, a, 0.0, 0);
    a[0] = 1.0; a[1] = -1.0;
    run_case("invariant", mu, lam, m, tau, a, 8.0, 0);
    run_case("warm", mu, lam, m, tau, a, 8.0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
