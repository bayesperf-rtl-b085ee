// tb_ep_controller: the global EP controller with four behavioural EP
// engines. Each model EP takes a job when it is ready (random ready), works
// for a random number of cycles and returns a fixed, known site update
// Delta (different per EP and per event). A reference model of g in the
// testbench applies every accepted update. Checks:
//   - register write/read-back of the host registers and their reset values,
//     and the statistics registers showing their inputs,
//   - START loads g with the prior precision and zero shift,
//   - every job carries the current g (the reference model at that cycle),
//     the first job of each EP is cold and later ones warm,
//   - at most one result is taken per clock, only from a valid EP, and a
//     waiting EP is served within K clocks (round robin),
//   - final g = prior + MAX_ITERS * sum of the EP updates, DISPATCHED =
//     K * MAX_ITERS, the interrupt and STATUS,
//   - a second run where every update is flagged small stops once every EP's latest
//     update is small, before the iterations are spent, with STATUS.converged set.
module tb_ep_controller;
  import bp_pkg::*;
  localparam int K = 4, D = 8;
  logic clk = 0, rst_n = 0;
  logic mmio_valid, mmio_we, irq;
  logic [7:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  ep_cfg_t cfg;
  logic [ADDR_W-1:0] site_base [K];
  logic job_valid [K], job_ready [K], job_cold [K];
  fx_t  job_r [D], job_s [D];
  logic res_valid [K], res_ready [K], res_small [K];
  fx_t  res_dr [K][D], res_ds [K][D];
  logic [31:0] stat_conflicts = 32'h1234_5678, stat_clamps = 32'd42, stat_samp_busy = 32'd7;
  int checks = 0, failures = 0;

  ep_controller #(.K(K), .D(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ model EPs
  bit   flag_small = 0;
  int   jobs_seen [K];
  int   wait_cnt [K];
  fx_t  m_r [D], m_s [D];           // reference g
  int   n_cold [K];
  logic res_ready_q [K];
  int   busy_left [K] = '{default: -1};

  function automatic fx_t dr_of(int k, int i); return fx_t'(32'sd4096 * (k + 1) + 32'sd256 * i); endfunction
  function automatic fx_t ds_of(int k, int i); return fx_t'(-32'sd2048 * (k + 1) + 32'sd1000 * i); endfunction

  for (genvar k = 0; k < K; k++) begin : g_ep
    always @(negedge clk) begin
      if (!rst_n) begin
        job_ready[k] = 0; res_valid[k] = 0; res_small[k] = 0;
        for (int i = 0; i < D; i++) begin res_dr[k][i] = 0; res_ds[k][i] = 0; end
      end else begin
        if (res_valid[k] && res_ready_q[k]) res_valid[k] = 0;
        if (busy_left[k] > 0) busy_left[k]--;
        else if (busy_left[k] == 0 && !res_valid[k]) begin
          res_valid[k] = 1; res_small[k] = flag_small;
          for (int i = 0; i < D; i++) begin res_dr[k][i] = dr_of(k, i); res_ds[k][i] = ds_of(k, i); end
          busy_left[k] = -1;
        end
        job_ready[k] = (busy_left[k] < 0) && !res_valid[k] && ($urandom % 3 != 0);
      end
    end
  end

  // sample the handshakes at the clock edge, check, then update the model
  always @(posedge clk) if (rst_n) begin
    automatic int n_taken = 0;
    for (int k = 0; k < K; k++) begin
      res_ready_q[k] = res_ready[k];
      if (job_valid[k] && job_ready[k]) begin
        automatic bit same = 1;
        for (int i = 0; i < D; i++) same &= (job_r[i] == m_r[i]) && (job_s[i] == m_s[i]);
        check(same, $sformatf("EP %0d job carries current g", k));
        check(job_cold[k] == (jobs_seen[k] == 0), $sformatf("EP %0d job %0d cold flag", k, jobs_seen[k]));
        if (job_cold[k]) n_cold[k]++;
        jobs_seen[k]++;
        busy_left[k] = 2 + $urandom % 40;
      end
      if (res_ready[k]) begin
        n_taken++;
        check(res_valid[k], $sformatf("EP %0d served without a result", k));
      end
      if (res_valid[k] && !res_ready[k]) begin
        wait_cnt[k]++;
        check(wait_cnt[k] < K, $sformatf("EP %0d waited %0d clocks", k, wait_cnt[k]));
      end else wait_cnt[k] = 0;
    end
    check(n_taken <= 1, "one result per clock");
    for (int k = 0; k < K; k++) if (res_valid[k] && res_ready[k])
      for (int i = 0; i < D; i++) begin m_r[i] += res_dr[k][i]; m_s[i] += res_ds[k][i]; end
  end

  task automatic mmio_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_valid = 0; mmio_we = 0;
  endtask
  task automatic mmio_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); mmio_addr = a; #1 d = mmio_rdata;
  endtask

  // holds the reference model while START is written (START loads g)
  task automatic start_run(fx_t prior);
    @(negedge clk); mmio_valid = 1; mmio_we = 1; mmio_addr = 8'h00; mmio_wdata = 32'd1;
    @(posedge clk);
    for (int i = 0; i < D; i++) begin m_r[i] = prior; m_s[i] = 0; end
    for (int k = 0; k < K; k++) jobs_seen[k] = 0;
    @(negedge clk); mmio_valid = 0; mmio_we = 0;
  endtask

  initial begin
    logic [31:0] v;
    int iters = 6;
    fx_t prior = fx_t'(32'sd13107);   // 0.2
    mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    for (int k = 0; k < K; k++) begin jobs_seen[k] = 0; wait_cnt[k] = 0; n_cold[k] = 0; res_ready_q[k] = 0; end
    for (int i = 0; i < D; i++) begin m_r[i] = 0; m_s[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;

    // reset values and register read-back
    mmio_rd(8'h02, v); check(v == 32'd4, $sformatf("MAX_ITERS reset %0d", v));
    mmio_rd(8'h03, v); check(v == {16'd256, 16'd10}, $sformatf("NSAMP reset %h", v));
    mmio_rd(8'h04, v); check(v == FX_HALF, "STEP reset");
    mmio_rd(8'h09, v); check(v == 32'd32, "SITE_BASE 1 reset");
    mmio_rd(8'h0D, v); check(v == stat_conflicts, "NOC_CONFLICTS register");
    mmio_rd(8'h0E, v); check(v == stat_clamps, "CLAMPS register");
    mmio_rd(8'h0F, v); check(v == stat_samp_busy, "SAMP_BUSY register");
    mmio_wr(8'h02, 32'(iters));
    mmio_wr(8'h03, {16'd100, 16'd7});
    mmio_wr(8'h04, 32'h0001_8000);
    mmio_wr(8'h05, 32'h0004_0000);
    mmio_wr(8'h06, prior);
    mmio_wr(8'h07, 32'd300);
    for (int k = 0; k < K; k++) mmio_wr(8'h08 + 8'(k), 32'h1000 + 32'(k * 77));
    mmio_rd(8'h02, v); check(v == 32'(iters), "MAX_ITERS read-back");
    mmio_rd(8'h03, v); check(v == {16'd100, 16'd7}, "NSAMP read-back");
    check(cfg.log2_nsamp == 4'd7 && cfg.burnin == 16'd100, "cfg sample counts");
    check(cfg.step == 32'h0001_8000 && cfg.kappa == 32'h0004_0000 && cfg.tol == 32'sd300, "cfg step/kappa/tol");
    mmio_rd(8'h06, v); check(v == prior, "PRIOR_PREC read-back");
    for (int k = 0; k < K; k++) begin
      mmio_rd(8'h08 + 8'(k), v);
      check(v == 32'h1000 + 32'(k * 77) && site_base[k] == v, $sformatf("SITE_BASE %0d", k));
    end

    // run 1: full number of iterations
    start_run(prior);
    mmio_rd(8'h01, v); check(v[0] == 1'b1 && v[1] == 1'b0, $sformatf("STATUS busy %h", v));
    while (!irq) @(negedge clk);
    mmio_rd(8'h01, v); check(v == 32'b010, $sformatf("STATUS done %h", v));
    mmio_rd(8'h0C, v); check(v == 32'(K * iters), $sformatf("DISPATCHED %0d", v));
    for (int k = 0; k < K; k++) check(jobs_seen[k] == iters && n_cold[k] == 1, $sformatf("EP %0d got %0d jobs", k, jobs_seen[k]));
    for (int i = 0; i < D; i++) begin
      fx_t er, es;
      logic [31:0] r, s;
      er = prior; es = 0;
      for (int k = 0; k < K; k++) begin er += fx_t'(iters) * dr_of(k, i); es += fx_t'(iters) * ds_of(k, i); end
      mmio_rd(8'h40 + 8'(i), r); mmio_rd(8'h50 + 8'(i), s);
      check(r == er && s == es, $sformatf("g event %0d: %h %h expected %h %h", i, r, s, er, es));
    end

    // run 2: every update small -> converged early
    flag_small = 1;
    n_cold = '{default: 0};
    start_run(prior);
    while (!irq) @(negedge clk);
    mmio_rd(8'h01, v); check(v == 32'b110, $sformatf("STATUS converged %h", v));
    mmio_rd(8'h0C, v); check(v >= 32'(K) && v < 32'(K * iters), $sformatf("converged run dispatched %0d", v));
    for (int k = 0; k < K; k++) check(n_cold[k] == 1, "cold again after a new start");
    repeat (20) @(negedge clk);
    check(irq, "irq held until next start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
