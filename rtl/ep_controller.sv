// ep_controller: global controller of the expectation-propagation run.
//
// It holds the global approximation g(theta) as a diagonal Gaussian in
// natural parameters (precision g_r, shift g_s per event), hands the current
// g to every idle EP engine, and applies each returned site update Delta
// as g_r += Delta r, g_s += Delta s (line 7 of the EP algorithm, the product
// g <- g * Delta g_k). Updates are applied one per clock; when several EPs
// finish together they are served round robin, and an EP gets the new g as
// soon as it is idle again. An EP receives at most MAX_ITERS jobs per run;
// the run also stops early once the latest update of every EP was flagged
// small (converged). At the end `irq` is raised and g can be read.
//
// Host registers (word addresses, 32-bit; mmio_rdata is combinational):
//   0x00 CTRL       write 1 to bit 0: start a run (g = prior, sites reset)
//   0x01 STATUS     bit0 busy, bit1 done (= irq), bit2 converged
//   0x02 MAX_ITERS  jobs per EP and run
//   0x03 NSAMP      [3:0] log2 kept samples, [31:16] burn-in samples
//   0x04 STEP       proposal half-width (Q16.16)
//   0x05 KAPPA      invariant weight (Q16.16)
//   0x06 PRIOR_PREC prior precision of every event (Q16.16), prior mean 0
//   0x07 TOL        convergence tolerance on |Delta| (Q16.16)
//   0x08+k SITE_BASE DRAM word address of the record of time slice k
//   0x0C DISPATCHED jobs handed out in the last run (read only)
//   0x0D NOC_CONFLICTS arbitration losses in the network since reset (read only)
//   0x0E CLAMPS     cavity/variance clamps in all EP engines since reset (read only)
//   0x0F SAMP_BUSY  number of samplers running now (read only)
//   0x40+i G_R      posterior precision of event i (read only)
//   0x50+i G_S      posterior shift of event i; mean = G_S / G_R (read only)
// Writing SITE_BASE is how the host points the accelerator at other sample
// buffers, for example after a context switch.
//
// From the paper: a global controller that synchronously updates g and
// dispatches it to the idle EP, MMIO configuration of buffer addresses, a
// completion interrupt. This design's choices: g kept in registers instead
// of DRAM, the register map, round-robin service, the stop rule.
module ep_controller
  import bp_pkg::*;
#(
  parameter int unsigned K = K_EP,
  parameter int unsigned D = D_EVENTS
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register port
  input  logic              mmio_valid,
  input  logic              mmio_we,
  input  logic [7:0]        mmio_addr,
  input  logic [31:0]       mmio_wdata,
  output logic [31:0]       mmio_rdata,
  output logic              irq,
  // to the EP engines
  output ep_cfg_t           cfg,
  output logic [ADDR_W-1:0] site_base [K],
  output logic              job_valid [K],
  input  logic              job_ready [K],
  output logic              job_cold  [K],
  output fx_t               job_r [D],
  output fx_t               job_s [D],
  input  logic              res_valid [K],
  output logic              res_ready [K],
  input  fx_t               res_dr [K][D],
  input  fx_t               res_ds [K][D],
  input  logic              res_small [K],
  // accelerator statistics, shown as read-only registers
  input  logic [31:0]       stat_conflicts,
  input  logic [31:0]       stat_clamps,
  input  logic [31:0]       stat_samp_busy
);
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;

  fx_t         g_r [D], g_s [D];
  logic [15:0] max_iters;
  fx_t         prior_prec;
  logic [15:0] iters_left [K];
  logic        outstanding [K], cold [K], is_small [K];
  logic        running, done, converged;
  logic [31:0] dispatched;
  logic [KW-1:0] rr;

  assign job_r = g_r;
  assign job_s = g_s;
  assign irq   = done;

  // all EPs converged / finished
  logic all_small, all_idle, all_spent;
  always_comb begin
    all_small = 1'b1; all_idle = 1'b1; all_spent = 1'b1;
    for (int k = 0; k < int'(K); k++) begin
      all_small &= is_small[k];
      all_idle  &= !outstanding[k];
      all_spent &= (iters_left[k] == 16'd0);
    end
  end

  // dispatch: any idle EP that still has iterations left
  always_comb begin
    for (int k = 0; k < int'(K); k++) begin
      job_valid[k] = running && !outstanding[k] && (iters_left[k] != 16'd0) && !all_small;
      job_cold[k]  = cold[k];
    end
  end

  // result service: one EP per clock, round robin from rr
  logic          sel_valid;
  logic [KW-1:0] sel;
  always_comb begin
    sel_valid = 1'b0;
    sel       = '0;
    for (int n = 0; n < int'(K); n++) begin
      automatic int unsigned k = (int'(rr) + n) % K;
      if (!sel_valid && res_valid[k]) begin
        sel_valid = 1'b1;
        sel       = KW'(k);
      end
    end
    for (int k = 0; k < int'(K); k++) res_ready[k] = sel_valid && (sel == KW'(k));
  end

  // host reads
  always_comb begin
    mmio_rdata = '0;
    if (mmio_addr >= 8'h40 && mmio_addr < 8'h40 + 8'(D))      mmio_rdata = g_r[mmio_addr[$clog2(D)-1:0]];
    else if (mmio_addr >= 8'h50 && mmio_addr < 8'h50 + 8'(D)) mmio_rdata = g_s[mmio_addr[$clog2(D)-1:0]];
    else if (mmio_addr >= 8'h08 && mmio_addr < 8'h08 + 8'(K)) mmio_rdata = site_base[mmio_addr[KW-1:0]];
    else begin
      unique case (mmio_addr)
        8'h01: mmio_rdata = {29'd0, converged, done, running};
        8'h02: mmio_rdata = {16'd0, max_iters};
        8'h03: mmio_rdata = {cfg.burnin, 12'd0, cfg.log2_nsamp};
        8'h04: mmio_rdata = cfg.step;
        8'h05: mmio_rdata = cfg.kappa;
        8'h06: mmio_rdata = prior_prec;
        8'h07: mmio_rdata = cfg.tol;
        8'h0C: mmio_rdata = dispatched;
        8'h0D: mmio_rdata = stat_conflicts;
        8'h0E: mmio_rdata = stat_clamps;
        8'h0F: mmio_rdata = stat_samp_busy;
        default: mmio_rdata = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(D); i++) begin g_r[i] <= '0; g_s[i] <= '0; end
      for (int k = 0; k < int'(K); k++) begin
        iters_left[k] <= '0; outstanding[k] <= 1'b0; cold[k] <= 1'b1; is_small[k] <= 1'b0;
        site_base[k] <= ADDR_W'(k * 32);
      end
      max_iters  <= 16'd4;
      prior_prec <= 32'sd6554;             // 0.1
      cfg.kappa  <= '0;
      cfg.step   <= FX_HALF;
      cfg.log2_nsamp <= 4'd10;
      cfg.burnin <= 16'd256;
      cfg.tol    <= 32'sd655;              // 0.01
      running <= 1'b0; done <= 1'b0; converged <= 1'b0; dispatched <= '0; rr <= '0;
    end else begin
      // register writes
      if (mmio_valid && mmio_we) begin
        if (mmio_addr >= 8'h08 && mmio_addr < 8'h08 + 8'(K)) site_base[mmio_addr[KW-1:0]] <= ADDR_W'(mmio_wdata);
        unique case (mmio_addr)
          8'h00: if (mmio_wdata[0] && !running) begin
            running <= 1'b1; done <= 1'b0; converged <= 1'b0; dispatched <= '0;
            for (int i = 0; i < int'(D); i++) begin g_r[i] <= prior_prec; g_s[i] <= '0; end
            for (int k = 0; k < int'(K); k++) begin
              iters_left[k] <= max_iters; cold[k] <= 1'b1; is_small[k] <= 1'b0;
            end
          end
          8'h02: max_iters  <= mmio_wdata[15:0];
          8'h03: begin cfg.log2_nsamp <= mmio_wdata[3:0]; cfg.burnin <= mmio_wdata[31:16]; end
          8'h04: cfg.step   <= fx_t'(mmio_wdata);
          8'h05: cfg.kappa  <= fx_t'(mmio_wdata);
          8'h06: prior_prec <= fx_t'(mmio_wdata);
          8'h07: cfg.tol    <= fx_t'(mmio_wdata);
          default: ;
        endcase
      end

      if (running) begin
        // dispatch
        for (int k = 0; k < int'(K); k++) begin
          if (job_valid[k] && job_ready[k]) begin
            outstanding[k] <= 1'b1;
            cold[k]        <= 1'b0;
          end
        end
        dispatched <= dispatched + 32'(count_dispatch());
        // global update from one EP
        if (sel_valid) begin
          for (int i = 0; i < int'(D); i++) begin
            g_r[i] <= g_r[i] + res_dr[sel][i];
            g_s[i] <= g_s[i] + res_ds[sel][i];
          end
          outstanding[sel] <= 1'b0;
          iters_left[sel]  <= iters_left[sel] - 16'd1;
          is_small[sel]       <= res_small[sel];
          rr               <= KW'((int'(sel) + 1) % K);
        end
        // end of run
        if (all_idle && !sel_valid && (all_spent || all_small) && !(mmio_valid && mmio_we && mmio_addr == 8'h00)) begin
          running   <= 1'b0;
          done      <= 1'b1;
          converged <= all_small;
        end
      end
    end
  end

  function automatic int unsigned count_dispatch();
    int unsigned n = 0;
    for (int k = 0; k < int'(K); k++) if (job_valid[k] && job_ready[k]) n++;
    return n;
  endfunction
endmodule
