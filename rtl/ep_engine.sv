// ep_engine: expectation-propagation engine for one time slice (site k).
//
// It runs lines 3 to 6 of the EP algorithm for its site, with every
// distribution a diagonal Gaussian kept in natural parameters per event:
// precision r and shift s = r*mean. Products of Gaussians are then sums and
// quotients are differences.
//
//   job from the controller : global approximation g = (r, s)
//   line 3  cavity          : r_-k = r - r_k, s_-k = s - s_k;
//                             mean_-k = s_-k / r_-k
//   line 4  MCMC            : the cavity and this slice's measurements go
//                             to the engine's samplers over the NoC; each
//                             returns the mean and second moment of its
//                             chain
//   line 5  local update    : moments of all samplers are averaged,
//                             var = E[x^2] - E[x]^2, r_new = 1/var,
//                             s_new = mean * r_new
//   line 6  site update     : Delta r = r_new - r, Delta s = s_new - s;
//                             the site keeps r_k += Delta r, s_k += Delta s
//   result to the controller: Delta (line 7, g <- g*Delta, is done there)
//
// On a job marked `cold` (first job of a run) the site is reset to g_k = 1
// (r_k = s_k = 0), the slice record is read from DRAM and the samplers
// start from the cavity mean; later jobs start the chains warm, from where
// they stopped. The slice record at `site_base` holds D observed values,
// D observation precisions (0 = event not sampled in this slice) and D
// invariant coefficients, one 32-bit word each. A cavity precision below
// R_MIN is clamped to R_MIN and then centred on the mean of g (s/r of the
// global approximation) instead of s_-k/R_MIN; a variance below V_MIN is
// clamped to V_MIN; `n_clamp` counts both. `small` in the result is set when every |Delta| is below
// cfg.tol.
//
// The engine owns SAMP_PER_EP consecutive samplers starting at port
// SAMP_BASE and is itself network port PORT_ID. Each sampler gets 5*D+5
// register-write flits; they are sent word by word across the samplers, so
// the START flits leave on consecutive clocks and the chains finish together. Divisions use one shared
// sequential divider (49 clocks each, 2*D per job).
//
// From the paper: EP engines running lines 3-6 in parallel, per-time-slice
// sites, Gaussian mean-field approximation, MCMC for the tilted
// distribution, inputs read from on-board DRAM at MMIO-set addresses, warm
// chains. This design's choices: natural-parameter arithmetic, clamping,
// the static sampler allotment, the record layout and the convergence test.
module ep_engine
  import bp_pkg::*;
#(
  parameter int unsigned D         = D_EVENTS,
  parameter int unsigned PORT_ID   = 0,
  parameter int unsigned SAMP_BASE = K_EP,
  parameter int unsigned N_SAMP    = SAMP_PER_EP
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ep_cfg_t           cfg,
  input  logic [ADDR_W-1:0] site_base,
  // job from the controller
  input  logic              job_valid,
  output logic              job_ready,
  input  logic              job_cold,
  input  fx_t               job_r [D],
  input  fx_t               job_s [D],
  // result to the controller
  output logic              res_valid,
  input  logic              res_ready,
  output fx_t               res_dr [D],
  output fx_t               res_ds [D],
  output logic              res_small,
  // read port to this engine's DRAM replica
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  mem_rsp_t          mem_rsp,
  // network port
  output flit_t             tx_flit,
  output logic              tx_valid,
  input  logic              tx_ready,
  input  flit_t             rx_flit,
  input  logic              rx_valid,
  output logic              rx_ready,
  output logic [15:0]       n_clamp
);
  localparam fx_t R_MIN = 32'sd256;   // 2^-8
  localparam fx_t V_MIN = 32'sd256;   // 2^-8
  localparam fx_t INV_S = fx_t'((65536 + N_SAMP / 2) / N_SAMP);
  localparam int unsigned IW  = $clog2(D);
  localparam int unsigned NW  = 5 * D + 5;           // flits per sampler
  localparam int unsigned WW  = $clog2(NW);
  localparam int unsigned SW  = (N_SAMP > 1) ? $clog2(N_SAMP) : 1;
  localparam int unsigned CW  = $clog2(N_SAMP + 1);

  typedef enum logic [3:0] {
    E_IDLE, E_LOAD, E_CAV, E_DIV_CAV, E_SEND, E_WAIT, E_MOM, E_DIV_REC, E_DELTA, E_RES
  } ep_state_t;
  ep_state_t state;

  fx_t g_r [D], g_s [D];            // global g of the current job
  fx_t gk_r [D], gk_s [D];          // this site's approximation g_k
  fx_t cav_r [D], cav_s [D], cav_mu [D];
  logic cav_clamped [D];
  fx_t obs_val [D], obs_prec [D], coef [D];
  acc_t sum_mean [D], sum_m2 [D];
  fx_t mean [D], var_ [D], r_new [D];
  logic warm;
  logic [7:0] iter;

  // ---------------------------------------------------------- divider
  logic div_start, div_busy, div_done;
  fx_t  div_a, div_b, div_q;
  fx_div u_div (.clk, .rst_n, .start(div_start), .a(div_a), .b(div_b),
                .busy(div_busy), .done(div_done), .q(div_q));
  logic [IW-1:0] di;
  logic          div_issued;

  always_comb begin
    // a clamped cavity keeps the mean of g: mean = g_s / g_r
    div_a = (state != E_DIV_CAV) ? FX_ONE   : cav_clamped[di] ? g_s[di] : cav_s[di];
    div_b = (state != E_DIV_CAV) ? var_[di] : cav_clamped[di] ? g_r[di] : cav_r[di];
    div_start = (state == E_DIV_CAV || state == E_DIV_REC) && !div_issued;
  end

  // ---------------------------------------------------------- DRAM load
  localparam int unsigned LW = $clog2(3 * D + 1);
  logic [LW-1:0] rd_issued, rd_got;
  assign mem_req.valid = (state == E_LOAD) && (rd_issued < LW'(3 * D));
  assign mem_req.we    = 1'b0;
  assign mem_req.addr  = site_base + ADDR_W'(rd_issued);
  assign mem_req.wdata = '0;

  // ---------------------------------------------------------- flit send
  logic [WW-1:0] wi;       // word within a sampler's program
  logic [SW-1:0] sj;       // sampler index
  flit_t         nf;
  always_comb begin
    logic [IW-1:0] ev;
    ev = IW'(wi % WW'(D));
    nf.dst  = PORT_W'(SAMP_BASE + 32'(sj));
    nf.src  = PORT_W'(PORT_ID);
    nf.addr = 8'h00;
    nf.data = '0;
    if (wi < WW'(D))          begin nf.addr = SR_CAV_MU   + 8'(ev); nf.data = cav_mu[ev];   end
    else if (wi < WW'(2 * D)) begin nf.addr = SR_CAV_PREC + 8'(ev); nf.data = cav_r[ev];    end
    else if (wi < WW'(3 * D)) begin nf.addr = SR_OBS_VAL  + 8'(ev); nf.data = obs_val[ev];  end
    else if (wi < WW'(4 * D)) begin nf.addr = SR_OBS_PREC + 8'(ev); nf.data = obs_prec[ev]; end
    else if (wi < WW'(5 * D)) begin nf.addr = SR_COEF     + 8'(ev); nf.data = coef[ev];     end
    else begin
      unique case (wi - WW'(5 * D))
        WW'(0): begin nf.addr = SR_KAPPA; nf.data = cfg.kappa; end
        WW'(1): begin nf.addr = SR_STEP;  nf.data = cfg.step;  end
        WW'(2): begin nf.addr = SR_NSAMP; nf.data = {cfg.burnin, 12'd0, cfg.log2_nsamp}; end
        WW'(3): begin nf.addr = SR_SEED;
                      nf.data = 32'h9E37_79B9 * {16'(PORT_ID), iter, (8 - SW)'(0), sj}; end
        default: begin nf.addr = SR_START; nf.data = {31'd0, warm}; end
      endcase
    end
  end

  assign rx_ready  = 1'b1;
  assign job_ready = (state == E_IDLE);

  logic [CW-1:0] done_cnt;
  logic       all_small;
  always_comb begin
    all_small = 1'b1;
    for (int i = 0; i < int'(D); i++)
      if (fx_abs(res_dr[i]) >= cfg.tol || fx_abs(res_ds[i]) >= cfg.tol) all_small = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE;
      for (int i = 0; i < int'(D); i++) begin
        g_r[i] <= '0; g_s[i] <= '0; gk_r[i] <= '0; gk_s[i] <= '0;
        cav_r[i] <= '0; cav_s[i] <= '0; cav_mu[i] <= '0; cav_clamped[i] <= 1'b0;
        obs_val[i] <= '0; obs_prec[i] <= '0; coef[i] <= '0;
        sum_mean[i] <= '0; sum_m2[i] <= '0; mean[i] <= '0; var_[i] <= FX_ONE; r_new[i] <= '0;
        res_dr[i] <= '0; res_ds[i] <= '0;
      end
      warm <= 1'b0; iter <= '0; di <= '0; div_issued <= 1'b0;
      rd_issued <= '0; rd_got <= '0; wi <= '0; sj <= '0; tx_valid <= 1'b0; tx_flit <= '0;
      done_cnt <= '0; res_valid <= 1'b0; res_small <= 1'b0; n_clamp <= '0;
    end else begin
      unique case (state)
        E_IDLE: if (job_valid) begin
          for (int i = 0; i < int'(D); i++) begin
            g_r[i] <= job_r[i];
            g_s[i] <= job_s[i];
            if (job_cold) begin gk_r[i] <= '0; gk_s[i] <= '0; end
          end
          warm <= !job_cold;
          iter <= job_cold ? 8'd0 : iter + 8'd1;
          rd_issued <= '0; rd_got <= '0;
          state <= job_cold ? E_LOAD : E_CAV;
        end
        E_LOAD: begin
          if (mem_req.valid && mem_ready) rd_issued <= rd_issued + 1'b1;
          if (mem_rsp.rvalid) begin
            if (rd_got < LW'(D))          obs_val [IW'(rd_got)]                 <= fx_t'(mem_rsp.rdata);
            else if (rd_got < LW'(2 * D)) obs_prec[IW'(rd_got - LW'(D))]        <= fx_t'(mem_rsp.rdata);
            else                          coef    [IW'(rd_got - LW'(2 * D))]    <= fx_t'(mem_rsp.rdata);
            rd_got <= rd_got + 1'b1;
            if (rd_got == LW'(3 * D - 1)) state <= E_CAV;
          end
        end
        E_CAV: begin   // line 3: cavity in natural parameters
          for (int i = 0; i < int'(D); i++) begin
            if (g_r[i] - gk_r[i] < R_MIN) begin
              cav_r[i]       <= R_MIN;
              cav_clamped[i] <= 1'b1;
            end else begin
              cav_r[i]       <= g_r[i] - gk_r[i];
              cav_clamped[i] <= 1'b0;
            end
            cav_s[i] <= g_s[i] - gk_s[i];
          end
          n_clamp <= n_clamp + 16'(cav_clamps());
          di <= '0; div_issued <= 1'b0;
          state <= E_DIV_CAV;
        end
        E_DIV_CAV: begin
          if (div_start) div_issued <= 1'b1;
          if (div_done) begin
            cav_mu[di] <= div_q;
            div_issued <= 1'b0;
            if (di == IW'(D - 1)) begin
              state <= E_SEND; wi <= '0; sj <= '0;
              done_cnt <= '0;
              for (int i = 0; i < int'(D); i++) begin sum_mean[i] <= '0; sum_m2[i] <= '0; end
            end else di <= di + 1'b1;
          end
        end
        E_SEND: begin   // line 4: program and start the samplers
          if (!tx_valid || tx_ready) begin
            tx_valid <= 1'b1;
            tx_flit  <= nf;
            // word-major order: each word goes to all samplers in turn, so
            // the START flits arrive on consecutive clocks and the chains
            // run (and finish) together
            if (sj == SW'(N_SAMP - 1)) begin
              sj <= '0;
              if (wi == WW'(NW - 1)) state <= E_WAIT;
              else                   wi    <= wi + 1'b1;
            end else sj <= sj + 1'b1;
          end
        end
        E_WAIT: begin
          if (tx_valid && tx_ready) tx_valid <= 1'b0;
          if (rx_valid && rx_flit.addr == ER_DONE && done_cnt == CW'(N_SAMP - 1)) state <= E_MOM;
        end
        E_MOM: begin   // line 5: moment matching
          for (int i = 0; i < int'(D); i++) begin
            fx_t mn, m2, v;
            mn = fx_sat(half_prod(sum_mean[i]));
            m2 = fx_sat(half_prod(sum_m2[i]));
            v  = fx_sat(acc_t'(m2) - fx_mul_wide(mn, mn));
            mean[i] <= mn;
            var_[i] <= (v < V_MIN) ? V_MIN : v;
          end
          n_clamp <= n_clamp + 16'(var_clamps());
          di <= '0; div_issued <= 1'b0;
          state <= E_DIV_REC;
        end
        E_DIV_REC: begin
          if (div_start) div_issued <= 1'b1;
          if (div_done) begin
            r_new[di] <= div_q;
            div_issued <= 1'b0;
            if (di == IW'(D - 1)) state <= E_DELTA;
            else di <= di + 1'b1;
          end
        end
        E_DELTA: begin   // line 6: Delta g_k, site update
          for (int i = 0; i < int'(D); i++) begin
            fx_t sn;
            sn = fx_mul(mean[i], r_new[i]);
            res_dr[i] <= r_new[i] - g_r[i];
            res_ds[i] <= sn - g_s[i];
            gk_r[i]   <= gk_r[i] + (r_new[i] - g_r[i]);
            gk_s[i]   <= gk_s[i] + (sn - g_s[i]);
          end
          state <= E_RES;
        end
        E_RES: begin
          if (!res_valid) begin
            res_valid <= 1'b1;
            res_small <= all_small;
          end else if (res_ready) begin
            res_valid <= 1'b0;
            state     <= E_IDLE;
          end
        end
        default: state <= E_IDLE;
      endcase

      // sampler results can arrive as soon as the first sampler started
      if (rx_valid && (state == E_SEND || state == E_WAIT)) begin
        if (rx_flit.addr < ER_M2)
          sum_mean[rx_flit.addr[IW-1:0]] <= sum_mean[rx_flit.addr[IW-1:0]] + acc_t'(fx_t'(rx_flit.data));
        else if (rx_flit.addr < ER_DONE)
          sum_m2[rx_flit.addr[IW-1:0]] <= sum_m2[rx_flit.addr[IW-1:0]] + acc_t'(fx_t'(rx_flit.data));
        else
          done_cnt <= done_cnt + 1'b1;
      end
    end
  end

  // sum over samplers times 1/N_SAMP
  function automatic acc_t half_prod(acc_t a);
    logic signed [79:0] p;
    p = 80'(a) * 80'(INV_S);
    return acc_t'(p >>> FRAC);
  endfunction

  function automatic int unsigned cav_clamps();
    int unsigned n = 0;
    for (int i = 0; i < int'(D); i++) if (g_r[i] - gk_r[i] < R_MIN) n++;
    return n;
  endfunction

  function automatic int unsigned var_clamps();
    int unsigned n = 0;
    for (int i = 0; i < int'(D); i++) begin
      fx_t mn, m2, v;
      mn = fx_sat(half_prod(sum_mean[i]));
      m2 = fx_sat(half_prod(sum_m2[i]));
      v  = fx_sat(acc_t'(m2) - fx_mul_wide(mn, mn));
      if (v < V_MIN) n++;
    end
    return n;
  endfunction
endmodule
