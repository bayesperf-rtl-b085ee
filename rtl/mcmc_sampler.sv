// mcmc_sampler: Markov-chain Monte Carlo sampler for one EP site.
//
// The sampler draws samples of the event vector theta (D events) from the
// "tilted" distribution of expectation propagation,
//
//   p(theta) ~ Pr(y_k | theta) * g_-k(theta),
//
// and returns the sample mean and second moment of every event to the EP
// engine that started it. The energy E = -log p (up to a constant) is
//
//   E = sum_i 0.5*lambda_i*(theta_i - mu_i)^2      cavity g_-k (diagonal Gaussian)
//     + sum_i 0.5*tau_i   *(theta_i - m_i)^2       measurement m_i of event i,
//                                                  precision tau_i (0 = not sampled)
//     + 0.5*kappa*(sum_i a_i*theta_i)^2            linear invariant between events
//
// Algorithm: random-walk Metropolis with a full-vector proposal,
// theta'_i = theta_i + w_i*(2u-1), u uniform, w_i = step / sqrt(lambda_i +
// tau_i) with the square root rounded to a power of two, so `step` is the
// proposal width in units of each event's standard deviation. The energy of the proposal is
// accumulated one event per clock (D clocks), then one clock adds the
// invariant term and makes the accept test E' - E <= -ln(u). -ln(u) is
// computed as ln2 * (-log2 u), with -log2 u from the leading-zero count of
// u plus the linear (Mitchell) approximation of the mantissa's logarithm.
// One sample therefore costs D+1 clocks. The first pass after START uses a
// zero step and is always accepted; it only computes E(theta). Then
// `burnin` samples are discarded and 2^log2_nsamp samples are summed.
//
// Interface: one network port. Incoming flits are register writes (map in
// bp_pkg: cavity, measurements, coefficients, kappa, step, sample counts,
// seed, START); they are always accepted. START records the sender as the
// owner; data bit 0 selects a warm start, which keeps the chain state of the
// previous run as starting point, otherwise the chain starts at the cavity
// mean. At the end the sampler writes D means, D second moments and a DONE
// flit (data = number of accepted proposals) to the owner. A START that
// arrives while a run is in progress is ignored.
//
// From the paper: the role of the samplers (line 4 of the EP algorithm),
// control by the EPs (seeds, state updates that pass the rejection test),
// warm starts from previous iterations, Gaussian measurement error. The
// sampler's internal algorithm, the proposal, the form of the invariant
// factor and the fixed point format are this design's choices: the paper's
// samplers are generated by a separate compiler it does not describe.
module mcmc_sampler
  import bp_pkg::*;
#(
  parameter int unsigned D       = D_EVENTS,
  parameter int unsigned PORT_ID = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // from the network
  input  flit_t rx_flit,
  input  logic  rx_valid,
  output logic  rx_ready,
  // into the network
  output flit_t tx_flit,
  output logic  tx_valid,
  input  logic  tx_ready,
  output logic  busy
);
  localparam int unsigned IW = $clog2(D);

  // ------------------------------------------------------------ registers
  fx_t cav_mu [D], cav_prec [D], obs_val [D], obs_prec [D], coef [D];
  fx_t kappa, step;
  logic [3:0]  log2n;
  logic [15:0] burnin;
  logic [PORT_W-1:0] owner;
  logic        warm;

  // ---------------------------------------------------------- chain state
  fx_t  theta [D], theta_p [D];
  acc_t e_cur, e_acc, inv_acc;
  logic signed [63:0] sum1 [D], sum2 [D];
  logic [31:0] iter, n_acc;
  logic        first;
  logic [IW-1:0] idx;
  logic [$clog2(2*D+1)-1:0] sidx;

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_EVAL, S_DECIDE, S_SEND} state_t;
  state_t state;

  // ------------------------------------------------------------------ RNG
  logic [31:0] rnd;
  logic        seed_load, rng_next;
  assign seed_load = rx_valid && rx_flit.addr == SR_SEED;
  assign rng_next  = (state == S_EVAL) || (state == S_DECIDE);
  urng u_rng (.clk, .rst_n, .seed_load, .seed(rx_flit.data), .next(rng_next), .rnd);

  assign rx_ready = 1'b1;
  assign busy     = (state != S_IDLE);

  // acc_t x fx_t with the factor 0.5 folded in: (a*b) >> 17
  function automatic acc_t half_mul(acc_t a, fx_t b);
    logic signed [79:0] p;
    p = 80'(a) * 80'(b);
    return acc_t'(p >>> (FRAC + 1));
  endfunction

  function automatic acc_t acc_sat_add(acc_t a, acc_t b);
    logic signed [48:0] s;
    s = 49'(a) + 49'(b);
    if (s > 49'sh0_7FFF_FFFF_FFFF)       return 48'sh7FFF_FFFF_FFFF;
    else if (s < -49'sh0_7FFF_FFFF_FFFF) return -48'sh7FFF_FFFF_FFFF;
    else                                 return acc_t'(s);
  endfunction

  // -ln(u) for u = r / 2^32, Q16.16
  function automatic fx_t neg_ln_u(logic [31:0] r);
    int unsigned nlz;
    logic [31:0] sh;
    fx_t l2;
    nlz = 32;
    for (int b = 0; b < 32; b++) if (r[b]) nlz = 31 - b;
    if (r == 32'd0) return FX_MAX;
    sh = r << (nlz + 1);
    l2 = fx_t'((nlz + 1) << FRAC) - fx_t'({16'd0, sh[31:16]});
    return fx_mul(l2, FX_LN2);
  endfunction

  // ------------------------------------------------- proposal of event idx
  fx_t  off, tp, d1, d2;
  acc_t e_term;
  fx_t ptot, step_i;
  int  msb, half;
  always_comb begin
    logic signed [16:0] u17;
    logic signed [63:0] p;
    // proposal width of event idx: step / sqrt(precision), the square root
    // taken to the nearest power of two below (leading-one position)
    ptot = cav_prec[idx] + obs_prec[idx];
    msb  = 0;
    for (int b = 0; b < 31; b++) if (ptot[b]) msb = b;
    half = (msb - int'(FRAC)) >>> 1;
    if (ptot <= 0)     step_i = step;
    else if (half > 0) step_i = step >>> half;
    else               step_i = step <<< (-half);
    u17 = 17'(signed'({1'b0, rnd[15:0]})) - 17'sd32768;
    p   = 64'(u17) * 64'(step_i);
    off = first ? fx_t'(0) : fx_t'(p >>> 15);
    tp  = fx_t'(theta[idx] + off);
    d1  = tp - cav_mu[idx];
    d2  = tp - obs_val[idx];
    e_term = acc_sat_add(half_mul(fx_mul_wide(d1, d1), cav_prec[idx]),
                         half_mul(fx_mul_wide(d2, d2), obs_prec[idx]));
  end

  // -------------------------------------------------------- accept test
  acc_t e_new, d_e;
  fx_t  inv_s, thr;
  logic accept;
  always_comb begin
    inv_s  = fx_sat(inv_acc);
    e_new  = acc_sat_add(e_acc, half_mul(fx_mul_wide(inv_s, inv_s), kappa));
    d_e    = e_new - e_cur;
    thr    = neg_ln_u(rnd);
    accept = first || (d_e <= acc_t'(thr));
  end

  logic [31:0] n_total;
  assign n_total = 32'(burnin) + (32'd1 << log2n);

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int i = 0; i < int'(D); i++) begin
        cav_mu[i] <= '0; cav_prec[i] <= '0; obs_val[i] <= '0; obs_prec[i] <= '0; coef[i] <= '0;
        theta[i] <= '0; theta_p[i] <= '0; sum1[i] <= '0; sum2[i] <= '0;
      end
      kappa <= '0; step <= FX_HALF; log2n <= 4'd8; burnin <= 16'd64; owner <= '0; warm <= 1'b0;
      e_cur <= '0; e_acc <= '0; inv_acc <= '0; iter <= '0; n_acc <= '0; first <= 1'b0;
      idx <= '0; sidx <= '0; tx_valid <= 1'b0; tx_flit <= '0;
    end else begin
      // register writes from the owning EP
      if (rx_valid && state == S_IDLE) begin
        unique case (rx_flit.addr[7:4])
          4'h0: cav_mu  [rx_flit.addr[IW-1:0]] <= fx_t'(rx_flit.data);
          4'h1: cav_prec[rx_flit.addr[IW-1:0]] <= fx_t'(rx_flit.data);
          4'h2: obs_val [rx_flit.addr[IW-1:0]] <= fx_t'(rx_flit.data);
          4'h3: obs_prec[rx_flit.addr[IW-1:0]] <= fx_t'(rx_flit.data);
          4'h4: coef    [rx_flit.addr[IW-1:0]] <= fx_t'(rx_flit.data);
          4'h8: begin
            unique case (rx_flit.addr)
              SR_KAPPA: kappa <= fx_t'(rx_flit.data);
              SR_STEP:  step  <= fx_t'(rx_flit.data);
              SR_NSAMP: begin log2n <= rx_flit.data[3:0]; burnin <= rx_flit.data[31:16]; end
              SR_START: begin owner <= rx_flit.src; warm <= rx_flit.data[0]; state <= S_INIT; end
              default: ;
            endcase
          end
          default: ;
        endcase
      end

      unique case (state)
        S_IDLE: ;
        S_INIT: begin
          for (int i = 0; i < int'(D); i++) begin
            if (!warm) theta[i] <= cav_mu[i];
            sum1[i] <= '0; sum2[i] <= '0;
          end
          iter <= '0; n_acc <= '0; first <= 1'b1;
          idx <= '0; e_acc <= '0; inv_acc <= '0;
          state <= S_EVAL;
        end
        S_EVAL: begin
          theta_p[idx] <= tp;
          e_acc   <= acc_sat_add(e_acc, e_term);
          inv_acc <= acc_sat_add(inv_acc, fx_mul_wide(coef[idx], tp));
          if (idx == IW'(D - 1)) state <= S_DECIDE;
          else                   idx   <= idx + 1'b1;
        end
        S_DECIDE: begin
          if (accept) begin
            for (int i = 0; i < int'(D); i++) theta[i] <= theta_p[i];
            e_cur <= e_new;
          end
          if (!first) begin
            if (accept) n_acc <= n_acc + 1;
            if (iter >= 32'(burnin)) begin
              for (int i = 0; i < int'(D); i++) begin
                sum1[i] <= sum1[i] + 64'(accept ? theta_p[i] : theta[i]);
                sum2[i] <= sum2[i] + 64'(fx_mul_wide(accept ? theta_p[i] : theta[i],
                                                     accept ? theta_p[i] : theta[i]));
              end
            end
            iter <= iter + 1;
          end
          first   <= 1'b0;
          idx     <= '0;
          e_acc   <= '0;
          inv_acc <= '0;
          if (!first && iter + 1 == n_total) begin
            state <= S_SEND;
            sidx  <= '0;
          end else begin
            state <= S_EVAL;
          end
        end
        S_SEND: begin
          if (!tx_valid || tx_ready) begin
            tx_valid    <= 1'b1;
            tx_flit.dst <= owner;
            tx_flit.src <= PORT_W'(PORT_ID);
            if (sidx < ($bits(sidx))'(D)) begin
              tx_flit.addr <= ER_MEAN + 8'(sidx);
              tx_flit.data <= 32'(fx_sat(acc_t'(sum1[sidx[IW-1:0]] >>> log2n)));
            end else if (sidx < ($bits(sidx))'(2 * D)) begin
              tx_flit.addr <= ER_M2 + 8'(sidx - ($bits(sidx))'(D));
              tx_flit.data <= 32'(fx_sat(acc_t'(sum2[IW'(sidx - ($bits(sidx))'(D))] >>> log2n)));
            end else begin
              tx_flit.addr <= ER_DONE;
              tx_flit.data <= n_acc;
              state        <= S_IDLE;
            end
            sidx <= sidx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase

      if (tx_valid && tx_ready && !(state == S_SEND)) tx_valid <= 1'b0;
    end
  end
endmodule
