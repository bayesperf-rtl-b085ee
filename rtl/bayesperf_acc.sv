// bayesperf_acc: top level of the BayesPerf inference accelerator.
//
// The accelerator computes, for D hardware-event values observed over K
// time slices of counter multiplexing, a Gaussian posterior per event by
// expectation propagation (EP): each time slice is one EP site, handled by
// its own EP engine; each engine drives N_SAMPLERS/K MCMC samplers that
// estimate the moments of its tilted distribution; the controller combines
// the engines' updates into the global approximation g(theta).
//
//   host MMIO ----> ep_controller --job/result--> ep_engine x K
//   host data ----> mem_xbar ------ 4 DRAM channels (inputs replicated)
//   ep_engine i <-- channel i (read)
//   ep_engine x K and mcmc_sampler x N_SAMPLERS on noc_butterfly
//                   (ports 0..K-1 engines, K..K+N_SAMPLERS-1 samplers)
//
// A run: the host writes each slice's record (observed values, observation
// precisions, invariant coefficients) into DRAM through the host data port,
// sets the controller's registers (SITE_BASE, sample counts, ...), writes
// CTRL=1 and waits for `irq`; the posterior precision and shift of every
// event are then read from the controller's G_R/G_S registers.
// The network's arbitration-loss counter, the engines' clamp counters and
// the number of running samplers are summed here and shown as read-only
// controller registers (0x0D-0x0F).
//
// The PCIe endpoint, the DMA/CAPI engine and the DRAM devices are outside
// this module: the host side is reached through the MMIO and host data
// ports and the memories through the ch_* ports. Sizes follow the paper
// (4 EPs, 12 samplers, 16-port butterfly); D is this design's choice.
module bayesperf_acc
  import bp_pkg::*;
#(
  parameter int unsigned K  = K_EP,
  parameter int unsigned NS = N_SAMPLERS,
  parameter int unsigned D  = D_EVENTS
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register access
  input  logic        mmio_valid,
  input  logic        mmio_we,
  input  logic [7:0]  mmio_addr,
  input  logic [31:0] mmio_wdata,
  output logic [31:0] mmio_rdata,
  output logic        irq,
  // host data port (DMA side)
  input  mem_req_t    host_req,
  output logic        host_ready,
  output mem_rsp_t    host_rsp,
  // DRAM channels
  output mem_req_t    ch_req   [K],
  input  logic        ch_ready [K],
  input  mem_rsp_t    ch_rsp   [K]
);
  localparam int unsigned NP  = K + NS;
  localparam int unsigned SPE = NS / K;

  // controller <-> engines
  ep_cfg_t           cfg;
  logic [ADDR_W-1:0] site_base [K];
  logic              job_valid [K], job_ready [K], job_cold [K];
  fx_t               job_r [D], job_s [D];
  logic              res_valid [K], res_ready [K], res_small [K];
  fx_t               res_dr [K][D], res_ds [K][D];
  logic [15:0]       n_clamp [K];

  // engines <-> memory
  mem_req_t ep_req [K];
  logic     ep_ready [K];
  mem_rsp_t ep_rsp [K];

  // network ports
  flit_t in_flit [NP], out_flit [NP];
  logic  in_valid [NP], in_ready [NP], out_valid [NP], out_ready [NP];
  logic [31:0] noc_conflicts;
  logic  samp_busy [NS];
  logic [31:0] stat_clamps, stat_samp_busy;

  ep_controller #(.K(K), .D(D)) u_ctrl (
    .clk, .rst_n,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rdata, .irq,
    .cfg, .site_base,
    .job_valid, .job_ready, .job_cold, .job_r, .job_s,
    .res_valid, .res_ready, .res_dr, .res_ds, .res_small,
    .stat_conflicts(noc_conflicts), .stat_clamps, .stat_samp_busy
  );

  // statistics registers: total clamps and number of running samplers
  always_comb begin
    stat_clamps = '0;
    for (int e = 0; e < int'(K); e++) stat_clamps += 32'(n_clamp[e]);
    stat_samp_busy = '0;
    for (int j = 0; j < int'(NS); j++) stat_samp_busy += 32'(samp_busy[j]);
  end

  for (genvar e = 0; e < K; e++) begin : g_ep
    ep_engine #(.D(D), .PORT_ID(e), .SAMP_BASE(K + e * SPE), .N_SAMP(SPE)) u_ep (
      .clk, .rst_n, .cfg, .site_base(site_base[e]),
      .job_valid(job_valid[e]), .job_ready(job_ready[e]), .job_cold(job_cold[e]),
      .job_r, .job_s,
      .res_valid(res_valid[e]), .res_ready(res_ready[e]),
      .res_dr(res_dr[e]), .res_ds(res_ds[e]), .res_small(res_small[e]),
      .mem_req(ep_req[e]), .mem_ready(ep_ready[e]), .mem_rsp(ep_rsp[e]),
      .tx_flit(in_flit[e]), .tx_valid(in_valid[e]), .tx_ready(in_ready[e]),
      .rx_flit(out_flit[e]), .rx_valid(out_valid[e]), .rx_ready(out_ready[e]),
      .n_clamp(n_clamp[e])
    );
  end

  for (genvar j = 0; j < NS; j++) begin : g_samp
    mcmc_sampler #(.D(D), .PORT_ID(K + j)) u_samp (
      .clk, .rst_n,
      .rx_flit(out_flit[K + j]), .rx_valid(out_valid[K + j]), .rx_ready(out_ready[K + j]),
      .tx_flit(in_flit[K + j]), .tx_valid(in_valid[K + j]), .tx_ready(in_ready[K + j]),
      .busy(samp_busy[j])
    );
  end

  noc_butterfly #(.NP(NP)) u_noc (
    .clk, .rst_n,
    .in_flit, .in_valid, .in_ready,
    .out_flit, .out_valid, .out_ready,
    .conflicts(noc_conflicts)
  );

  mem_xbar #(.N_CH(K)) u_xbar (
    .clk, .rst_n,
    .host_req, .host_ready, .host_rsp,
    .ep_req, .ep_ready, .ep_rsp,
    .ch_req, .ch_ready, .ch_rsp
  );
endmodule
