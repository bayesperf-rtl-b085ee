// noc_butterfly: N_PORTS-port butterfly network-on-chip linking the EP
// engines and the MCMC samplers.
//
// log2(N_PORTS) stages of N_PORTS/2 2x2 switches (noc_switch). Stage s
// works on address bit b = log2(N_PORTS)-1-s: a switch pairs the two
// channels that differ only in bit b and sends a flit to the channel whose
// bit b equals the flit's destination bit b, so after the last stage the
// channel number equals the destination port. Every flit is a whole
// packet (one register write), so there is no wormhole state and the network
// cannot deadlock as long as the ports keep draining their ejection FIFOs.
// Latency with no contention: one cycle per stage plus one through the
// ejection FIFO. All links use valid/ready.
//
// From the paper: butterfly topology, 16 ports (4 EPs + 12 samplers) and
// FIFOs on the ports. Switch design, flit format and FIFO depth are this
// design's own choices. `conflicts` counts arbitration losses (for tests and
// performance monitoring).
module noc_butterfly
  import bp_pkg::*;
#(
  parameter int unsigned NP         = N_PORTS,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  flit_t       in_flit  [NP],
  input  logic        in_valid [NP],
  output logic        in_ready [NP],
  output flit_t       out_flit [NP],
  output logic        out_valid[NP],
  input  logic        out_ready[NP],
  output logic [31:0] conflicts
);
  localparam int unsigned NS = $clog2(NP);

  // one set of link signals per stage boundary (level 0 = injection,
  // level NS = ejection)
  for (genvar l = 0; l <= NS; l++) begin : g_lvl
    flit_t f [NP];
    logic  v [NP];
    logic  r [NP];
  end
  logic  sw_conflict [NS][NP/2];

  for (genvar p = 0; p < NP; p++) begin : g_inj
    assign g_lvl[0].f[p] = in_flit[p];
    assign g_lvl[0].v[p] = in_valid[p];
    assign in_ready[p] = g_lvl[0].r[p];
  end

  for (genvar s = 0; s < NS; s++) begin : g_stage
    localparam int unsigned B = NS - 1 - s;
    for (genvar j = 0; j < NP/2; j++) begin : g_sw
      localparam int unsigned C0 = ((j >> B) << (B + 1)) | (j & ((1 << B) - 1));
      localparam int unsigned C1 = C0 | (1 << B);
      flit_t sf_in [2];
      logic  sv_in [2], sr_in [2], sv_out[2], sr_out[2];
      flit_t sf_out[2];
      assign sf_in[0] = g_lvl[s].f[C0];
      assign sf_in[1] = g_lvl[s].f[C1];
      assign sv_in[0] = g_lvl[s].v[C0];
      assign sv_in[1] = g_lvl[s].v[C1];
      assign g_lvl[s].r[C0] = sr_in[0];
      assign g_lvl[s].r[C1] = sr_in[1];
      assign g_lvl[s+1].f[C0] = sf_out[0];
      assign g_lvl[s+1].f[C1] = sf_out[1];
      assign g_lvl[s+1].v[C0] = sv_out[0];
      assign g_lvl[s+1].v[C1] = sv_out[1];
      assign sr_out[0] = g_lvl[s+1].r[C0];
      assign sr_out[1] = g_lvl[s+1].r[C1];
      noc_switch #(.BIT(B)) u_sw (
        .clk, .rst_n,
        .in_flit(sf_in), .in_valid(sv_in), .in_ready(sr_in),
        .out_flit(sf_out), .out_valid(sv_out), .out_ready(sr_out),
        .conflict(sw_conflict[s][j])
      );
    end
  end

  for (genvar p = 0; p < NP; p++) begin : g_ej
    noc_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_flit(g_lvl[NS].f[p]), .in_valid(g_lvl[NS].v[p]), .in_ready(g_lvl[NS].r[p]),
      .out_flit(out_flit[p]), .out_valid(out_valid[p]), .out_ready(out_ready[p])
    );
  end

  // count arbitration losses over the whole network
  logic [31:0] n_conf;
  always_comb begin
    n_conf = '0;
    for (int s = 0; s < int'(NS); s++)
      for (int j = 0; j < int'(NP/2); j++)
        n_conf += 32'(sw_conflict[s][j]);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) conflicts <= '0;
    else        conflicts <= conflicts + n_conf;
  end
endmodule
