// mem_xbar: crossbar between the host data port, the EP engines and the
// N_CH DRAM channels, keeping one replica of the input data per channel.
//
// Host writes are replicated: one write goes to every channel in the same
// cycle, and it is accepted only when all channels are ready. EP engine i
// reads only from channel i, so the engines read their inputs concurrently
// without ever contending with each other. Host reads go to channel 0 and
// share it with EP 0; the host has priority there. Channel 0 remembers, in
// issue order, who issued each read (a small FIFO) so its in-order
// responses return to the right requester. All request ports are
// valid/ready, responses are single-word and in order.
//
// From the paper: an interconnect between the host DMA engine, the EPs and
// the four DRAM channels, with the inputs replicated across the channels so
// EP reads proceed in parallel. The simple request bus (standing in for
// AXI) and the host priority are this design's choices.
// A lint tool may report rst_n as used both synchronously and
// asynchronously: the only synchronous use is the disable condition of the
// response-order assertion, the flops themselves reset asynchronously.
module mem_xbar
  import bp_pkg::*;
#(
  parameter int unsigned N_CH = K_EP,
  parameter int unsigned TAGS = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t host_req,
  output logic     host_ready,
  output mem_rsp_t host_rsp,
  input  mem_req_t ep_req   [N_CH],
  output logic     ep_ready [N_CH],
  output mem_rsp_t ep_rsp   [N_CH],
  output mem_req_t ch_req   [N_CH],
  input  logic     ch_ready [N_CH],
  input  mem_rsp_t ch_rsp   [N_CH]
);
  localparam int unsigned TW = $clog2(TAGS);

  // issue-order record for channel 0: 1 = host read, 0 = EP 0 read
  logic          tag_q [TAGS];
  logic [TW:0]   tag_wp, tag_rp;
  logic          tag_full, tag_head;
  assign tag_full = (tag_wp[TW] != tag_rp[TW]) && (tag_wp[TW-1:0] == tag_rp[TW-1:0]);
  assign tag_head = tag_q[tag_rp[TW-1:0]];

  logic all_ready, host_wr, host_rd, host_rd_go, ep0_go;
  always_comb begin
    all_ready = 1'b1;
    for (int c = 0; c < int'(N_CH); c++) all_ready &= ch_ready[c];
    host_wr    = host_req.valid && host_req.we;
    host_rd    = host_req.valid && !host_req.we;
    host_rd_go = host_rd && ch_ready[0] && !tag_full;
    ep0_go     = !host_req.valid && ep_req[0].valid && ch_ready[0] && !tag_full;
    host_ready = host_wr ? all_ready : (host_rd && ch_ready[0] && !tag_full);

    for (int c = 0; c < int'(N_CH); c++) begin
      if (host_wr) begin
        ch_req[c]   = host_req;
        ch_req[c].valid = all_ready;    // all replicas written together
        ep_ready[c] = 1'b0;
      end else if (c == 0) begin
        ch_req[c]       = host_rd ? host_req : ep_req[0];
        ch_req[c].valid = host_rd_go || ep0_go;
        ep_ready[c]     = ep0_go;
      end else begin
        ch_req[c]   = ep_req[c];
        ep_ready[c] = ch_ready[c];
      end
    end

    host_rsp.rvalid = ch_rsp[0].rvalid && tag_head;
    host_rsp.rdata  = ch_rsp[0].rdata;
    ep_rsp[0].rvalid = ch_rsp[0].rvalid && !tag_head;
    ep_rsp[0].rdata  = ch_rsp[0].rdata;
    for (int c = 1; c < int'(N_CH); c++) ep_rsp[c] = ch_rsp[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_wp <= '0; tag_rp <= '0;
      for (int t = 0; t < int'(TAGS); t++) tag_q[t] <= 1'b0;
    end else begin
      if (host_rd_go || ep0_go) begin
        tag_q[tag_wp[TW-1:0]] <= host_rd_go;
        tag_wp <= tag_wp + 1'b1;
      end
      if (ch_rsp[0].rvalid) tag_rp <= tag_rp + 1'b1;
    end
  end

  // a response on channel 0 must have a recorded requester
  a_tag_order: assert property (@(posedge clk) disable iff (!rst_n)
                                ch_rsp[0].rvalid |-> (tag_wp != tag_rp));
endmodule
