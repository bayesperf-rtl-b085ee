// dram_model: behavioural stand-in for one DRAM channel and its controller,
// for simulation only. A word array of WORDS entries (addresses wrap);
// requests are accepted when `ready` is high (low for a random cycle in
// STALL_PCT percent of cycles), and each read returns its word LAT clocks
// later, in order.
module dram_model
  import bp_pkg::*;
#(
  parameter int unsigned WORDS     = 4096,
  parameter int unsigned LAT       = 8,
  parameter int unsigned STALL_PCT = 10
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp
);
  logic [31:0] mem [WORDS];
  logic        pv [LAT];
  logic [31:0] pd [LAT];

  initial for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;

  always @(negedge clk) ready = ($urandom % 100) >= STALL_PCT;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LAT); i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      pv[0] <= req.valid && ready && !req.we;
      pd[0] <= mem[req.addr % WORDS];
      for (int i = 1; i < int'(LAT); i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      if (req.valid && ready && req.we) mem[req.addr % WORDS] <= req.wdata;
    end
  end
  assign rsp.rvalid = pv[LAT-1];
  assign rsp.rdata  = pd[LAT-1];
endmodule
