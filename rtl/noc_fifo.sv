// noc_fifo: small synchronous FIFO for flits (valid/ready on both sides).
//
// DEPTH entries (a power of two) held in a register array with read and
// write pointers one bit wider than the index, so full and empty are told
// apart. A flit written in one cycle can be read in the next; a simultaneous
// read and write in a full FIFO is allowed. Used as the ejection buffer of
// every network port, as drawn in front of the samplers in the paper's
// accelerator figure; the depth is this design's choice.
module noc_fifo
  import bp_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in_flit,
  input  logic  in_valid,
  output logic  in_ready,
  output flit_t out_flit,
  output logic  out_valid,
  input  logic  out_ready
);
  localparam int unsigned AW = $clog2(DEPTH);
  flit_t         mem [DEPTH];
  logic [AW:0]   wp, rp;
  logic          full, empty;

  assign empty     = (wp == rp);
  assign full      = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign in_ready  = !full || out_ready;
  assign out_valid = !empty;
  assign out_flit  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_flit;
  end
endmodule
