// noc_switch: 2x2 switch of the butterfly network.
//
// Each input flit goes to output dst[BIT] (destination-tag routing). Each
// output has one register stage; it takes a new flit when it is empty or
// being drained this cycle. When both inputs want the same output, a
// round-robin pointer per output decides, and the loser is held back
// (its in_ready stays low) until a later cycle. `conflict` pulses when an
// arbitration leaves an input waiting. The router micro-architecture is this
// design's own; the paper's network was generated by a tool it does not
// describe.
module noc_switch
  import bp_pkg::*;
#(
  parameter int unsigned BIT = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in_flit  [2],
  input  logic  in_valid [2],
  output logic  in_ready [2],
  output flit_t out_flit [2],
  output logic  out_valid[2],
  input  logic  out_ready[2],
  output logic  conflict
);
  logic       want  [2][2];   // [input][output]
  logic       grant [2][2];
  logic       can_take[2];
  logic       rr[2];          // per output: preferred input

  always_comb begin
    for (int i = 0; i < 2; i++)
      for (int o = 0; o < 2; o++)
        want[i][o] = in_valid[i] && (in_flit[i].dst[BIT] == 1'(o));
    conflict = 1'b0;
    for (int o = 0; o < 2; o++) begin
      can_take[o] = !out_valid[o] || out_ready[o];
      grant[0][o] = 1'b0;
      grant[1][o] = 1'b0;
      if (can_take[o]) begin
        if (want[0][o] && want[1][o]) begin
          grant[rr[o]][o] = 1'b1;
          conflict        = 1'b1;
        end else begin
          grant[0][o] = want[0][o];
          grant[1][o] = want[1][o];
        end
      end
    end
    for (int i = 0; i < 2; i++) in_ready[i] = grant[i][0] || grant[i][1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 2; o++) begin
        out_valid[o] <= 1'b0;
        out_flit[o]  <= '0;
        rr[o]        <= 1'b0;
      end
    end else begin
      for (int o = 0; o < 2; o++) begin
        if (can_take[o]) begin
          out_valid[o] <= grant[0][o] || grant[1][o];
          if (grant[0][o])      out_flit[o] <= in_flit[0];
          else if (grant[1][o]) out_flit[o] <= in_flit[1];
          if (grant[0][o] && want[1][o]) rr[o] <= 1'b1;
          if (grant[1][o] && want[0][o]) rr[o] <= 1'b0;
        end
      end
    end
  end
endmodule
