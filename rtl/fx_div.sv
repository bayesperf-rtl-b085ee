// fx_div: sequential signed Q16.16 divider, q = a / b.
//
// Restoring division on magnitudes: the dividend |a| << 16 (48 bits) is
// divided by |b| one quotient bit per clock, so a division takes 48 iterations
// and `done` pulses (with q valid) 49 clocks after the `start` cycle; `busy` is high in
// between. The sign is applied at the end and the result is saturated to the
// Q16.16 range. Division by zero returns the largest value of the sign of a.
// Used by the EP engine for cavity means (s/r) and precisions (1/var).
module fx_div
  import bp_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  a,
  input  fx_t  b,
  output logic busy,
  output logic done,
  output fx_t  q
);
  localparam int unsigned NB = 48;
  logic [NB-1:0] dividend, quo;
  logic [32:0]   rem;
  logic [31:0]   divisor;
  logic          neg;
  logic [5:0]    cnt;
  logic [32:0]   trial;

  assign trial = {rem[31:0], dividend[NB-1]} - {1'b0, divisor};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0;
      dividend <= '0; quo <= '0; rem <= '0; divisor <= '0; neg <= 1'b0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        dividend <= {16'd0, fx_abs(a)} << FRAC;
        divisor  <= fx_abs(b);
        neg      <= a[31] ^ b[31];
        rem      <= '0;
        quo      <= '0;
        cnt      <= 6'(NB);
        busy     <= 1'b1;
        if (b == 0) begin
          busy <= 1'b0; done <= 1'b1;
          q    <= a[31] ? -FX_MAX : FX_MAX;
        end
      end else if (busy) begin
        dividend <= dividend << 1;
        if (!trial[32]) begin
          rem <= trial;
          quo <= {quo[NB-2:0], 1'b1};
        end else begin
          rem <= {rem[31:0], dividend[NB-1]};
          quo <= {quo[NB-2:0], 1'b0};
        end
        cnt <= cnt - 6'd1;
        if (cnt == 6'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
          // final quotient bit is being shifted in this cycle
          if ({quo[NB-2:0], ~trial[32]} > 48'(FX_MAX))
            q <= neg ? -FX_MAX : FX_MAX;
          else
            q <= neg ? -fx_t'({quo[30:0], ~trial[32]}) : fx_t'({quo[30:0], ~trial[32]});
        end
      end
    end
  end
endmodule
