// lfsr: Q-bit maximal-length Fibonacci linear feedback shift register, the
// pseudo-random source of every binary-to-stochastic converter.
//
// Each clock with `step` high the register shifts left by one and the XOR of
// its tap bits enters at bit 0. `load` (priority over `step`) writes `seed`,
// which is how a converter is re-seeded at the start of each virtual node.
// Reset loads the value 1. The register never holds zero, so its value,
// read as a signed number, covers [-2^(Q-1), 2^(Q-1)-1] except 0.
// The paper gives only that the LFSR has as many bits as the binary input
// (16 registers each); the polynomials are this design's choice (tdr_pkg).
module lfsr #(
  parameter int unsigned Q = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [Q-1:0] seed,
  input  logic         step,
  output logic [Q-1:0] state
);
  import tdr_pkg::*;

  localparam logic [Q-1:0] TAPS = Q'(lfsr_taps(Q));

  initial assert (Q inside {8, 10, 12, 16, 20, 24, 32})
    else $error("lfsr: no tap table entry for Q=%0d", Q);

  logic fb;
  assign fb = ^(state & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= Q'(1);
    else if (load)  state <= seed;
    else if (step)  state <= {state[Q-2:0], fb};
  end

endmodule
