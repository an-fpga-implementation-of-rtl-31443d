// b2s: binary-to-stochastic converter (B2S in the block diagram).
//
// Each clock it emits one bit of the bipolar stochastic stream of `value`,
// a Q-bit two's complement fraction: the bit is 1 when the LFSR word, read
// as a signed number, is less than or equal to `value`, so the probability
// of a 1 is about (value/2^(Q-1) + 1)/2. This comparison rule and the LFSR
// being as wide as the binary word are from the paper.
//
// Timing: `bit_o` is combinational from the current LFSR state and `value`.
// The LFSR advances on every clock with `step` high; `load` writes `seed`
// (re-seeding), so the first bit after a load is the seed compared with
// `value`.
module b2s #(
  parameter int unsigned Q = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [Q-1:0]        seed,
  input  logic                step,
  input  logic signed [Q-1:0] value,
  output logic                bit_o
);

  logic [Q-1:0] rnd;

  lfsr #(.Q(Q)) u_lfsr (
    .clk, .rst_n, .load, .seed, .step, .state(rnd)
  );

  assign bit_o = ($signed(rnd) <= value);

endmodule
