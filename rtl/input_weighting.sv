// input_weighting: the input stage of the reservoir, producing the stream
// s_i = (alpha*w_i*u + (1-alpha)*x_d + theta) / 2 for virtual node i.
//
// Following the block diagram: the held input sample u, the mask weight w_i
// and the bias theta each go through a B2S converter; an XNOR gate
// multiplies the u and w_i streams (bipolar product); a first MUX, whose
// select stream is 1 with probability alpha, picks w_i*u or the delayed
// state stream x_d; a second MUX, whose select stream is 1 with probability
// 0.5, picks that result or theta. Which MUX input a select value of 1
// picks, and that both select streams come from their own LFSR comparators,
// are this design's choices: the diagram prints only "alpha" and "0.5" on
// the select lines.
//
// The sample-and-hold of the digitised input is the register `u_hold`,
// written when `sample_load` is high; it holds u for all N nodes of a
// sample. `alpha` is an unsigned fraction (alpha * 2^Q); flipping its top bit
// gives the bipolar code whose stream has a '1' probability of alpha.
//
// Timing: all B2S converters step on every clock with `step` high and are
// re-seeded with node `seed_node`'s seeds when `reseed` is high. `s_bit` is
// combinational from the converter states and `x_bit`.
module input_weighting #(
  parameter int unsigned Q  = tdr_pkg::Q_DEF,
  parameter int unsigned NW = 6                 // node index width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                step,
  input  logic                reseed,
  input  logic [NW-1:0]       seed_node,
  input  logic                sample_load,
  input  logic signed [Q-1:0] sample,     // digitised input u
  input  logic signed [Q-1:0] weight,     // w_i of the current node
  input  logic signed [Q-1:0] bias,       // theta
  input  logic        [Q-1:0] alpha,      // alpha * 2^Q
  input  logic                x_bit,      // delayed reservoir state stream
  output logic                s_bit
);
  import tdr_pkg::*;

  logic signed [Q-1:0] u_hold;
  logic u_bit, w_bit, th_bit, a_bit, h_bit;
  logic wu_bit, mix_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           u_hold <= '0;
    else if (sample_load) u_hold <= sample;
  end

  b2s #(.Q(Q)) u_b2s_u (
    .clk, .rst_n, .load(reseed), .step,
    .seed(Q'(node_seed(int'(seed_node), SRC_U, Q))),
    .value(u_hold), .bit_o(u_bit));

  b2s #(.Q(Q)) u_b2s_w (
    .clk, .rst_n, .load(reseed), .step,
    .seed(Q'(node_seed(int'(seed_node), SRC_W, Q))),
    .value(weight), .bit_o(w_bit));

  b2s #(.Q(Q)) u_b2s_bias (
    .clk, .rst_n, .load(reseed), .step,
    .seed(Q'(node_seed(int'(seed_node), SRC_BIAS, Q))),
    .value(bias), .bit_o(th_bit));

  b2s #(.Q(Q)) u_b2s_alpha (
    .clk, .rst_n, .load(reseed), .step,
    .seed(Q'(node_seed(int'(seed_node), SRC_ALPHA, Q))),
    .value({~alpha[Q-1], alpha[Q-2:0]}), .bit_o(a_bit));

  b2s #(.Q(Q)) u_b2s_half (
    .clk, .rst_n, .load(reseed), .step,
    .seed(Q'(node_seed(int'(seed_node), SRC_HALF, Q))),
    .value('0), .bit_o(h_bit));

  always_comb begin
    wu_bit  = ~(u_bit ^ w_bit);          // XNOR: bipolar multiplication
    mix_bit = a_bit ? wu_bit : x_bit;    // alpha*w*u + (1-alpha)*x
    s_bit   = h_bit ? mix_bit : th_bit;  // (... + theta) / 2
  end

endmodule
