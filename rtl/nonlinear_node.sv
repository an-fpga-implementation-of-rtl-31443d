// nonlinear_node: the single physical neuron, computing x = f(s) with a
// stochastic Bernstein polynomial of order n (ORDER).
//
// Following the block diagram: the incoming stream s is delayed by a chain
// of ORDER-1 flip-flops, giving ORDER copies (delays 0..ORDER-1 clocks) that
// stand in for statistically independent copies of s. An adder counts the
// ones among the copies, v in 0..ORDER, so Pr(v = k) = C(n,k) s^k (1-s)^(n-k),
// and v selects one of the ORDER+1 coefficient streams beta_0..beta_n, each
// produced by a B2S converter from a coefficient register. The output
// stream then has probability sum_k beta_k * b_{k,n}(s), the Bernstein
// polynomial. The coefficients are loaded from outside (tdr_param_regs).
//
// Timing: the delay chain shifts on every clock with `step` high. The B2S
// converters step with `step` and are re-seeded with `reseed`. `x_bit` is
// combinational from the current s bit, the delay chain and the converters.
module nonlinear_node #(
  parameter int unsigned Q     = tdr_pkg::Q_DEF,
  parameter int unsigned ORDER = tdr_pkg::ORDER_DEF,
  parameter int unsigned NW    = 6
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       step,
  input  logic                       reseed,
  input  logic [NW-1:0]              seed_node,
  input  logic signed [ORDER:0][Q-1:0] coef,   // beta_k, bipolar codes
  input  logic                       s_bit,
  output logic                       x_bit,
  output logic [$clog2(ORDER+1)-1:0] sel       // v, the adder output
);
  import tdr_pkg::*;

  localparam int unsigned VW = $clog2(ORDER + 1);

  initial assert (ORDER >= 2) else $error("nonlinear_node: ORDER must be >= 2");

  logic [ORDER-1:0] copies;       // copies[k] = s delayed by k clocks
  logic [ORDER-2:0] dly;
  logic [ORDER:0]   beta_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    dly <= '0;
    else if (step) dly <= (ORDER-1)'({dly, s_bit});
  end

  assign copies = {dly, s_bit};

  // Population count of the copies: the adder on the MUX select line.
  always_comb begin
    sel = '0;
    for (int k = 0; k < ORDER; k++) sel = sel + VW'(copies[k]);
  end

  for (genvar k = 0; k <= ORDER; k++) begin : g_coef
    b2s #(.Q(Q)) u_b2s_coef (
      .clk, .rst_n, .load(reseed), .step,
      .seed(Q'(node_seed(int'(seed_node), int'(SRC_COEF0) + k, Q))),
      .value(coef[k]), .bit_o(beta_bit[k]));
  end

  assign x_bit = beta_bit[sel];

endmodule
