// tdr_top: stochastic-logic time delay reservoir (TDR).
//
// One physical neuron is shared in time by N virtual nodes. Each input
// sample u is held for N nodes; node i computes, as stochastic bit streams
// of 2^len_log2 <= L bits,
//     s_i = (alpha * w_i * u + (1 - alpha) * x_(i-N-1) + theta) / 2
//     x_i = f(s_i),  f a Bernstein polynomial of order ORDER,
// and the binary result x_i enters an N-word delay line whose oldest word
// feeds node i+1. L is the longest stream the build supports; the stream
// length actually used is chosen per sample at run time. The blocks follow the paper's structure: input weighting
// (input_weighting), non-linear node (nonlinear_node), reservoir state
// (reservoir_state), a sequencer (tdr_control) and the parameter registers
// (tdr_param_regs). The analogue-to-digital converter is outside: `in_sample`
// is its Q-bit two's complement output. The trained linear readout is also
// outside: the state words leave on `node_x` and `state_x`.
//
// Interface:
//   len_log2                     stream length 2^len_log2 (at most L), taken
//                                with each accepted sample
//   in_valid/in_ready/in_sample  one input sample per handshake
//   reseed_en                    1: re-seed all LFSRs at every node (default
//                                use); 0: seed once after reset
//   cfg_we/cfg_sel/cfg_idx/cfg_data  parameter register write port
//   node_valid/node_idx/node_x   each state word, one clock after its node
//   state_valid/state_x          the full state after node N-1 of a sample
//   stall                        sequencer idle, waiting for a sample
//   s2b_saturated                node_x was clipped (its stream was all ones)
// Timing, with S = 2^len_log2 the stream length: node i's word appears on
// node_x (i+1)*S + 1 clocks after its sample is accepted; a new sample can
// be accepted every N*S clocks.
module tdr_top #(
  parameter int unsigned Q     = tdr_pkg::Q_DEF,
  parameter int unsigned N     = tdr_pkg::N_DEF,
  parameter int unsigned L     = tdr_pkg::L_DEF,
  parameter int unsigned ORDER = tdr_pkg::ORDER_DEF,
  parameter int unsigned NW    = $clog2(N),
  parameter int unsigned IW    = 8,
  parameter int unsigned LW    = $clog2($clog2(L) + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [LW-1:0]               len_log2,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic signed [Q-1:0]         in_sample,
  input  logic                        reseed_en,
  input  logic                        cfg_we,
  input  tdr_pkg::cfg_sel_e           cfg_sel,
  input  logic [IW-1:0]               cfg_idx,
  input  logic [Q-1:0]                cfg_data,
  output logic                        node_valid,
  output logic [NW-1:0]               node_idx,
  output logic signed [Q-1:0]         node_x,
  output logic                        state_valid,
  output logic signed [N-1:0][Q-1:0]  state_x,
  output logic                        stall,
  output logic                        s2b_saturated
);

  logic                         sample_load, step, push, last_node, reseed;
  logic [NW-1:0]                node, seed_node;
  logic [LW-1:0]                len_q;
  logic signed [Q-1:0]          weight, bias;
  logic        [Q-1:0]          alpha;
  logic signed [ORDER:0][Q-1:0] coef;
  logic                         s_bit, x_bit, x_fb_bit;
  logic [$clog2(ORDER+1)-1:0]   nl_sel;

  tdr_control #(.N(N), .L(L), .NW(NW), .LW(LW)) u_ctrl (
    .clk, .rst_n, .len_log2, .len_q, .in_valid, .in_ready, .reseed_en, .sample_load, .step,
    .push, .last_node, .node, .reseed, .seed_node, .stall);

  tdr_param_regs #(.Q(Q), .N(N), .ORDER(ORDER), .NW(NW), .IW(IW)) u_regs (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_idx, .cfg_data,
    .rd_node(node), .weight, .bias, .alpha, .coef);

  input_weighting #(.Q(Q), .NW(NW)) u_in (
    .clk, .rst_n, .step, .reseed, .seed_node, .sample_load,
    .sample(in_sample), .weight, .bias, .alpha, .x_bit(x_fb_bit),
    .s_bit);

  nonlinear_node #(.Q(Q), .ORDER(ORDER), .NW(NW)) u_nl (
    .clk, .rst_n, .step, .reseed, .seed_node, .coef, .s_bit,
    .x_bit, .sel(nl_sel));

  reservoir_state #(.Q(Q), .N(N), .L(L), .NW(NW), .LW(LW)) u_res (
    .clk, .rst_n, .len_log2(len_q), .step, .push, .last_node, .reseed, .seed_node,
    .x_in_bit(x_bit), .x_out_bit(x_fb_bit), .node_x, .node_valid,
    .state_x, .state_valid, .node_sat(s2b_saturated));

  // Index of the word on node_x (registered alongside it).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    node_idx <= '0;
    else if (push) node_idx <= node;
  end

endmodule
