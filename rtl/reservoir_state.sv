// reservoir_state: the delay line holding the reservoir state, with its
// S2B converter on the way in and its B2S converter on the way out.
//
// Following the block diagram: the output stream of the non-linear node is
// counted by an S2B converter over the 2^len_log2 (at most L) clocks of a
// virtual node; the
// resulting binary word x_i is pushed into a shift register of N words
// (Q*N bits), which is the delay line of the time delay reservoir. The
// oldest word is turned back into a stream by a B2S converter and fed to
// the input stage.
//
// Delay: on the clock that ends node i (`push`), the oldest word is copied
// into the hold register `x_old` before the shift, and x_i enters the shift
// register. The oldest word at that moment is the state of node i-N, so the
// node that starts next, i+1, is fed x_(i+1-(N+1)): a loop delay of N+1
// nodes, the paper's tau = N + 1, which makes the reservoir a ring.
// Keeping the old word in its own register (so the loop is N+1 words long,
// N of them in the shift register) is this design's choice.
//
// Outputs: `node_x`/`node_valid` give each new state word one clock after
// its node ends, with `node_sat` set when the word was clipped;
// `state_x`/`state_valid` give the whole state vector after
// the last node (index N-1) of an input sample, with state_x[0] the newest
// word x_(N-1) and state_x[N-1] the oldest x_0. Shift register and hold
// register reset to zero.
module reservoir_state #(
  parameter int unsigned Q  = tdr_pkg::Q_DEF,
  parameter int unsigned N  = tdr_pkg::N_DEF,
  parameter int unsigned L  = tdr_pkg::L_DEF,
  parameter int unsigned NW = $clog2(N),
  parameter int unsigned LW = $clog2($clog2(L) + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [LW-1:0]             len_log2,   // stream length of this node
  input  logic                      step,       // a stream bit is valid
  input  logic                      push,       // last bit of a node
  input  logic                      last_node,  // the node ending is N-1
  input  logic                      reseed,
  input  logic [NW-1:0]             seed_node,
  input  logic                      x_in_bit,   // from the non-linear node
  output logic                      x_out_bit,  // delayed state stream
  output logic signed [Q-1:0]       node_x,
  output logic                      node_valid,
  output logic signed [N-1:0][Q-1:0] state_x,
  output logic                      state_valid,
  output logic                      node_sat    // node_x was clipped (c = +L)
);
  import tdr_pkg::*;

  logic signed [Q-1:0]        x_new;
  logic signed [N-1:0][Q-1:0] sr;
  logic signed [Q-1:0]        x_old;
  logic                       sat;

  s2b #(.Q(Q), .L(L), .LW(LW)) u_s2b (
    .clk, .rst_n, .en(step), .last(push), .bit_i(x_in_bit), .len_log2,
    .result(x_new), .saturated(sat));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr          <= '0;
      x_old       <= '0;
      node_x      <= '0;
      node_valid  <= 1'b0;
      node_sat    <= 1'b0;
      state_valid <= 1'b0;
    end else begin
      node_valid  <= push;
      node_sat    <= push && sat;
      state_valid <= push && last_node;
      if (push) begin
        x_old  <= sr[N-1];
        sr     <= {sr[N-2:0], x_new};
        node_x <= x_new;
      end
    end
  end

  assign state_x = sr;

  b2s #(.Q(Q)) u_b2s_x (
    .clk, .rst_n, .load(reseed), .step,
    .seed(Q'(node_seed(int'(seed_node), SRC_X, Q))),
    .value(x_old), .bit_o(x_out_bit));

endmodule
