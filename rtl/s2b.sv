// s2b: stochastic-to-binary converter (S2B in the block diagram).
//
// An up/down counter: it adds 1 for every '1' and subtracts 1 for every '0'
// of the incoming stream while `en` is high (the paper's conversion rule).
// After a stream of 2^len_log2 bits (at most L) the count c lies in
// [-2^len_log2, 2^len_log2] and equals the stream length times its bipolar
// value. On the clock where `last` is high the count including that clock's
// bit is presented on `result`, scaled to a Q-bit bipolar fraction
// (c * 2^(Q-1) / 2^len_log2, a left shift), and the counter restarts from
// zero for the next virtual node. `len_log2` must not exceed log2(L).
// Scaling to Q bits and saturating c = +L to the largest positive code are
// this design's choices; the paper stores the states as binary words but
// does not give their format. The stream length is a run-time input because
// the paper notes that a longer stream costs time, not circuitry.
//
// Timing: `result` is combinational and valid in the cycle with `last` high.
module s2b #(
  parameter int unsigned Q = 16,
  parameter int unsigned L = 128,
  parameter int unsigned LW = $clog2($clog2(L) + 1)   // len_log2 width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                last,
  input  logic                bit_i,
  input  logic [LW-1:0]       len_log2,
  output logic signed [Q-1:0] result,
  output logic                saturated
);

  localparam int unsigned CW = $clog2(L) + 2;          // holds -L..L

  initial assert ((1 << $clog2(L)) == L && $clog2(L) <= Q - 1)
    else $error("s2b: L=%0d must be a power of two no larger than 2^(Q-1)", L);

  logic signed [CW-1:0] cnt, cnt_next;
  logic signed [Q:0]    scaled;

  assign cnt_next = bit_i ? cnt + CW'(1) : cnt - CW'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            cnt <= '0;
    else if (en && last)   cnt <= '0;
    else if (en)           cnt <= cnt_next;
  end

  always_comb begin
    scaled    = (Q+1)'(cnt_next) <<< ((Q - 1) - int'(len_log2));
    saturated = (scaled > $signed({2'b00, {(Q-1){1'b1}}}));
    result    = saturated ? {1'b0, {(Q-1){1'b1}}} : scaled[Q-1:0];
  end

endmodule
