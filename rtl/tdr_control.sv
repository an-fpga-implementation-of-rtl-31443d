// tdr_control: the state machine that time-multiplexes the single neuron
// over N virtual nodes, each lasting L clocks (one stochastic stream).
//
// The paper shows a control block driving the sample-and-hold, the B2S and
// the S2B converters but does not give its insides; this is the simplest
// sequencer that does the job. It keeps a node index (0..N-1) and a bit
// counter (0..2^len-1). The stream length 2^len is taken from `len_log2`
// when a sample is accepted and held for that sample's N nodes (`len_q`);
// values above log2(L) are clipped to log2(L). While `busy`, `step` is high: every converter advances
// one bit and the S2B counts. `push` marks the last bit of a node. After
// node N-1 the next input sample is taken with a valid/ready handshake
// (`in_valid`/`in_ready`, transfer when both are high), written into the
// sample-and-hold register (`sample_load`), and node 0 starts on the next
// clock. With no sample waiting the sequencer idles (an input stall); the
// reservoir state is kept.
//
// Re-seeding: `reseed` is high on the clock before a node starts, together
// with that node's index on `seed_node`, so every LFSR begins the node from
// the node's own seed (the paper's re-seeding method). With `reseed_en` low
// the LFSRs are seeded only once, before the first node after reset, and
// then run freely (the paper's "no seed" comparison case).
//
// Timing: a node occupies exactly 2^len clocks and a sample N*2^len clocks when
// samples arrive without a gap; node 0 begins one clock after the sample is
// accepted.
module tdr_control #(
  parameter int unsigned N  = tdr_pkg::N_DEF,
  parameter int unsigned L  = tdr_pkg::L_DEF,
  parameter int unsigned NW = $clog2(N),
  parameter int unsigned LW = $clog2($clog2(L) + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LW-1:0] len_log2,  // stream length 2^len_log2, per sample
  output logic [LW-1:0] len_q,     // length of the sample being processed
  input  logic          in_valid,
  output logic          in_ready,
  input  logic          reseed_en,
  output logic          sample_load,
  output logic          step,
  output logic          push,
  output logic          last_node,
  output logic [NW-1:0] node,
  output logic          reseed,
  output logic [NW-1:0] seed_node,
  output logic          stall     // waiting for an input sample
);

  localparam int unsigned CW = (L > 1) ? $clog2(L) : 1;

  localparam logic [LW-1:0] LMAX = LW'($clog2(L));

  logic          busy, seeded, start, accept;
  logic [CW-1:0] cyc, cyc_last;

  always_comb begin
    cyc_last    = CW'((32'd1 << len_q) - 32'd1);
    step        = busy;
    push        = busy && (cyc == cyc_last);
    last_node   = (node == NW'(N - 1));
    in_ready    = !busy || (push && last_node);
    accept      = in_valid && in_ready;
    sample_load = accept;
    start       = accept || (push && !last_node);
    seed_node   = accept ? '0 : node + NW'(1);
    reseed      = start && (reseed_en || !seeded);
    stall       = in_ready && !in_valid && seeded;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      seeded <= 1'b0;
      cyc    <= '0;
      node   <= '0;
      len_q  <= LMAX;
    end else if (start) begin
      if (accept) len_q <= (len_log2 > LMAX) ? LMAX : len_log2;
      busy   <= 1'b1;
      seeded <= 1'b1;
      cyc    <= '0;
      node   <= seed_node;
    end else if (push) begin
      busy   <= 1'b0;         // sample finished, no new one waiting
      cyc    <= '0;
    end else if (busy) begin
      cyc    <= cyc + CW'(1);
    end
  end

  // A node always ends after exactly 2^len bits, and never past node N-1.
  a_node_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (node <= NW'(N - 1)) && (cyc <= cyc_last) && (len_q <= LMAX));
  a_push_is_step: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> step);

endmodule
