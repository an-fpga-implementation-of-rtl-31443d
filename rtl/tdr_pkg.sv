// tdr_pkg: constants, types and helper functions shared by the stochastic
// time delay reservoir (TDR).
//
// The reservoir works on single-line bipolar stochastic bit streams: a value
// q in [-1,1) is carried as a stream whose probability of a '1' is (q+1)/2.
// Binary values are Q-bit two's complement fractions (value = code / 2^(Q-1)).
//
// What follows the paper: the default sizes (N = 50 virtual nodes, stream
// length L = 128, 16-bit binary words and 16-bit LFSRs, Bernstein order
// n = 10), alpha = 0.6 and bias theta = 0.6, and the rule that every random
// source is re-seeded with a seed unique to each virtual node.
// What is this design's own choice: the LFSR polynomials, the seed formula,
// the default input mask and the default Bernstein coefficients
// (beta_k = sin^2(gamma*(2k/n - 1)) with gamma = 2), and the configuration
// port encoding.
package tdr_pkg;

  // Default sizes.
  localparam int unsigned Q_DEF     = 16;   // binary word and LFSR width
  localparam int unsigned N_DEF     = 50;   // virtual nodes in the delay loop
  localparam int unsigned L_DEF     = 128;  // stochastic stream length per node
  localparam int unsigned ORDER_DEF = 10;   // Bernstein polynomial order n

  // Identifiers of the random sources; each gets its own seed sequence.
  typedef enum logic [4:0] {
    SRC_U     = 5'd0,   // input sample u
    SRC_W     = 5'd1,   // input weight w_i
    SRC_BIAS  = 5'd2,   // input bias theta
    SRC_ALPHA = 5'd3,   // alpha select stream of the first MUX
    SRC_HALF  = 5'd4,   // 0.5 select stream of the second MUX
    SRC_X     = 5'd5,   // delayed reservoir state x
    SRC_COEF0 = 5'd6    // Bernstein coefficient beta_k uses SRC_COEF0 + k
  } src_e;

  // Configuration write targets.
  typedef enum logic [1:0] {
    CFG_WEIGHT = 2'd0,  // input mask entry w[idx]
    CFG_BIAS   = 2'd1,  // input bias theta (bipolar code)
    CFG_ALPHA  = 2'd2,  // alpha as an unsigned fraction alpha * 2^Q
    CFG_COEF   = 2'd3   // Bernstein coefficient beta[idx] (bipolar code)
  } cfg_sel_e;

  // Feedback tap mask of a maximal-length Fibonacci LFSR of the given width.
  // Bit (t-1) is set for every tap t of the polynomial.
  function automatic logic [31:0] lfsr_taps(input int unsigned width);
    case (width)
      8:       return 32'h0000_00B8;  // x^8+x^6+x^5+x^4+1
      10:      return 32'h0000_0240;  // x^10+x^7+1
      12:      return 32'h0000_0829;  // x^12+x^6+x^4+x+1
      16:      return 32'h0000_D008;  // x^16+x^15+x^13+x^4+1
      20:      return 32'h0009_0000;  // x^20+x^17+1
      24:      return 32'h00E1_0000;  // x^24+x^23+x^22+x^17+1
      default: return 32'h8020_0003;  // x^32+x^22+x^2+x+1
    endcase
  endfunction

  // Seed of random source `src` for virtual node `node`. The top bit is
  // forced to one so the seed is never the all-zero LFSR lock-up state, and
  // the lower bits are an odd-constant multiple of the node index XORed with
  // a per-source constant, which is one-to-one in the node index for
  // node < 2^(Q-1): every node of a source gets a different seed.
  function automatic logic [31:0] node_seed(input int unsigned node,
                                            input int unsigned src,
                                            input int unsigned width);
    logic [31:0] base, mix, s;
    base = 32'h5A3C_ACE1 ^ (32'(src) * 32'h3B5D_9E37);
    mix  = 32'(node) * 32'h0000_4F1B;
    s    = base ^ mix;
    s    = s & ((32'd1 << (width - 1)) - 32'd1);
    s    = s | (32'd1 << (width - 1));
    return s;
  endfunction

  // Default input mask entry for node i: a fixed pseudo-random bipolar code
  // (integer hash of the node index), standing in for the random mask.
  function automatic logic [31:0] mask_default(input int unsigned i);
    logic [31:0] x;
    x = (32'(i) + 32'd1) * 32'h9E37_79B1;
    x = x ^ (x >> 15);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    return x;
  endfunction

  // Default Bernstein coefficients beta_k = sin^2(2*(2k/10 - 1)), k = 0..10,
  // as 16-bit bipolar codes round((2*beta_k - 1) * 32767).
  function automatic logic [15:0] coef_default(input int unsigned k);
    case (k)
      0, 10:   return 16'sd21418;
      1, 9:    return 16'sd32711;
      2, 8:    return 16'sd24162;
      3, 7:    return 16'sd957;
      4, 6:    return -16'sd22829;
      5:       return -16'sd32767;
      default: return 16'sd0;
    endcase
  endfunction

  // alpha = 0.6 as a 16-bit unsigned fraction, theta = 0.6 as a bipolar code.
  localparam logic [15:0] ALPHA_DEF = 16'd39322;
  localparam logic [15:0] BIAS_DEF  = 16'd19661;

endpackage
