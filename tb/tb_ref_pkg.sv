// tb_ref_pkg: reference functions for the reservoir testbenches, written
// from the specification and independent of the RTL: the 16-bit Fibonacci
// LFSR step (taps 16,15,13,4), the per-node seed formula, and the bipolar
// comparison rule of a binary-to-stochastic converter.
package tb_ref_pkg;

  // One step of the 16-bit LFSR: shift left, new bit 0 = b15^b14^b12^b3.
  function automatic logic [15:0] lfsr16_next(input logic [15:0] s);
    return {s[14:0], s[15] ^ s[14] ^ s[12] ^ s[3]};
  endfunction

  // Seed of source `src` for node `node`:
  //   0x8000 | ((0xACE1 ^ low16(src*0x9E37)) ^ low16(node*0x4F1B)) & 0x7FFF
  // (the low 16 bits of the RTL's 32-bit formula).
  function automatic logic [15:0] seed16(input int node, input int src);
    logic [31:0] a, b;
    a = 32'h5A3C_ACE1 ^ (src * 32'h3B5D_9E37);
    b = node * 32'h4F1B;
    return 16'h8000 | (16'(a ^ b) & 16'h7FFF);
  endfunction

  // Stream bit of a bipolar value for a given LFSR word.
  function automatic bit b2s_bit(input logic [15:0] rnd, input logic [15:0] v);
    return $signed(rnd) <= $signed(v);
  endfunction

endpackage
