// tdr_param_regs: the programmable parameters of the reservoir: the input
// mask (one weight w_i per virtual node, the "Input Weight Reg"), the input
// bias theta ("Input Bias Reg"), alpha, and the ORDER+1 Bernstein
// coefficients ("Bernstein Coeff Reg").
//
// The paper names these registers and gives alpha = 0.6 and theta = 0.6; it
// does not say how they are written. Here a single write port sets one
// register per clock: `cfg_sel` picks the target (tdr_pkg::cfg_sel_e),
// `cfg_idx` the node or coefficient index, `cfg_data` the value. Writes to
// an index out of range are ignored. Reset loads working defaults: a fixed
// pseudo-random mask, theta = 0.6, alpha = 0.6 and the coefficients of
// sin^2(2s) (tdr_pkg), scaled from 16 bits to Q bits.
//
// Timing: a write takes effect on the next clock; `weight` is a
// combinational read of entry `rd_node`.
module tdr_param_regs #(
  parameter int unsigned Q     = tdr_pkg::Q_DEF,
  parameter int unsigned N     = tdr_pkg::N_DEF,
  parameter int unsigned ORDER = tdr_pkg::ORDER_DEF,
  parameter int unsigned NW    = $clog2(N),
  parameter int unsigned IW    = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cfg_we,
  input  tdr_pkg::cfg_sel_e            cfg_sel,
  input  logic [IW-1:0]                cfg_idx,
  input  logic [Q-1:0]                 cfg_data,
  input  logic [NW-1:0]                rd_node,
  output logic signed [Q-1:0]          weight,
  output logic signed [Q-1:0]          bias,
  output logic        [Q-1:0]          alpha,
  output logic signed [ORDER:0][Q-1:0] coef
);
  import tdr_pkg::*;

  // 16-bit default code to Q bits (keeps the value, drops or adds LSBs).
  function automatic logic [Q-1:0] from16(input logic [15:0] c);
    logic [47:0] w;
    w = {c, 32'b0};
    return w[47 -: Q];
  endfunction

  logic signed [N-1:0][Q-1:0] mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) mask[i] <= from16(mask_default(i)[31:16]);
      for (int k = 0; k <= ORDER; k++) coef[k] <= from16(coef_default(k));
      bias  <= from16(BIAS_DEF);
      alpha <= from16(ALPHA_DEF);
    end else if (cfg_we) begin
      case (cfg_sel)
        CFG_WEIGHT: if (32'(cfg_idx) < N)      mask[cfg_idx]  <= cfg_data;
        CFG_COEF:   if (32'(cfg_idx) <= ORDER) coef[cfg_idx]  <= cfg_data;
        CFG_BIAS:   bias  <= cfg_data;
        CFG_ALPHA:  alpha <= cfg_data;
        default: ;
      endcase
    end
  end

  assign weight = mask[rd_node];

endmodule
