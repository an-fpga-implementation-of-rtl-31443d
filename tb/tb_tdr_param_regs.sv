// tb_tdr_param_regs: self-checking testbench of the parameter registers
// (N = 7, ORDER = 10). Checks the reset values (alpha = 0.6, theta = 0.6,
// the sin^2 coefficients, the hashed mask), then random writes to every
// target, including out-of-range indices that must be ignored, against a
// shadow copy, reading the mask through rd_node.
module tb_tdr_param_regs;
  import tdr_pkg::*;
  localparam int N = 7, ORDER = 10, NW = 3, IW = 8;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_WEIGHT;
  logic [IW-1:0] cfg_idx = '0;
  logic [15:0] cfg_data = '0;
  logic [NW-1:0] rd_node = '0;
  logic signed [15:0] weight, bias;
  logic [15:0] alpha;
  logic signed [ORDER:0][15:0] coef;
  int checks = 0, failures = 0;

  logic [15:0] sh_mask [N];
  logic [15:0] sh_coef [ORDER+1];
  logic [15:0] sh_bias, sh_alpha;

  tdr_param_regs #(.Q(16), .N(N), .ORDER(ORDER), .NW(NW), .IW(IW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare_all();
    for (int i = 0; i < N; i++) begin
      rd_node = NW'(i); #1;
      chk(weight == sh_mask[i], $sformatf("mask[%0d]", i));
    end
    for (int k = 0; k <= ORDER; k++) chk(coef[k] == sh_coef[k], $sformatf("coef[%0d]", k));
    chk(bias == sh_bias && alpha == sh_alpha, "bias and alpha");
  endtask

  initial begin
    int idx;
    // reset values: 0.6 in both codes, sin^2(2(2k/10-1)) coefficients
    sh_alpha = 16'd39322;              // round(0.6 * 65536)
    sh_bias  = 16'd19661;              // round(0.6 * 32768)
    for (int k = 0; k <= ORDER; k++)
      sh_coef[k] = 16'($rtoi(((2.0 * ($sin(2.0 * (2.0 * k / 10.0 - 1.0)) ** 2) - 1.0) * 32767.0)
                        + ((2.0 * ($sin(2.0 * (2.0 * k / 10.0 - 1.0)) ** 2) - 1.0) >= 0 ? 0.5 : -0.5)));
    for (int i = 0; i < N; i++) sh_mask[i] = mask_default(i)[31:16];
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare_all();
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      cfg_we   = ($urandom % 4) != 0;
      cfg_sel  = cfg_sel_e'($urandom % 4);
      idx      = $urandom % 16;
      cfg_idx  = IW'(idx);
      cfg_data = 16'($urandom);
      if (cfg_we)
        case (cfg_sel)
          CFG_WEIGHT: if (idx < N) sh_mask[idx] = cfg_data;
          CFG_COEF:   if (idx <= ORDER) sh_coef[idx] = cfg_data;
          CFG_BIAS:   sh_bias = cfg_data;
          CFG_ALPHA:  sh_alpha = cfg_data;
          default: ;
        endcase
      @(negedge clk); cfg_we = 0;
      compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
