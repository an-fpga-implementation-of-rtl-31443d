// tb_input_weighting: self-checking testbench of the input stage.
// A reference model built from tb_ref_pkg keeps the five LFSRs (u, w, bias,
// alpha select, half select) and the held sample, and every clock checks
//   s = half ? (alpha_sel ? XNOR(u, w) : x) : theta
// with random operands, random stepping, re-seeding and sample loads.
// A second phase checks the stream statistics: with fixed operands the
// fraction of ones must approach 0.5*(alpha*p_wu + (1-alpha)*p_x) + 0.5*p_th.
module tb_input_weighting;
  import tb_ref_pkg::*;

  localparam int NW = 6;
  logic clk = 0, rst_n = 0;
  logic step = 0, reseed = 0, sample_load = 0, x_bit = 0;
  logic [NW-1:0] seed_node = '0;
  logic signed [15:0] sample = '0, weight = '0, bias = '0;
  logic [15:0] alpha = '0;
  logic s_bit;
  int checks = 0, failures = 0;

  logic [15:0] r_u, r_w, r_b, r_a, r_h;
  logic [15:0] m_hold;

  input_weighting #(.Q(16), .NW(NW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit model_s();
    bit ub, wb, tb_, ab, hb;
    ub  = b2s_bit(r_u, m_hold);
    wb  = b2s_bit(r_w, weight);
    tb_ = b2s_bit(r_b, bias);
    ab  = (r_a ^ 16'h8000) <= alpha;      // offset-binary form of alpha
    hb  = $signed(r_h) <= 0;
    return hb ? (ab ? (ub == wb) : x_bit) : tb_;
  endfunction

  // Model register update at the clock edge.
  task automatic model_clock();
    if (reseed) begin
      r_u = seed16(int'(seed_node), 0); r_w = seed16(int'(seed_node), 1);
      r_b = seed16(int'(seed_node), 2); r_a = seed16(int'(seed_node), 3);
      r_h = seed16(int'(seed_node), 4);
    end else if (step) begin
      r_u = lfsr16_next(r_u); r_w = lfsr16_next(r_w); r_b = lfsr16_next(r_b);
      r_a = lfsr16_next(r_a); r_h = lfsr16_next(r_h);
    end
    if (sample_load) m_hold = sample;
  endtask

  initial begin
    real p_u, p_w, p_th, p_x, al, p_wu, expect_p, got_p;
    int ones;
    r_u = 1; r_w = 1; r_b = 1; r_a = 1; r_h = 1; m_hold = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Phase 1: bit-exact comparison with random everything.
    for (int t = 0; t < 20000; t++) begin
      step        = ($urandom % 8) != 0;
      reseed      = ($urandom % 64) == 0;
      seed_node   = NW'($urandom % 50);
      sample_load = ($urandom % 100) == 0;
      sample      = 16'($urandom);
      weight      = 16'($urandom);
      bias        = 16'($urandom);
      alpha       = 16'($urandom);
      x_bit       = 1'($urandom);
      #1;
      checks++;
      if (s_bit !== model_s()) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: s=%b model=%b", t, s_bit, model_s());
      end
      @(posedge clk); model_clock();
      @(negedge clk);
    end
    // Phase 2: statistics with fixed operands, free-running LFSRs.
    reseed = 0; sample_load = 1; sample = 16'sd16384;        // u = 0.5
    weight = -16'sd8192; bias = 16'sd19661; alpha = 16'd39322; // w=-0.25, theta=0.6, alpha=0.6
    @(negedge clk); sample_load = 0; step = 1;
    ones = 0;
    for (int t = 0; t < 60000; t++) begin
      x_bit = ($urandom % 10) < 7;                          // p_x = 0.7
      #1; ones += int'(s_bit);
      @(negedge clk);
    end
    p_u = 0.75; p_w = 0.375; p_th = 0.8; p_x = 0.7; al = 0.6;
    p_wu = p_u * p_w + (1.0 - p_u) * (1.0 - p_w);
    expect_p = 0.5 * (al * p_wu + (1.0 - al) * p_x) + 0.5 * p_th;
    got_p = real'(ones) / 60000.0;
    checks++;
    if (got_p < expect_p - 0.01 || got_p > expect_p + 0.01) begin
      failures++;
      $display("FAIL statistics: p=%f expected %f", got_p, expect_p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
