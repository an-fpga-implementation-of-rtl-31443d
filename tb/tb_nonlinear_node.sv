// tb_nonlinear_node: self-checking testbench of the Bernstein neuron
// (ORDER = 10). A reference model keeps the s delay line and the eleven
// coefficient LFSRs and checks every clock that the adder output equals the
// number of ones among s and its nine delayed copies and that the output
// bit is the coefficient stream it selects. A statistics phase drives s with
// independent random bits of probability p and checks that the output
// probability is close to sum_k p_beta_k * C(n,k) p^k (1-p)^(n-k).
module tb_nonlinear_node;
  import tb_ref_pkg::*;

  localparam int NW = 6, ORDER = 10;
  logic clk = 0, rst_n = 0;
  logic step = 0, reseed = 0, s_bit = 0;
  logic [NW-1:0] seed_node = '0;
  logic signed [ORDER:0][15:0] coef;
  logic x_bit;
  logic [3:0] sel;
  int checks = 0, failures = 0;

  logic [15:0] r_c [ORDER+1];
  bit          hist [ORDER-1];   // hist[k] = s delayed k+1 clocks

  nonlinear_node #(.Q(16), .ORDER(ORDER), .NW(NW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_v();
    int v = int'(s_bit);
    foreach (hist[k]) v += int'(hist[k]);
    return v;
  endfunction

  task automatic model_clock();
    if (step) begin
      for (int k = ORDER - 2; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = s_bit;
    end
    for (int k = 0; k <= ORDER; k++)
      if (reseed)    r_c[k] = seed16(int'(seed_node), 6 + k);
      else if (step) r_c[k] = lfsr16_next(r_c[k]);
  endtask

  function automatic real binom(int n, int k);
    real r = 1.0;
    for (int i = 1; i <= k; i++) r = r * real'(n - k + i) / real'(i);
    return r;
  endfunction

  initial begin
    int v, ones;
    real p, expect_p, got_p;
    for (int k = 0; k <= ORDER; k++) begin r_c[k] = 1; coef[k] = 16'($urandom); end
    foreach (hist[k]) hist[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      step      = ($urandom % 8) != 0;
      reseed    = ($urandom % 128) == 0;
      seed_node = NW'($urandom % 50);
      s_bit     = 1'($urandom);
      if ($urandom % 500 == 0) coef[$urandom % (ORDER + 1)] = 16'($urandom);
      #1;
      v = model_v();
      checks++;
      if (int'(sel) != v || x_bit !== b2s_bit(r_c[v], coef[v])) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: sel=%0d v=%0d x=%b", t, sel, v, x_bit);
      end
      @(posedge clk); model_clock();
      @(negedge clk);
    end
    // Statistics: the Bernstein polynomial at p for three values of p.
    for (int k = 0; k <= ORDER; k++) coef[k] = 16'(int'((real'(k) / ORDER * 2.0 - 1.0) ** 2 * 32767.0 * 1.0) - 16384);
    reseed = 0; step = 1;
    foreach (p_list[j]) begin
      p = p_list[j];
      ones = 0;
      for (int t = 0; t < 100000; t++) begin
        s_bit = (real'($urandom % 100000) / 100000.0) < p;
        #1; ones += int'(x_bit);
        @(negedge clk);
      end
      expect_p = 0.0;
      for (int k = 0; k <= ORDER; k++)
        expect_p += (real'($signed(coef[k])) / 32768.0 + 1.0) / 2.0 *
                    binom(ORDER, k) * (p ** k) * ((1.0 - p) ** (ORDER - k));
      got_p = real'(ones) / 100000.0;
      checks++;
      if (got_p < expect_p - 0.015 || got_p > expect_p + 0.015) begin
        failures++;
        $display("FAIL Bernstein p=%f: got %f expected %f", p, got_p, expect_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real p_list [3] = '{0.2, 0.5, 0.85};
endmodule
