// tb_wl_channel_eq: the non-linear channel equalisation benchmark on the
// full-size reservoir (N = 50, alpha = 0.6, theta = 0.6), run with stream
// lengths 16 and 128.
//
// Symbols d(n) are drawn from {-3, -1, 1, 3} and pass through the usual
// multipath channel with a polynomial distortion (no added noise):
//   q(n) = 0.08d(n+2) - 0.12d(n+1) + d(n) + 0.18d(n-1) - 0.1d(n-2)
//          + 0.091d(n-3) - 0.05d(n-4) + 0.04d(n-5) + 0.03d(n-6) + 0.01d(n-7)
//   u(n) = q(n) + 0.036 q(n)^2 - 0.011 q(n)^3,
// scaled by 1/5 into the reservoir's input range. A ridge regression
// readout trained on 1000 points recovers d(n-2); on the next 1000 points
// the symbol error rate (SER) is printed. Reported FPGA results for this
// kind of stochastic reservoir on this task are SERs of roughly 0.3 to 0.45,
// far from software models; the check asks for an SER below 0.6 (chance is
// 0.75) and for one state vector per sample.
module tb_wl_channel_eq;
  import tdr_pkg::*;
  import tb_readout_pkg::*;

  localparam int N = 50, NTRAIN = 1000, NTEST = 1000, WASH = 50, F = N + 1;
  localparam real SER_MAX = 0.6;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, reseed_en = 1, cfg_we = 0;
  logic [2:0] len_log2 = 3'd7;
  logic signed [15:0] in_sample = '0;
  cfg_sel_e cfg_sel = CFG_WEIGHT;
  logic [7:0] cfg_idx = '0;
  logic [15:0] cfg_data = '0;
  logic node_valid, state_valid, stall, s2b_saturated;
  logic [5:0] node_idx;
  logic signed [15:0] node_x;
  logic signed [N-1:0][15:0] state_x;

  tdr_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real x [$];
  int  n_states = 0;

  always @(posedge clk) if (state_valid) begin
    for (int k = 0; k < N; k++) x.push_back(real'(state_x[k]) / 32768.0);
    x.push_back(1.0);
    n_states++;
  end

  task automatic run(input int lg);
    real u [$], xtr [$], ytr [$], yh, q, v;
    int d [$];
    vec_t w;
    int total = NTRAIN + NTEST, m, errs, dh;
    // symbols d(n) in {-3,-1,1,3}; d is padded so d(n+2) and d(n-7) exist
    for (int n = 0; n < total + 10; n++) d.push_back(2 * int'($urandom % 4) - 3);
    for (int n = 7; n < total + 7; n++) begin
      q = 0.08 * d[n+2] - 0.12 * d[n+1] + d[n] + 0.18 * d[n-1] - 0.1 * d[n-2]
        + 0.091 * d[n-3] - 0.05 * d[n-4] + 0.04 * d[n-5] + 0.03 * d[n-6] + 0.01 * d[n-7];
      v = q + 0.036 * q * q - 0.011 * q * q * q;
      u.push_back(v / 5.0);                       // scale into (-1, 1)
    end
    x.delete(); n_states = 0;
    len_log2 = 3'(lg);
    for (int t = 0; t < total; t++) begin
      @(negedge clk);
      in_valid = 1; in_sample = 16'($rtoi(u[t] * 32767.0));
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
    end
    while (n_states < total) @(negedge clk);
    repeat (N * 200) @(negedge clk);
    checks++;
    if (n_states != total) begin
      failures++;
      $display("FAIL %0d state vectors for %0d samples", n_states, total);
    end
    // state row t (input u(n), n = t+7) must recover d(n-2) = d[t+5]
    m = 0;
    for (int t = WASH; t < NTRAIN; t++) begin
      for (int j = 0; j < F; j++) xtr.push_back(x[t*F + j]);
      ytr.push_back(real'(d[t+5]));
      m++;
    end
    w = ridge(xtr, ytr, m, F, 1e-6);
    errs = 0;
    for (int t = NTRAIN; t < total; t++) begin
      yh = predict(x, t, F, w);
      dh = (yh < -2.0) ? -3 : (yh < 0.0) ? -1 : (yh < 2.0) ? 1 : 3;
      if (dh != d[t+5]) errs++;
    end
    $display("channel equalisation, stream length %0d: test SER %f", 1 << lg, real'(errs) / NTEST);
    checks++;
    if (!(real'(errs) / NTEST < SER_MAX)) begin
      failures++;
      $display("FAIL symbol error rate too high");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(4);
    run(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
