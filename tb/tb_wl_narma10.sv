// tb_wl_narma10: the NARMA10 prediction benchmark on the full-size
// reservoir (N = 50, alpha = 0.6, theta = 0.6), run once with stream length
// 16 and once with 128, the two ends of the range the benchmark covers.
//
// Input u(t) is uniform in [0, 0.5]; the target is the standard tenth-order
// NARMA system
//   y(t+1) = 0.3 y(t) + 0.05 y(t) sum_{k=0..9} y(t-k) + 1.5 u(t-9) u(t) + 0.1.
// For each length, 1000 points train a ridge regression readout on the
// state vectors and the next 1000 test it; the normalised mean squared
// error is printed. Reported hardware results of this kind of reservoir on
// NARMA10 sit near NMSE = 1 (the benchmark needs more precision than short
// streams give), so the check only asks for a finite NMSE no worse than
// 1.2 and for one state vector per sample.
module tb_wl_narma10;
  import tdr_pkg::*;
  import tb_readout_pkg::*;

  localparam int N = 50, NTRAIN = 1000, NTEST = 1000, WASH = 50, F = N + 1;

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
    real u [$], y [$], xtr [$], ytr [$], yh, mean, se, sv, nmse;
    vec_t w;
    int total = NTRAIN + NTEST + 10, m;
    // NARMA10 sequence; y[t] is the target for the state after u[t-1]
    for (int t = 0; t < total; t++) begin
      u.push_back(0.5 * real'($urandom % 1000000) / 1000000.0);
      y.push_back(0.0);
    end
    for (int t = 9; t < total - 1; t++) begin
      real sum = 0.0;
      for (int k = 0; k < 10; k++) sum += y[t-k];
      y[t+1] = 0.3 * y[t] + 0.05 * y[t] * sum + 1.5 * u[t-9] * u[t] + 0.1;
    end
    x.delete(); n_states = 0;
    len_log2 = 3'(lg);
    for (int t = 0; t < total - 1; t++) begin
      @(negedge clk);
      in_valid = 1; in_sample = 16'($rtoi(u[t] * 32767.0));
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
    end
    while (n_states < total - 1) @(negedge clk);
    repeat (N * 200) @(negedge clk);
    checks++;
    if (n_states != total - 1) begin
      failures++;
      $display("FAIL %0d state vectors for %0d samples", n_states, total - 1);
    end
    // state row t was produced by u[t] and predicts y[t+1]
    m = 0;
    for (int t = WASH; t < NTRAIN; t++) begin
      for (int j = 0; j < F; j++) xtr.push_back(x[t*F + j]);
      ytr.push_back(y[t+1]);
      m++;
    end
    w = ridge(xtr, ytr, m, F, 1e-6);
    mean = 0.0;
    for (int t = NTRAIN; t < total - 1; t++) mean += y[t+1];
    mean /= real'(total - 1 - NTRAIN);
    se = 0.0; sv = 0.0;
    for (int t = NTRAIN; t < total - 1; t++) begin
      yh = predict(x, t, F, w);
      se += (y[t+1] - yh) ** 2;
      sv += (y[t+1] - mean) ** 2;
    end
    nmse = se / sv;
    $display("NARMA10, stream length %0d: test NMSE %f", 1 << lg, nmse);
    checks++;
    if (!(nmse < 1.2)) begin
      failures++;
      $display("FAIL NMSE too high");
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
