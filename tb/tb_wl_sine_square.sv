// tb_wl_sine_square: the sine versus square wave discrimination benchmark
// run on the full-size reservoir (N = 50, stream length 128, alpha = 0.6,
// theta = 0.6, gamma = 2 coefficients, re-seeding on).
//
// The input is a random sequence of wave periods of 8 points, each period a
// sine or a square wave of amplitude 0.9; the target is +1 during sine
// periods and -1 during square periods. 1000 points train a ridge
// regression readout on the state vectors, the next 1000 points test it,
// and a point is classified by the sign of the readout. The test checks
// that the error rate stays below 15% (chance is 50%) and prints it; it
// also checks that every sample produced exactly one state vector.
module tb_wl_sine_square;
  import tdr_pkg::*;
  import tb_readout_pkg::*;

  localparam int N = 50, NTRAIN = 1000, NTEST = 1000, WASH = 20, F = N + 1;
  localparam real PI = 3.14159265358979;

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

  real u [$], y [$], x [$];
  int  n_states = 0;

  always @(posedge clk) if (state_valid) begin
    for (int k = 0; k < N; k++) x.push_back(real'(state_x[k]) / 32768.0);
    x.push_back(1.0);
    n_states++;
  end

  initial begin
    vec_t w;
    real xtr [$], ytr [$], yh;
    int m, errs, ntot, kind;
    // input and target sequence
    while (u.size() < NTRAIN + NTEST) begin
      kind = int'($urandom % 2);
      for (int k = 0; k < 8; k++) begin
        u.push_back(kind ? 0.9 * $sin(2.0 * PI * k / 8.0) : (k < 4 ? 0.9 : -0.9));
        y.push_back(kind ? 1.0 : -1.0);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (u[i]) begin
      if (i >= NTRAIN + NTEST) break;
      @(negedge clk);
      in_valid = 1; in_sample = 16'($rtoi(u[i] * 32767.0));
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
    end
    while (n_states < NTRAIN + NTEST) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (n_states != NTRAIN + NTEST) begin
      failures++;
      $display("FAIL %0d state vectors for %0d samples", n_states, NTRAIN + NTEST);
    end
    // train on points WASH..NTRAIN-1
    m = 0;
    for (int r = WASH; r < NTRAIN; r++) begin
      for (int j = 0; j < F; j++) xtr.push_back(x[r*F + j]);
      ytr.push_back(y[r]);
      m++;
    end
    w = ridge(xtr, ytr, m, F, 1e-4);
    errs = 0; ntot = 0;
    for (int r = NTRAIN; r < NTRAIN + NTEST; r++) begin
      yh = predict(x, r, F, w);
      if ((yh >= 0.0) != (y[r] > 0.0)) errs++;
      ntot++;
    end
    $display("sine/square: test error %0d of %0d points (%f %%)", errs, ntot, 100.0 * errs / ntot);
    checks++;
    if (real'(errs) / ntot > 0.15) begin
      failures++;
      $display("FAIL classification error too high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
