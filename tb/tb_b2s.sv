// tb_b2s: self-checking testbench of the binary-to-stochastic converter.
// Checks every output bit against a reference LFSR, checks re-seeding, and
// over one full LFSR period (65535 clocks) checks that the number of ones
// is exactly value + 32768 (for value >= 0) or value + 32769 (value < 0),
// i.e. that the stream probability is (value+1)/2 as the paper defines.
module tb_b2s;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [15:0] seed = '0;
  logic signed [15:0] value = '0;
  logic bit_o;
  int checks = 0, failures = 0;
  logic [15:0] ref_s;

  b2s #(.Q(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
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

  // Compare `n` bits of the running stream with a reference LFSR from `st`.
  task automatic stream(input logic [15:0] st, input logic signed [15:0] v,
                        input int n, input string what);
    int bad = 0;
    ref_s = st;
    #1;
    for (int i = 0; i < n; i++) begin
      if (bit_o !== b2s_bit(ref_s, v)) bad++;
      @(negedge clk); ref_s = lfsr16_next(ref_s);
    end
    chk(bad == 0, what);
  endtask

  // Run one full period at `v`, comparing each bit and counting ones.
  task automatic period(input logic signed [15:0] v, input logic [15:0] sd);
    int ones = 0;
    int expect_ones;
    @(negedge clk); load = 1; seed = sd; value = v; step = 0;
    @(negedge clk); load = 0; step = 1; ref_s = sd;
    for (int i = 0; i < 65535; i++) begin
      if (bit_o !== b2s_bit(ref_s, v)) begin
        failures++;
        if (failures < 10) $display("FAIL bit %0d v=%0d", i, v);
      end
      ones += int'(bit_o);
      @(negedge clk); ref_s = lfsr16_next(ref_s);
    end
    checks++;
    expect_ones = (v >= 0) ? int'(v) + 32768 : int'(v) + 32769;
    chk(ones == expect_ones, $sformatf("ones=%0d expected %0d for v=%0d", ones, expect_ones, v));
    // after a full period the LFSR is back at its seed
    stream(sd, v, 40, "LFSR back at its seed after 65535 steps");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    value = 16'sd100; step = 1;
    stream(16'd1, 16'sd100, 200, "stream from reset value 1");
    period(16'sd0, 16'hACE1);
    period(16'sd19661, seed16(3, 2));
    period(-16'sd20000, 16'h8001);
    period(16'sd32767, 16'h1234);
    // step low holds the LFSR
    @(negedge clk); load = 1; seed = 16'h0F0F; value = -16'sd3000;
    @(negedge clk); load = 0; step = 0;
    repeat (5) @(negedge clk);
    step = 1;
    stream(16'h0F0F, -16'sd3000, 100, "hold when step is low");
    // load wins over step
    load = 1; seed = 16'hBEEF;
    @(negedge clk); load = 0;
    stream(16'hBEEF, -16'sd3000, 100, "load has priority over step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
