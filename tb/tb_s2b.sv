// tb_s2b: self-checking testbench of the stochastic-to-binary converter at
// L = 16 and L = 128, and at run-time lengths 16, 32, 64 on the L = 128
// converter. Random streams of L bits are fed in; the result on the
// last bit must equal (ones - zeros) * 2^15 / L, clipped to 32767. All-one
// and all-zero streams check saturation and the negative end, and gaps
// with `en` low must not disturb the count.
module tb_s2b;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic en16, last16, bit16, sat16;
  logic signed [15:0] res16;
  logic en128, last128, bit128, sat128;
  logic signed [15:0] res128;
  logic [2:0] len128 = 3'd7;

  s2b #(.Q(16), .L(16))  d16  (.clk, .rst_n, .len_log2(3'd4), .en(en16),  .last(last16),  .bit_i(bit16),  .result(res16),  .saturated(sat16));
  s2b #(.Q(16), .L(128)) d128 (.clk, .rst_n, .len_log2(len128), .en(en128), .last(last128), .bit_i(bit128), .result(res128), .saturated(sat128));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_of(int c, int l);
    int v = c * (32768 / l);
    return (v > 32767) ? 32767 : v;
  endfunction

  // mode 0: random, 1: all ones, 2: all zeros
  task automatic run16(input int mode, input bit gaps);
    int c = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      if (gaps && ($urandom % 3 == 0)) begin
        en16 = 0; bit16 = $urandom; last16 = $urandom;
        @(negedge clk);
      end
      en16 = 1; last16 = (i == 15);
      bit16 = (mode == 1) ? 1'b1 : (mode == 2) ? 1'b0 : 1'($urandom);
      c += bit16 ? 1 : -1;
      if (i == 15) begin
        #1;
        checks++;
        if (res16 != 16'(expect_of(c, 16)) || sat16 != (c == 16)) begin
          failures++;
          $display("FAIL L=16 c=%0d res=%0d", c, res16);
        end
      end
    end
    @(negedge clk); en16 = 0; last16 = 0;
  endtask

  // A stream of 2^len128 bits on the L = 128 converter.
  task automatic run128(input int mode);
    int c = 0;
    int n = 1 << len128;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      en128 = 1; last128 = (i == n - 1);
      bit128 = (mode == 1) ? 1'b1 : (mode == 2) ? 1'b0 : 1'($urandom);
      c += bit128 ? 1 : -1;
      if (i == n - 1) begin
        #1;
        checks++;
        if (res128 != 16'(expect_of(c, n)) || sat128 != (c == n)) begin
          failures++;
          $display("FAIL L=128 c=%0d res=%0d", c, res128);
        end
      end
    end
  endtask

  initial begin
    en16 = 0; last16 = 0; bit16 = 0; en128 = 0; last128 = 0; bit128 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run16(1, 0); run16(2, 0);
    for (int t = 0; t < 200; t++) run16(0, t[0]);
    run128(1); run128(2);
    for (int t = 0; t < 100; t++) run128(0);
    // run-time stream lengths 16, 32 and 64 on the same converter
    for (int ln = 4; ln <= 6; ln++) begin
      len128 = 3'(ln);
      run128(1); run128(2);
      for (int t = 0; t < 50; t++) run128(0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
