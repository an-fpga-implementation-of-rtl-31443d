// tb_reservoir_state: self-checking testbench of the delay line (N = 5,
// L = 16). Random stream bits are fed for many nodes, with random idle
// clocks between bits. A reference model counts each node's bits, keeps the
// N-word shift register and the hold word, and checks node_x, state_x at
// node N-1, the valid strobes, and every bit of the feedback stream, which
// must be the comparison of the state of node i-N-1 with the x LFSR.
module tb_reservoir_state;
  import tb_ref_pkg::*;

  localparam int N = 5, L = 16, NW = 3;
  logic clk = 0, rst_n = 0;
  logic step = 0, push = 0, last_node = 0, reseed = 0, x_in_bit = 0;
  logic [NW-1:0] seed_node = '0;
  logic x_out_bit, node_valid, state_valid, node_sat;
  logic signed [15:0] node_x;
  logic signed [N-1:0][15:0] state_x;
  int checks = 0, failures = 0;

  // reference model
  logic signed [15:0] m_sr [N];
  logic signed [15:0] m_old, m_last;
  logic [15:0] r_x;
  int cnt, nodes_done, sat_seen;
  bit m_node_valid, m_state_valid, m_sat;

  logic [2:0] len_log2 = 3'd4;   // full length L = 16

  reservoir_state #(.Q(16), .N(N), .L(L), .NW(NW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
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

  initial begin
    int node = 0, b = 0, c_final, v;
    foreach (m_sr[i]) m_sr[i] = 0;
    m_old = 0; r_x = 1; cnt = 0; nodes_done = 0; sat_seen = 0;
    m_node_valid = 0; m_state_valid = 0; m_last = 0; m_sat = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (nodes_done < 300) begin
      // outputs registered at the previous edge
      #1;
      chk(node_valid == m_node_valid && state_valid == m_state_valid, "valid strobes");
      if (m_node_valid) chk(node_x == m_last && node_sat == m_sat, "node_x");
      if (m_state_valid)
        for (int i = 0; i < N; i++) chk(state_x[i] == m_sr[i], $sformatf("state_x[%0d]", i));
      // drive this clock
      step = ($urandom % 4) != 0;
      push = step && (b == L - 1);
      last_node = (node == N - 1);
      reseed = push && (nodes_done % 7 != 3);
      seed_node = NW'((node + 1) % N);
      // all-ones nodes now and then to reach saturation
      x_in_bit = (nodes_done % 11 == 5) ? 1'b1 : 1'($urandom);
      #1;
      if (step) chk(x_out_bit == b2s_bit(r_x, m_old), "feedback stream bit");
      @(posedge clk);
      // model update
      m_node_valid = 0; m_state_valid = 0; m_sat = 0;
      if (step) begin
        cnt += x_in_bit ? 1 : -1;
        if (push) begin
          v = cnt * (32768 / L);
          if (v > 32767) begin v = 32767; sat_seen++; m_sat = 1; end
          m_last = 16'(v);
          m_old = m_sr[N-1];
          for (int i = N - 1; i > 0; i--) m_sr[i] = m_sr[i-1];
          m_sr[0] = m_last;
          m_node_valid = 1; m_state_valid = (node == N - 1);
          cnt = 0; b = 0; node = (node + 1) % N; nodes_done++;
        end else b++;
      end
      if (reseed) r_x = seed16(int'(seed_node), 5);
      else if (step) r_x = lfsr16_next(r_x);
      @(negedge clk);
    end
    chk(sat_seen > 0, "saturation was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
