// tb_tdr_control: self-checking testbench of the sequencer (N = 3, L = 4).
// Input samples are offered with random gaps. The testbench follows the
// specified schedule itself (each accepted sample runs N nodes of L bits;
// a node starts right after the previous one or right after an accept) and
// checks every control output each clock. The stream length 2^len_log2 is
// drawn at random (1, 2 or 4 bits, and an out-of-range 8 that must be
// clipped to 4) and must be taken at each accept and held for the sample.
// It also checks the timing: with samples always waiting, accepts are
// exactly N*2^len clocks apart. Re-seeding is checked with reseed_en
// high (every node start) and low (only the first start after reset).
module tb_tdr_control;
  localparam int N = 3, L = 4, NW = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, reseed_en = 1;
  logic [1:0] len_log2 = 2'd2, len_q;
  logic in_ready, sample_load, step, push, last_node, reseed, stall;
  logic [NW-1:0] node, seed_node;
  int checks = 0, failures = 0;

  tdr_control #(.N(N), .L(L), .NW(NW)) dut (.*);

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

  initial begin
    bit busy = 0, seeded = 0;
    int m_node = 0, m_cyc = 0, stalls = 0, accepts = 0, last_acc = -1, t = 0;
    int m_len = 2, prev_len = 2, short_seen = 0;
    int gaps_seen = 0, tight_seen = 0;
    bit e_push, e_ready, e_acc, e_start;
    int e_snode;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (t = 0; t < 4000; t++) begin
      if (t == 2000) reseed_en = 0;
      if (t >= 3000) in_valid = 1;                       // back-to-back phase
      else if (!in_valid || sample_load) in_valid = ($urandom % 3) == 0;
      len_log2 = 2'($urandom % 4);
      #1;
      e_push  = busy && m_cyc == (1 << m_len) - 1;
      e_ready = !busy || (e_push && m_node == N - 1);
      e_acc   = in_valid && e_ready;
      e_start = e_acc || (e_push && m_node != N - 1);
      e_snode = e_acc ? 0 : m_node + 1;
      chk(step == busy, "step");
      chk(push == e_push, "push");
      chk(in_ready == e_ready, "in_ready");
      chk(sample_load == e_acc, "sample_load");
      chk(reseed == (e_start && (reseed_en || !seeded)), "reseed");
      if (e_start) chk(int'(seed_node) == e_snode, "seed_node");
      if (busy) chk(int'(node) == m_node && last_node == (m_node == N - 1), "node index");
      if (busy) chk(int'(len_q) == m_len, "held stream length");
      chk(stall == (e_ready && !in_valid && seeded), "stall");
      if (stall) stalls++;
      if (e_acc) begin
        if (last_acc >= 0) begin
          if (t - last_acc == N * (1 << prev_len)) tight_seen++;
          else begin
            gaps_seen++;
            chk(t - last_acc > N * (1 << prev_len), "accepts never closer than N*2^len clocks");
          end
        end
        if (t >= 3002) chk(t - last_acc == N * (1 << prev_len), "back-to-back sample period N*2^len");
        last_acc = t; accepts++;
      end
      @(posedge clk);
      if (e_acc) begin
        m_len = (int'(len_log2) > 2) ? 2 : int'(len_log2);
        prev_len = m_len;
        if (m_len < 2) short_seen++;
      end
      if (e_start) begin busy = 1; seeded = 1; m_cyc = 0; m_node = e_snode; end
      else if (e_push) begin busy = 0; m_cyc = 0; end
      else if (busy) m_cyc++;
      @(negedge clk);
    end
    chk(stalls > 0 && gaps_seen > 0 && tight_seen > 0 && accepts > 100 && short_seen > 0, "all situations reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
