// tb_tdr_top: end-to-end testbench of the whole reservoir at its default
// size (N = 50 nodes, L = 128 bits, 16-bit words, Bernstein order 10).
//
// A reference model computes, node by node and bit by bit, what the
// reservoir must produce: it keeps its own copies of the 17 LFSRs, the held
// sample, the s delay line of the neuron, the S2B count and the N+1-word
// delay loop, and follows the specification (re-seeding with each node's
// seeds, s = half ? (alpha_sel ? XNOR(u,w_i) : x_(i-N-1)) : theta, Bernstein
// selection by the count of s copies, count scaled by 2^15/L and clipped).
// Every node_x word and every state_x vector of the DUT is compared with it.
//
// The run walks through the mechanisms of the design and counts each:
// back-to-back samples (no idle clock between samples), input stalls,
// parameter writes between samples, both seeding modes (re-seed per node
// and seed-once), and S2B saturation (all coefficients at +1). Timing is
// checked too: node i's word appears (i+1)*S + 1 clocks after its sample
// is accepted, and back-to-back samples are accepted N*S clocks apart, for
// the stream lengths S = 128 (default), 16 and 64 chosen at run time.
module tb_tdr_top;
  import tdr_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 50, L = 128, ORDER = 10, NW = 6, IW = 8, NSRC = 6 + ORDER + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, reseed_en = 1, cfg_we = 0;
  logic [2:0] len_log2 = 3'd7;          // stream length 128
  logic signed [15:0] in_sample = '0;
  cfg_sel_e cfg_sel = CFG_WEIGHT;
  logic [IW-1:0] cfg_idx = '0;
  logic [15:0] cfg_data = '0;
  logic node_valid, state_valid, stall, s2b_saturated;
  logic [NW-1:0] node_idx;
  logic signed [15:0] node_x;
  logic signed [N-1:0][15:0] state_x;

  tdr_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #20_000_000;   // 2M clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ---------------- reference model ----------------
  logic [15:0] r [NSRC];
  bit          seeded = 0;
  logic [15:0] m_mask [N];
  logic [15:0] m_coef [ORDER+1];
  logic [15:0] m_bias, m_alpha;
  logic [15:0] m_sr [N];      // m_sr[0] newest
  logic [15:0] m_old;
  bit          m_dly [ORDER-1];
  bit          m_reseed_en;

  typedef struct { int idx; logic [15:0] x; bit sat; } exp_t;
  exp_t        exp_q [$];
  typedef logic [N-1:0][15:0] vec_t;
  vec_t        exp_state [$];

  // Run one input sample through the model, queueing the expected outputs.
  task automatic model_sample(input logic [15:0] u, input int len);
    int cnt, v, xv;
    bit ub, wb, thb, ab, hb, xb, s, o;
    vec_t st;
    for (int i = 0; i < N; i++) begin
      if (m_reseed_en || !seeded)
        for (int id = 0; id < NSRC; id++) r[id] = seed16(i, id);
      seeded = 1;
      cnt = 0;
      for (int c = 0; c < len; c++) begin
        ub  = b2s_bit(r[0], u);
        wb  = b2s_bit(r[1], m_mask[i]);
        thb = b2s_bit(r[2], m_bias);
        ab  = (r[3] ^ 16'h8000) <= m_alpha;
        hb  = $signed(r[4]) <= 0;
        xb  = b2s_bit(r[5], m_old);
        s   = hb ? (ab ? (ub == wb) : xb) : thb;
        v   = int'(s);
        foreach (m_dly[k]) v += int'(m_dly[k]);
        o   = b2s_bit(r[6 + v], m_coef[v]);
        cnt += o ? 1 : -1;
        for (int k = ORDER - 2; k > 0; k--) m_dly[k] = m_dly[k-1];
        m_dly[0] = s;
        for (int id = 0; id < NSRC; id++) r[id] = lfsr16_next(r[id]);
      end
      xv = cnt * (32768 / len);
      exp_q.push_back('{idx: i, x: 16'((xv > 32767) ? 32767 : xv), sat: xv > 32767});
      m_old = m_sr[N-1];
      for (int k = N - 1; k > 0; k--) m_sr[k] = m_sr[k-1];
      m_sr[0] = 16'((xv > 32767) ? 32767 : xv);
    end
    for (int k = 0; k < N; k++) st[k] = m_sr[k];
    exp_state.push_back(st);
  endtask

  // ---------------- output checking ----------------
  int n_nodes = 0, n_states = 0, n_sat = 0, n_stall = 0, n_b2b = 0, n_cfg = 0;
  int n_seed_once = 0, n_seed_each = 0;
  longint acc_cycle [$];
  int     acc_len [$];
  int     n_len16 = 0, n_len64 = 0, n_len128 = 0;
  longint last_acc = -1;
  int node_in_sample = 0;

  always @(negedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (node_valid) begin
      exp_t e;
      n_nodes++;
      if (s2b_saturated) n_sat++;
      if (exp_q.size() == 0) chk(0, "unexpected node_valid");
      else begin
        e = exp_q.pop_front();
        chk(int'(node_idx) == e.idx && node_x == e.x && s2b_saturated == e.sat,
            $sformatf("node %0d: x=%0d expected %0d", e.idx, node_x, $signed(e.x)));
        // latency: node i appears (i+1)*L + 1 clocks after its accept
        if (e.idx == 0) node_in_sample = 0;
        chk(acc_cycle.size() > 0 &&
            cyc - acc_cycle[0] == longint'((e.idx + 1) * acc_len[0] + 1), "node latency");
        if (e.idx == N - 1) begin
          void'(acc_cycle.pop_front());
          void'(acc_len.pop_front());
        end
      end
    end
    if (state_valid) begin
      n_states++;
      if (exp_state.size() == 0) chk(0, "unexpected state_valid");
      else begin
        vec_t st;
        st = exp_state.pop_front();
        chk(state_x == st, "state vector");
      end
    end
  end

  // Input handshake rule: the offered sample holds until it is taken.
  logic prev_wait = 0;
  logic [15:0] prev_sample;
  always @(posedge clk) begin
    if (prev_wait) assert (in_valid && in_sample == prev_sample)
      else begin failures++; $display("FAIL handshake rule"); end
    prev_wait   <= in_valid && !in_ready;
    prev_sample <= in_sample;
  end

  // ---------------- stimulus ----------------
  task automatic send(input logic [15:0] u);
    @(negedge clk);
    in_valid = 1; in_sample = u;
    do @(posedge clk); while (!in_ready);
    // accepted at this edge
    if (last_acc >= 0 && acc_cycle.size() > 0) begin
      chk(cyc - 1 - last_acc == N * acc_len[$], "back-to-back period N*2^len");
      n_b2b++;
    end
    last_acc = cyc - 1;
    acc_cycle.push_back(cyc);
    acc_len.push_back(1 << len_log2);
    case (len_log2) 3'd4: n_len16++; 3'd6: n_len64++; 3'd7: n_len128++; default: ; endcase
    if (m_reseed_en) n_seed_each++; else n_seed_once++;
    model_sample(u, 1 << len_log2);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic write_cfg(input cfg_sel_e sel, input int idx, input logic [15:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_idx = IW'(idx); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
    n_cfg++;
    case (sel)
      CFG_WEIGHT: m_mask[idx] = d;
      CFG_COEF:   m_coef[idx] = d;
      CFG_BIAS:   m_bias = d;
      CFG_ALPHA:  m_alpha = d;
      default: ;
    endcase
  endtask

  task automatic wait_idle();
    do @(negedge clk); while (!(in_ready && exp_q.size() == 0));
    repeat (3) @(negedge clk);
  endtask

  // Send `n` samples back to back: the next one is offered while the
  // current one runs.
  task automatic burst(input int n);
    for (int j = 0; j < n; j++) begin
      logic [15:0] u = 16'($urandom);
      send(u);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) m_mask[i] = mask_default(i)[31:16];
    for (int k = 0; k <= ORDER; k++) m_coef[k] = coef_default(k);
    m_bias = BIAS_DEF; m_alpha = ALPHA_DEF;
    foreach (m_sr[k]) m_sr[k] = 0;
    foreach (m_dly[k]) m_dly[k] = 0;
    m_old = 0; m_reseed_en = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. re-seeding mode, default parameters, four samples back to back
    burst(4);
    wait_idle();
    // 2. parameter writes between samples: new mask entries, alpha, bias
    for (int i = 0; i < N; i += 7) write_cfg(CFG_WEIGHT, i, 16'($urandom));
    write_cfg(CFG_ALPHA, 0, 16'd19661);       // alpha = 0.3
    write_cfg(CFG_BIAS, 0, -16'sd6554);       // theta = -0.2
    burst(2);
    // 3. stall: idle gap, then switch to seed-once mode
    wait_idle();
    repeat (50) @(negedge clk);
    reseed_en = 0; m_reseed_en = 0;
    burst(3);
    wait_idle();
    // 4. saturation: every coefficient at +1 makes every node stream all ones
    for (int k = 0; k <= ORDER; k++) write_cfg(CFG_COEF, k, 16'h7FFF);
    burst(1);
    wait_idle();
    // 5. back to re-seeding with the default coefficients
    for (int k = 0; k <= ORDER; k++) write_cfg(CFG_COEF, k, coef_default(k));
    reseed_en = 1; m_reseed_en = 1;
    burst(2);
    wait_idle();
    // 6. shorter streams chosen at run time: L = 16, then 64
    len_log2 = 3'd4;
    burst(3);
    wait_idle();
    len_log2 = 3'd6;
    burst(2);
    wait_idle();

    chk(n_nodes == 17 * N, $sformatf("node words seen %0d", n_nodes));
    chk(n_states == 17, "state vectors seen");
    $display("mechanisms: back-to-back=%0d stall-cycles=%0d cfg-writes=%0d seed-each=%0d seed-once=%0d saturated=%0d L16=%0d L64=%0d L128=%0d",
             n_b2b, n_stall, n_cfg, n_seed_each, n_seed_once, n_sat, n_len16, n_len64, n_len128);
    chk(n_len16 > 0 && n_len64 > 0 && n_len128 > 0, "stream lengths 16, 64 and 128 ran");
    chk(n_b2b > 0, "back-to-back samples happened");
    chk(n_stall > 0, "input stall happened");
    chk(n_cfg > 0, "parameter writes happened");
    chk(n_seed_each > 0 && n_seed_once > 0, "both seeding modes ran");
    chk(n_sat > 0, "S2B saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
