// tb_local_perceptron -- self-checking testbench for the hashed-window
// local-history perceptron.
//
// A reference model written here (its own window, hash, sum, training and
// threshold code) is stepped alongside the block. Checks: `ready` rises
// exactly 2^8 cycles after reset; on every branch the block's output, its
// prediction and its |out| > theta flag equal the model's; two slots learn
// periodic local patterns (period 2 and period 3), reaching at least 95 %
// accuracy over the last 300 instances; re-allocating a slot clears its
// history and threshold.
module tb_local_perceptron;
  import bullseye_pkg::*;

  localparam int NT = 64, LH = 124;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ready, pred, mag_high, upd, taken, alloc;
  logic [4:0] lk_slot, alloc_slot;
  pc_t lk_pc;
  logic signed [19:0] out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  local_perceptron dut (.*);

  // ---------------- reference model ----------------
  int          m_w   [NT][256];
  bit [LH-1:0] m_hist[32];
  int          m_bias[32][2];
  int          m_th  [32];
  int          m_tc  [32];

  function automatic bit window_parity(bit [LH-1:0] h, int i);
    int st, wd;
    bit p;
    st = 3 * i;
    wd = 4 << ((i < 4) ? i : 4);
    p = 0;
    for (int b = st; b < st + wd && b < LH; b++) p ^= h[b];
    return p;
  endfunction

  function automatic int m_index(pc_t pc, bit [LH-1:0] h, int t);
    bit [31:0] x;
    int i, k;
    i = t / 2; k = t % 2;
    x = pc[31:0] ^ {2'b0, pc[61:32]};
    x = x ^ (32'(2 * i + k + 1) * 32'h9E3779B9) ^ 32'(window_parity(h, i));
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return int'(x[7:0]);
  endfunction

  function automatic int m_out(int s, pc_t pc);
    int o;
    o = m_bias[s][m_hist[s][0]];
    for (int t = 0; t < NT; t++) o += m_w[t][m_index(pc, m_hist[s], t)];
    return o;
  endfunction

  function automatic int sat(int v, int lo, int hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic void m_train(int s, pc_t pc, bit tk);
    int o, mag, d;
    bit p;
    o = m_out(s, pc);
    p = (o >= 0);
    mag = (o < 0) ? -o : o;
    d = tk ? 1 : -1;
    if (p != tk || mag <= m_th[s]) begin
      for (int t = 0; t < NT; t++) begin
        int ix;
        ix = m_index(pc, m_hist[s], t);
        m_w[t][ix] = sat(m_w[t][ix] + d, -512, 511);
      end
      m_bias[s][m_hist[s][0]] = sat(m_bias[s][m_hist[s][0]] + d, -2048, 2047);
    end
    if (p != tk) begin
      if (m_tc[s] == 63) begin m_tc[s] = 0; if (m_th[s] < 1023) m_th[s]++; end
      else m_tc[s]++;
    end else if (mag <= m_th[s]) begin
      if (m_tc[s] == -64) begin m_tc[s] = 0; if (m_th[s] > 0) m_th[s]--; end
      else m_tc[s]--;
    end
    m_hist[s] = {m_hist[s][LH-2:0], tk};
  endfunction

  // ---------------- stimulus ----------------
  int correct_recent [2];

  task automatic do_alloc(int s);
    alloc = 1; alloc_slot = 5'(s);
    @(posedge clk); #1;
    alloc = 0;
    m_hist[s] = '0; m_bias[s][0] = 0; m_bias[s][1] = 0; m_th[s] = NT; m_tc[s] = 0;
  endtask

  task automatic step(int s, pc_t pc, bit tk, bit count_it);
    int o, mag;
    lk_slot = 5'(s); lk_pc = pc; taken = tk; upd = 1;
    #1;
    o = m_out(s, pc);
    mag = (o < 0) ? -o : o;
    checks++;
    if (int'(out) != o || pred != (o >= 0) || mag_high != (mag > m_th[s])) begin
      failures++;
      if (failures < 10) $display("FAIL slot=%0d out=%0d model=%0d", s, out, o);
    end
    if (count_it && pred == tk) correct_recent[s]++;
    @(posedge clk); #1;
    upd = 0;
    m_train(s, pc, tk);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    upd = 0; taken = 0; alloc = 0; lk_slot = 0; alloc_slot = 0; lk_pc = '0;
    for (int t = 0; t < NT; t++) for (int e = 0; e < 256; e++) m_w[t][e] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != 256) begin failures++; $display("FAIL ready after %0d", cyc); end

    do_alloc(0);
    do_alloc(1);
    correct_recent[0] = 0; correct_recent[1] = 0;
    for (int n = 0; n < 1500; n++) begin
      step(0, 62'h1234, n % 2 == 0, n >= 1200);
      step(1, 62'h2_0777, n % 3 != 0, n >= 1200);
    end
    checks++;
    if (correct_recent[0] < 285) begin failures++; $display("FAIL slot0 acc %0d/300", correct_recent[0]); end
    checks++;
    if (correct_recent[1] < 285) begin failures++; $display("FAIL slot1 acc %0d/300", correct_recent[1]); end

    // re-allocation clears history and threshold: compare with model again
    do_alloc(0);
    for (int n = 0; n < 50; n++) step(0, 62'h5_5555, 1'b1, 1'b0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
