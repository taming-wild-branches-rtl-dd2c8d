// tb_global_perceptron -- self-checking testbench for the folded global
// history perceptron.
//
// A reference model written here (history register, weights, bias, sum,
// training and threshold) is stepped alongside the block on a stream that
// mixes random non-H2P branches (history shift only) with instances of two
// H2P branches in slots 0 and 5: slot 0's outcome repeats the outcome seen
// three branches earlier, slot 5's is the inverse of the one seen seven
// branches earlier. Every H2P instance compares out, pred and mag_high with
// the model; at the end both slots must predict at least 95 % of their last
// 300 instances. A re-allocated slot must restart from zero weights.
module tb_global_perceptron;
  import bullseye_pkg::*;

  localparam int WG = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pred, mag_high, shift, upd, taken, alloc;
  logic [3:0] lk_slot, alloc_slot;
  logic signed [21:0] out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  global_perceptron dut (.*);

  bit [WG-1:0] m_ghr;
  int m_w   [16][WG];
  int m_bias[16][16];
  int m_th  [16];
  int m_tc  [16];

  function automatic int sat(int v, int lo, int hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int m_out(int s);
    int o;
    o = m_bias[s][m_ghr[3:0]];
    for (int i = 0; i < WG; i++) o += m_ghr[i] ? m_w[s][i] : -m_w[s][i];
    return o;
  endfunction

  function automatic void m_train(int s, bit tk);
    int o, mag;
    bit p;
    o = m_out(s);
    p = (o >= 0);
    mag = (o < 0) ? -o : o;
    if (p != tk || mag <= m_th[s]) begin
      for (int i = 0; i < WG; i++) m_w[s][i] = sat(m_w[s][i] + ((m_ghr[i] == tk) ? 1 : -1), -2048, 2047);
      m_bias[s][m_ghr[3:0]] = sat(m_bias[s][m_ghr[3:0]] + (tk ? 1 : -1), -512, 511);
    end
    if (p != tk) begin
      if (m_tc[s] == 63) begin m_tc[s] = 0; m_th[s]++; end else m_tc[s]++;
    end else if (mag <= m_th[s]) begin
      if (m_tc[s] == -64) begin m_tc[s] = 0; if (m_th[s] > 0) m_th[s]--; end else m_tc[s]--;
    end
  endfunction

  task automatic do_alloc(int s);
    alloc = 1; alloc_slot = 4'(s);
    @(posedge clk); #1;
    alloc = 0;
    for (int i = 0; i < WG; i++) m_w[s][i] = 0;
    for (int b = 0; b < 16; b++) m_bias[s][b] = 0;
    m_th[s] = WG; m_tc[s] = 0;
  endtask

  // one branch: h2p = 1 trains slot s
  task automatic step(bit h2p, int s, bit tk, inout int good);
    lk_slot = 4'(s); taken = tk; shift = 1; upd = h2p;
    #1;
    if (h2p) begin
      int o, mag;
      o = m_out(s);
      mag = (o < 0) ? -o : o;
      checks++;
      if (int'(out) != o || pred != (o >= 0) || mag_high != (mag > m_th[s])) begin
        failures++;
        if (failures < 10) $display("FAIL slot=%0d out=%0d model=%0d", s, out, o);
      end
      if (pred == tk) good++;
      m_train(s, tk);
    end
    @(posedge clk); #1;
    shift = 0; upd = 0;
    m_ghr = {m_ghr[WG-2:0], tk};
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int g0, g5, dummy;
    shift = 0; upd = 0; taken = 0; alloc = 0; lk_slot = 0; alloc_slot = 0;
    m_ghr = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    do_alloc(0);
    do_alloc(5);
    g0 = 0; g5 = 0; dummy = 0;
    for (int n = 0; n < 2000; n++) begin
      int a, b;
      step(0, 0, 1'($urandom_range(0, 1)), dummy);
      step(0, 0, 1'($urandom_range(0, 1)), dummy);
      a = 0;
      step(1, 0, m_ghr[2], a);
      b = 0;
      step(1, 5, !m_ghr[6], b);
      if (n >= 1700) begin g0 += a; g5 += b; end
    end
    checks++;
    if (g0 < 285) begin failures++; $display("FAIL slot0 acc %0d/300", g0); end
    checks++;
    if (g5 < 285) begin failures++; $display("FAIL slot5 acc %0d/300", g5); end
    do_alloc(0);
    for (int n = 0; n < 20; n++) step(1, 0, 1'b1, dummy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
