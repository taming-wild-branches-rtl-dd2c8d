// tb_bullseye_top -- end-to-end testbench of the Bullseye subsystem at its
// default sizes.
//
// A behavioural stand-in for TAGE-SC-L is built into the stimulus: for the
// hard branches it is wrong on a random 25 % of instances, for one easy
// branch it is always right. The hard branches follow short periodic local
// patterns (period 2, 3 or 4) that a local-history perceptron can learn.
// The trace runs in phases:
//   A  32 hard branches + the easy one, round robin, until all 32 have been
//      flagged by the identification table (the first exactly at its 2048th
//      execution) and admitted (all 32 into the local cache, the first 16
//      into the global cache, the rest waiting in the global FIFO);
//   B  the same branches keep running: warm-up ends, perceptrons take over
//      (overrides), long correct streaks turn TAGE-SC-L filtering on; the
//      final accuracy on the hard branches must reach 90 % and beat the 75 %
//      of the stand-in;
//   C  only branches 16..31 and the easy one run for more than 2^16
//      branches: entries 0..15 go stale and the waiting global PCs evict
//      them from the global cache;
//   D  four new hard branches qualify and evict stale entries of the full
//      local cache.
// Invariants checked on every branch: a TAGE-SC-L-sourced prediction equals
// TAGE-SC-L's, the easy branch is never flagged or overridden, the TAGE
// update enable is low exactly when the branch is filtered. Each mechanism
// (flag, local/global admission, local/global eviction, override,
// filtering) must occur at least once.
module tb_bullseye_top;
  import bullseye_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ready, br_valid, br_taken, tage_pred, sc_override, pred, tage_upd_en;
  pc_t  br_pc;
  logic [1:0] tage_u;
  logic [7:0] sc_mag;
  logic [6:0] n_h2p;
  pred_src_t pred_src;
  events_t events;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bullseye_top dut (.*);

  localparam int NP = 36;          // 32 + 4 late hard branches
  localparam pc_t EASY = 62'h7_7777;
  int exec_cnt [NP];
  int flag_cnt [NP];
  int n_flag, n_lalloc, n_galloc, n_levict, n_gevict, n_over, n_filt, n_drop;
  int good_final, good_tage, counted;
  pc_t last_pc;

  function automatic pc_t hard_pc(int i);
    return 62'h4_0000 + 62'(i) * 62'd65;   // distinct identification-table sets
  endfunction

  function automatic void chk(bit cond, int id);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL check %0d at %0t", id, $time);
    end
  endfunction

  // Event bookkeeping, sampled every cycle just before the edge.
  always @(posedge clk) begin
    if (rst_n) begin
      if (events.h2p_flag) begin
        n_flag++;
        for (int i = 0; i < NP; i++) if (dut.u_hit.flag_pc == hard_pc(i)) flag_cnt[i]++;
        chk(dut.u_hit.flag_pc != EASY, 1);
      end
      n_lalloc += int'(events.local_alloc);
      n_galloc += int'(events.global_alloc);
      n_levict += int'(events.local_evict);
      n_gevict += int'(events.global_evict);
      n_over   += int'(events.perc_override);
      n_filt   += int'(events.filtered);
      n_drop   += int'(events.fifo_drop);
    end
  end

  // One branch. Returns through `hit` whether the final prediction was right.
  task automatic branch(input pc_t pc, input bit tk, input bit tage_ok, output bit ok);
    br_valid = 1; br_pc = pc; br_taken = tk;
    tage_pred = tage_ok ? tk : !tk;
    tage_u = 2'($urandom_range(0, 2));
    #1;
    if (pred_src == SRC_TAGE) chk(pred == tage_pred, 2);
    if (pc == EASY) chk(pred_src == SRC_TAGE, 3);
    chk(tage_upd_en == !events.filtered, 4);
    ok = (pred == tk);
    @(posedge clk); #1;
    br_valid = 0;
  endtask

  function automatic bit pattern(int i, int n);
    int p;
    p = 2 + (i % 3);
    return (n % p) == 0;
  endfunction

  task automatic hard(int i, bit count_it);
    bit ok, tok;
    bit tk;
    tk  = pattern(i, exec_cnt[i]);
    tok = ($urandom_range(0, 3) != 0);
    exec_cnt[i]++;
    branch(hard_pc(i), tk, tok, ok);
    if (count_it) begin
      counted++;
      good_final += int'(ok);
      good_tage  += int'(tok);
    end
  endtask

  task automatic easy();
    bit ok;
    branch(EASY, 1'($urandom_range(0, 1)), 1'b1, ok);
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    br_valid = 0; br_pc = '0; br_taken = 0; tage_pred = 0; tage_u = 0;
    sc_override = 0; sc_mag = 0;
    for (int i = 0; i < NP; i++) begin exec_cnt[i] = 0; flag_cnt[i] = 0; end
    {n_flag, n_lalloc, n_galloc, n_levict, n_gevict, n_over, n_filt, n_drop} = '0;
    good_final = 0; good_tage = 0; counted = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1; cyc++; end
    chk(cyc == 256, 5);

    // Phase A: first flag exactly at the 2048th execution of branch 0.
    for (int r = 0; r < 2600; r++) begin
      for (int i = 0; i < 32; i++) begin
        hard(i, 1'b0);
        if (r == 2046 && i == 0) chk(!events.h2p_flag, 6);
        if (r == 2047 && i == 0) chk(events.h2p_flag && dut.u_hit.flag_pc == hard_pc(0), 7);
        if (r == 2046 && i == 1) chk(n_flag == 0, 8);
      end
      easy();
    end
    for (int i = 0; i < 32; i++) chk(flag_cnt[i] == 1, 9);
    chk(n_h2p == 7'd32, 10);
    chk(n_galloc == 16, 11);

    // Phase B: perceptrons take over.
    for (int r = 0; r < 1500; r++) begin
      for (int i = 0; i < 32; i++) hard(i, r >= 1200 && i < 16);
      easy();
    end
    $display("phase B: final %0d/%0d correct, TAGE-SC-L stand-in %0d/%0d",
             good_final, counted, good_tage, counted);
    chk(good_final * 10 >= counted * 9, 12);
    chk(good_final > good_tage, 13);

    // Phase C: branches 0..15 go stale.
    for (int r = 0; r < 4000; r++) begin
      for (int i = 16; i < 32; i++) hard(i, 1'b0);
      easy();
    end
    chk(n_gevict > 0, 14);

    // Phase D: four new hard branches evict stale local entries.
    for (int r = 0; r < 2700; r++) begin
      for (int i = 16; i < NP; i++) hard(i, 1'b0);
      easy();
    end
    for (int i = 32; i < NP; i++) chk(flag_cnt[i] == 1, 15);

    $display("events: flag=%0d lalloc=%0d galloc=%0d levict=%0d gevict=%0d override=%0d filtered=%0d fifo_drop=%0d",
             n_flag, n_lalloc, n_galloc, n_levict, n_gevict, n_over, n_filt, n_drop);
    chk(n_flag > 0, 20);
    chk(n_lalloc > 0, 21);
    chk(n_galloc > 0, 22);
    chk(n_levict > 0, 23);
    chk(n_gevict > 0, 24);
    chk(n_over > 0, 25);
    chk(n_filt > 0, 26);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
