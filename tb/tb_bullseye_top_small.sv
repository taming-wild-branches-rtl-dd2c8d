// tb_bullseye_top_small -- end-to-end test of the Bullseye subsystem with
// small queues and caches and the alternative arbiter rule (TAGE_GATE = 1).
//
// Sizes: 4 local and 2 global cache slots, 2-entry PC queues. Twelve hard
// branches (periodic patterns, TAGE-SC-L stand-in wrong on 25 % of
// instances) qualify at about the same time, so more PCs are flagged than
// the caches and queues can hold and some must be dropped. The stand-in
// reports a usefulness of 3 ("strong") on a random half of the instances.
// Checked on every branch: with TAGE_GATE = 1 no perceptron overrides a
// strong TAGE-SC-L; a TAGE-SC-L-sourced prediction equals TAGE-SC-L's.
// Mechanisms that must occur: flag, queue drop, admissions on both sides,
// overrides (on weak-TAGE instances only), filtering.
module tb_bullseye_top_small;
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
  int n_flag, n_drop, n_lalloc, n_galloc, n_over, n_filt;

  always #5 clk = ~clk;

  bullseye_top #(
    .LOCAL_ENTRIES(4), .GLOBAL_ENTRIES(2), .FIFO_DEPTH(2), .TAGE_GATE(1'b1)
  ) dut (.*);

  function automatic void chk(bit cond, int id);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL check %0d at %0t", id, $time);
    end
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      n_flag   += int'(events.h2p_flag);
      n_drop   += int'(events.fifo_drop);
      n_lalloc += int'(events.local_alloc);
      n_galloc += int'(events.global_alloc);
      n_over   += int'(events.perc_override);
      n_filt   += int'(events.filtered);
    end
  end

  task automatic branch(input pc_t pc, input bit tk, input bit tage_ok, input bit t_strong);
    br_valid = 1; br_pc = pc; br_taken = tk;
    tage_pred = tage_ok ? tk : !tk;
    tage_u = t_strong ? 2'd3 : 2'd1;
    #1;
    if (pred_src == SRC_TAGE) chk(pred == tage_pred, 1);
    if (t_strong) chk(pred_src == SRC_TAGE, 2);
    chk(tage_upd_en == !events.filtered, 3);
    @(posedge clk); #1;
    br_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    br_valid = 0; br_pc = '0; br_taken = 0; tage_pred = 0; tage_u = 0;
    sc_override = 0; sc_mag = 0;
    {n_flag, n_drop, n_lalloc, n_galloc, n_over, n_filt} = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!ready) begin @(posedge clk); #1; end
    for (int r = 0; r < 4500; r++) begin
      for (int i = 0; i < 12; i++)
        branch(62'h4_0000 + 62'(i) * 62'd65, (r % (2 + i % 3)) == 0,
               $urandom_range(0, 3) != 0, 1'($urandom_range(0, 1)));
    end
    $display("events: flag=%0d drop=%0d lalloc=%0d galloc=%0d override=%0d filtered=%0d",
             n_flag, n_drop, n_lalloc, n_galloc, n_over, n_filt);
    chk(n_flag >= 12, 10);
    chk(n_drop > 0, 11);
    chk(n_lalloc >= 4, 12);
    chk(n_galloc >= 2, 13);
    chk(n_over > 0, 14);
    chk(n_filt > 0, 15);
    chk(n_h2p == 7'd4, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
