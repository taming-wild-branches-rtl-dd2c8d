// tb_tage_filter -- self-checking testbench for selective TAGE filtering.
//
// Checks that a slot becomes filtered exactly after 128 consecutive correct
// strong perceptron predictions (not after 127), that a wrong prediction
// restarts the count, that losing strong confidence revokes filtering at
// once, that allocation clears the slot, and that slots are independent.
module tb_tage_filter;
  logic clk = 1'b0, rst_n = 1'b0;
  logic br_valid, hit, perc_strong, perc_correct, alloc, filtered;
  logic [4:0] slot, alloc_slot;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tage_filter dut (.*);

  // one branch on `s`; check the combinational `filtered` before the edge
  task automatic br(input int s, input bit st, input bit ok, input bit exp_filt);
    br_valid = 1; hit = 1; slot = 5'(s); perc_strong = st; perc_correct = ok;
    #1;
    checks++;
    if (filtered !== exp_filt) begin
      failures++;
      $display("FAIL slot=%0d strong=%0b filtered=%0b exp=%0b", s, st, filtered, exp_filt);
    end
    @(posedge clk); #1;
    br_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    br_valid = 0; hit = 0; slot = 0; perc_strong = 0; perc_correct = 0; alloc = 0; alloc_slot = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // 100 correct, one wrong, then 128 correct needed from scratch
    for (int i = 0; i < 100; i++) br(3, 1, 1, 0);
    br(3, 1, 0, 0);
    for (int i = 0; i < 128; i++) br(3, 1, 1, 0);
    // now filtered
    br(3, 1, 1, 1);
    // other slot not filtered
    br(4, 1, 1, 0);
    // a wrong prediction does not revoke an active filter
    br(3, 1, 0, 1);
    br(3, 1, 1, 1);
    // losing strong confidence revokes at once and resets
    br(3, 0, 1, 0);
    br(3, 1, 1, 0);
    for (int i = 0; i < 127; i++) br(3, 1, 1, 0);
    br(3, 1, 1, 1);
    // allocation clears the slot
    alloc = 1; alloc_slot = 3;
    @(posedge clk); #1;
    alloc = 0;
    br(3, 1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
