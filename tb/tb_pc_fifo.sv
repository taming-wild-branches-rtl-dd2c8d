// tb_pc_fifo -- self-checking testbench for the H2P PC queue.
//
// Random pushes and pops (never pushing when full or popping when empty)
// are compared against a queue model: head value, count, full and empty
// flags every cycle, with a fill to the full 64 entries and a drain.
module tb_pc_fifo;
  import bullseye_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push, pop, empty, full;
  pc_t  din, dout;
  logic [6:0] count;
  int checks = 0, failures = 0;
  pc_t model[$];

  always #5 clk = ~clk;

  pc_fifo dut (.*);

  task automatic check_state();
    checks++;
    if (count != 7'(model.size()) || empty != (model.size() == 0) ||
        full != (model.size() == 64) || (model.size() > 0 && dout != model[0])) begin
      failures++;
      $display("FAIL count=%0d model=%0d empty=%0b full=%0b", count, model.size(), empty, full);
    end
  endtask

  task automatic step(input bit do_push, input bit do_pop);
    pc_t v;
    v = {$urandom, $urandom};
    push = do_push && !full;
    pop  = do_pop && !empty;
    din  = v;
    @(posedge clk); #1;
    if (pop) void'(model.pop_front());
    if (push) model.push_back(v);
    push = 0; pop = 0;
    check_state();
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    check_state();
    for (int i = 0; i < 70; i++) step(1, 0);     // fill past full
    checks++; if (!full) begin failures++; $display("FAIL not full"); end
    for (int i = 0; i < 10; i++) step(1, 1);     // push+pop while full
    for (int i = 0; i < 500; i++) step($urandom_range(0, 1), $urandom_range(0, 1));
    for (int i = 0; i < 70; i++) step(0, 1);     // drain
    checks++; if (!empty) begin failures++; $display("FAIL not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
