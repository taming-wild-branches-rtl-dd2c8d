// tb_hit -- self-checking testbench for the H2P identification table.
//
// Streams branches with a fixed misprediction period through the table at
// several H2P populations N and checks, every cycle, that the registered
// flag rises exactly one cycle after the instance at which the reference
// rule (computed here with real arithmetic from the accuracy formula f(N))
// first holds, that the flagged PC is right, that a flagged branch must
// re-qualify from zero, and that a resident branch never fires.
module tb_hit;
  import bullseye_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic upd_valid, upd_mispred, resident, flag;
  pc_t  upd_pc, flag_pc;
  logic [6:0] n_h2p;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hit dut (.*);

  function automatic real f_of(int n);
    if (n < 32)       return 1.0 - 0.01 * n / 32.0;
    else if (n <= 71) return 0.95 - 0.01 * (n - 32);
    else              return 0.60;
  endfunction

  function automatic bit ref_fire(int e, int m, int n);
    real acc;
    acc = 1.0 - real'(m) / real'(e);
    return (e >= 2048 + 16 * n) && (m >= 256) && (acc < f_of(n));
  endfunction

  // Stream `count` executions of `pc`, every `period`-th mispredicted.
  // Returns the number of fires observed.
  task automatic stream(input pc_t pc, input int n, input int period, input int count,
                        input bit res, output int fires);
    int e, m;
    bit exp_fire;
    e = 0; m = 0; exp_fire = 0; fires = 0;
    n_h2p = 7'(n);
    for (int i = 1; i <= count; i++) begin
      bit mp;
      mp = (i % period) == 0;
      upd_valid = 1'b1; upd_pc = pc; upd_mispred = mp; resident = res;
      e++; if (mp) m++;
      exp_fire = !res && ref_fire(e, m, n);
      @(posedge clk); #1;
      checks++;
      if (flag !== exp_fire) begin
        failures++;
        $display("FAIL pc=%h i=%0d flag=%0b exp=%0b", pc, i, flag, exp_fire);
      end
      if (flag) begin
        fires++;
        checks++;
        if (flag_pc !== pc) begin failures++; $display("FAIL flag_pc"); end
      end
      if (exp_fire) begin e = 0; m = 0; end
    end
    upd_valid = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (flag !== 1'b0) begin failures++; $display("FAIL tail flag pc=%h", pc); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fires;
    upd_valid = 0; upd_pc = '0; upd_mispred = 0; resident = 0; n_h2p = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // N = 0, 25 % mispredicted: fires at exactly 2048 executions, then again
    // after a further 2048.
    stream(62'h100, 0, 4, 4100, 0, fires);
    checks++; if (fires != 2) begin failures++; $display("FAIL A fires=%0d", fires); end

    // N = 0, 1/16 mispredicted: execution bound met at 2048 but only 128
    // mispredictions; must wait for the 256-misprediction floor (4096).
    stream(62'h2345, 0, 16, 4200, 0, fires);
    checks++; if (fires != 1) begin failures++; $display("FAIL B fires=%0d", fires); end

    // N = 40 (f = 0.87): 10 % mispredicted never qualifies ...
    stream(62'h3_0007, 40, 10, 6000, 0, fires);
    checks++; if (fires != 0) begin failures++; $display("FAIL C fires=%0d", fires); end
    // ... 20 % does, at the raised execution bound 2048+640.
    stream(62'h4_1009, 40, 5, 3000, 0, fires);
    checks++; if (fires != 1) begin failures++; $display("FAIL D fires=%0d", fires); end

    // N = 100 (f = 0.60): 1/3 mispredicted (acc 0.67) never qualifies,
    // 1/2 mispredicted does once Exec >= 3648.
    stream(62'h5_200b, 100, 3, 5000, 0, fires);
    checks++; if (fires != 0) begin failures++; $display("FAIL E fires=%0d", fires); end
    stream(62'h6_300d, 100, 2, 4000, 0, fires);
    checks++; if (fires != 1) begin failures++; $display("FAIL F fires=%0d", fires); end

    // Resident branch never fires.
    stream(62'h7_400f, 0, 2, 3000, 1, fires);
    checks++; if (fires != 0) begin failures++; $display("FAIL G fires=%0d", fires); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
