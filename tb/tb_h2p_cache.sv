// tb_h2p_cache -- self-checking testbench for the H2P cache.
//
// Fills all 32 slots from the admission port, checks duplicates are dropped
// and that a full cache holds a waiting PC back while no entry may be
// evicted. It then runs one entry through its 512-occurrence warm-up,
// drives decisive perceptron/TAGE-SC-L outcomes against a reference model
// of the relative-performance and confidence counters (checking win_high),
// drives the confidence to saturation in favour of TAGE-SC-L and checks the
// eviction, and finally checks the 2^16-branch stale timeout, one branch
// short and exactly at it.
module tb_h2p_cache;
  import bullseye_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic br_valid, perc_correct, tage_correct, hit, warm, win_high;
  pc_t  br_pc, adm_pc;
  logic adm_valid, adm_pop, alloc, evict;
  logic [4:0] hit_slot, alloc_slot;
  logic [5:0] occupancy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  h2p_cache dut (.*);

  function automatic void chk(input bit cond, input int id);
    checks++;
    if (!cond) begin failures++; $display("FAIL check %0d", id); end
  endfunction

  // model of one entry's rp/conf
  int m_rp, m_conf;
  task automatic model_event(input bit pw);
    bit trend;
    trend = m_rp > 0;
    m_rp = pw ? m_rp + 9 : m_rp - 11;
    if (m_rp > 31) m_rp = 31;
    if (m_rp < -32) m_rp = -32;
    if (pw == trend) m_conf = (m_conf < 255) ? m_conf + 1 : 255;
    else m_conf = m_conf / 2;
  endtask

  task automatic branch(input pc_t pc, input bit pc_ok, input bit tg_ok);
    br_valid = 1; br_pc = pc; perc_correct = pc_ok; tage_correct = tg_ok;
    @(posedge clk); #1;
    br_valid = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s5, s6;
    br_valid = 0; br_pc = '0; perc_correct = 0; tage_correct = 0; adm_valid = 0; adm_pc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    chk(occupancy == 0, 1);

    // fill slots 0..31 with PCs 1..32
    for (int i = 0; i < 32; i++) begin
      adm_valid = 1; adm_pc = 62'(i + 1);
      #1;
      chk(adm_pop && alloc && !evict && alloc_slot == 5'(i), 2);
      @(posedge clk); #1;
    end
    chk(occupancy == 32, 3);
    adm_pc = 62'd7; #1;
    chk(adm_pop && !alloc, 4);
    adm_pc = 62'd100; #1;
    chk(!adm_pop && !alloc, 5);
    adm_valid = 0;

    // lookup
    br_pc = 62'd5; br_valid = 0; #1;
    chk(hit && hit_slot == 5'd4, 6);
    br_pc = 62'd999; #1;
    chk(!hit, 7);
    s5 = 4;

    // warm-up: warm after 511 references
    for (int i = 1; i <= 511; i++) begin
      br_pc = 62'd5; #1;
      chk(!warm, 8);
      branch(62'd5, 1, 1);
    end
    br_pc = 62'd5; #1;
    chk(warm, 9);

    // decisive events against the model
    m_rp = 0; m_conf = 0;
    for (int i = 0; i < 300; i++) begin
      bit pw;
      pw = ($urandom_range(0, 99) < 60);
      br_pc = 62'd5; #1;
      chk(win_high == (m_rp > 0), 10);
      branch(62'd5, pw, !pw);
      model_event(pw);
      // non-decisive instances leave the counters alone
      branch(62'd5, 1, 1);
    end
    // drive TAGE-SC-L wins until confidence saturates for TAGE-SC-L
    adm_valid = 1; adm_pc = 62'd100;
    for (int i = 0; i < 400 && !(m_conf == 255 && m_rp <= 0); i++) begin
      br_valid = 0; #1;
      chk(!adm_pop, 11);
      branch(62'd5, 0, 1);
      model_event(0);
    end
    chk(m_conf == 255, 12);
    br_valid = 1; br_pc = 62'd5; perc_correct = 0; tage_correct = 1; #1;
    chk(!alloc, 13);
    br_valid = 0; #1;
    chk(adm_pop && alloc && evict && alloc_slot == 5'(s5), 14);
    @(posedge clk); #1;
    adm_valid = 0;
    br_pc = 62'd100; #1;
    chk(hit && hit_slot == 5'(s5), 15);
    br_pc = 62'd5; #1;
    chk(!hit, 16);

    // stale timeout on pc 6 (slot 5)
    s6 = 5;
    for (int i = 0; i < 511; i++) branch(62'd6, 1, 1);
    for (int i = 0; i < 65534; i++) branch(62'd7, 1, 1);
    adm_valid = 1; adm_pc = 62'd101; #1;
    chk(!adm_pop, 17);
    branch(62'd7, 1, 1);
    #1;
    chk(adm_pop && evict && alloc_slot == 5'(s6), 18);
    @(posedge clk); #1;
    adm_valid = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
