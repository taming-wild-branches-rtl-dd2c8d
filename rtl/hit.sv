// hit -- H2P Identification Table.
//
// A set-associative table that keeps, for each recently seen static branch,
// a count of TAGE-SC-L correct predictions and a count of TAGE-SC-L
// mispredictions. Executions are their sum and accuracy is
// 1 - Mispred/Exec. A branch is declared H2P-active when, after counting the
// current instance,
//     Exec    >= 2048 + 16*N                    (a)
//     Mispred >= 256                            (b)
//     Acc     <  f(N)                           (c)
// with f(N) = 1 - 0.01*N/32 for N < 32, 0.95 - 0.01*(N-32) for 32 <= N <= 71
// and 0.60 above, where N is the number of branches already resident in the
// perceptron layer. Rule (c) is evaluated exactly in integer arithmetic:
//     N < 32        : Mispred*3200 > N*Exec
//     32 <= N <= 71 : Mispred*100  > (N-27)*Exec
//     N > 71        : Mispred*5    > 2*Exec
// Geometry follows the paper's storage budget: 2^6 sets x 8 ways, a 16-bit
// tag of which the low 6 bits pick the set and the upper 10 are stored,
// 16-bit correct and 12-bit misprediction counters.
//
// This design's own choices: the 16-bit tag is the PC folded by XOR; each
// way has a valid bit; a miss allocates the first invalid way, otherwise the
// way with the fewest mispredictions; when a counter would overflow both
// counters are halved (keeping the ratio); a branch that fires is removed
// from the table (so it must re-qualify from zero), and a branch that is
// already resident in an H2P cache (input `resident`) never fires.
//
// Timing: one branch per cycle on the upd_* port. The table is read and
// written in that cycle; `flag`/`flag_pc` are registered and appear the
// cycle after the qualifying branch.
module hit
  import bullseye_pkg::*;
#(
  parameter int unsigned SET_BITS  = 6,
  parameter int unsigned WAYS      = 8,
  parameter int unsigned CORR_W    = 16,
  parameter int unsigned MISP_W    = 12,
  parameter int unsigned N_W       = 7,
  parameter int unsigned EXEC_BASE = 2048,
  parameter int unsigned EXEC_STEP = 16,
  parameter int unsigned MISP_MIN  = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           upd_valid,    // a branch resolved this cycle
  input  pc_t            upd_pc,
  input  logic           upd_mispred,  // TAGE-SC-L mispredicted it
  input  logic           resident,     // the PC is already in an H2P cache
  input  logic [N_W-1:0] n_h2p,        // current number of H2P-resident branches
  output logic           flag,         // registered: branch became H2P-active
  output pc_t            flag_pc
);
  localparam int unsigned SETS = 1 << SET_BITS;
  localparam int unsigned TAG_W = 16 - SET_BITS;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned EXEC_W = CORR_W + 1;

  logic [TAG_W-1:0]  tag_mem  [SETS][WAYS];
  logic [CORR_W-1:0] corr_mem [SETS][WAYS];
  logic [MISP_W-1:0] misp_mem [SETS][WAYS];
  logic [WAYS-1:0]   valid_q  [SETS];

  logic [15:0]         tag16;
  logic [SET_BITS-1:0] set_idx;
  logic [TAG_W-1:0]    tag_in;
  assign tag16   = pc_fold16(upd_pc);
  assign set_idx = tag16[SET_BITS-1:0];
  assign tag_in  = tag16[15:SET_BITS];

  logic             hit_found;
  logic [WAY_W-1:0] hit_way, vic_way, wr_way;
  logic [CORR_W-1:0] corr_new;
  logic [MISP_W-1:0] misp_new;
  logic [EXEC_W-1:0] exec_new;
  logic              qualify, fire;

  // Way search and victim choice.
  always_comb begin
    logic inv_found;
    logic [MISP_W-1:0] min_misp;
    hit_found = 1'b0;
    hit_way   = '0;
    inv_found = 1'b0;
    vic_way   = '0;
    min_misp  = '1;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set_idx][w] && tag_mem[set_idx][w] == tag_in && !hit_found) begin
        hit_found = 1'b1;
        hit_way   = WAY_W'(w);
      end
    end
    for (int w = 0; w < WAYS; w++) begin
      if (!valid_q[set_idx][w] && !inv_found) begin
        inv_found = 1'b1;
        vic_way   = WAY_W'(w);
      end
    end
    if (!inv_found) begin
      for (int w = 0; w < WAYS; w++) begin
        if (misp_mem[set_idx][w] < min_misp || w == 0) begin
          min_misp = misp_mem[set_idx][w];
          vic_way  = WAY_W'(w);
        end
      end
    end
    wr_way = hit_found ? hit_way : vic_way;
  end

  // Counter update with halving on overflow.
  always_comb begin
    logic [CORR_W:0] c_sum;
    logic [MISP_W:0] m_sum;
    if (hit_found) begin
      c_sum = {1'b0, corr_mem[set_idx][hit_way]} + {{CORR_W{1'b0}}, !upd_mispred};
      m_sum = {1'b0, misp_mem[set_idx][hit_way]} + {{MISP_W{1'b0}}, upd_mispred};
    end else begin
      c_sum = {{CORR_W{1'b0}}, !upd_mispred};
      m_sum = {{MISP_W{1'b0}}, upd_mispred};
    end
    if (c_sum[CORR_W] || m_sum[MISP_W]) begin
      c_sum = c_sum >> 1;
      m_sum = m_sum >> 1;
    end
    corr_new = c_sum[CORR_W-1:0];
    misp_new = m_sum[MISP_W-1:0];
    exec_new = EXEC_W'(corr_new) + EXEC_W'(misp_new);
  end

  // Adaptive admission rule, Eq. (a)-(d).
  always_comb begin
    logic [31:0] n32, e32, m32, exec_thr;
    logic acc_ok;
    n32 = 32'(n_h2p);
    e32 = 32'(exec_new);
    m32 = 32'(misp_new);
    exec_thr = EXEC_BASE + EXEC_STEP * n32;
    if (n32 < 32)       acc_ok = (m32 * 32'd3200) > (n32 * e32);
    else if (n32 <= 71) acc_ok = (m32 * 32'd100) > ((n32 - 32'd27) * e32);
    else                acc_ok = (m32 * 32'd5) > (32'd2 * e32);
    qualify = (e32 >= exec_thr) && (m32 >= MISP_MIN) && acc_ok;
  end

  assign fire = upd_valid && hit_found && qualify && !resident;

  always_ff @(posedge clk) begin
    if (upd_valid) begin
      tag_mem [set_idx][wr_way] <= tag_in;
      corr_mem[set_idx][wr_way] <= corr_new;
      misp_mem[set_idx][wr_way] <= misp_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
      flag    <= 1'b0;
      flag_pc <= '0;
    end else begin
      flag <= fire;
      if (fire) flag_pc <= upd_pc;
      if (upd_valid) valid_q[set_idx][wr_way] <= !fire;
    end
  end

endmodule
