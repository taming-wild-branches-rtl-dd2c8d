// h2p_cache -- fully associative cache of H2P branch PCs with the trial,
// confidence and eviction bookkeeping of one perceptron engine.
//
// Each entry holds a PC tag and four management counters (6+8+9+16 bits, as
// in the paper's storage budget):
//   rp    6-bit signed saturating "relative performance" counter. On every
//         instance where the perceptron and TAGE-SC-L disagree in
//         correctness, it moves +9 when the perceptron wins and -11 when
//         TAGE-SC-L wins. Its drift is positive exactly when the perceptron's
//         win-rate exceeds 55 %, so `win_high` = (rp > 0) implements the
//         arbiter's "win-rate >= 55 %" test without a divider.
//   conf  8-bit confidence with linear growth and exponential decay:
//         C <- min(C+1,255) when a decisive instance agrees with the current
//         trend (sign of rp), C <- C/2 when it goes against it.
//   warm  9-bit warm-up count of occurrences, saturating at 511. While it is
//         below 511 the entry is in its trial window: it cannot be evicted and
//         its perceptron is not allowed to override TAGE-SC-L.
//   stale 16-bit count of dynamic branches since the entry was last
//         referenced, saturating at 2^16-1 (the stale timeout).
// An entry is evictable when it is out of warm-up and either its confidence
// has saturated with the trend in favour of TAGE-SC-L, or it is stale.
// Eviction happens only to admit a waiting PC: the head of the PC FIFO is
// admitted into the lowest free slot, else into the lowest evictable slot
// (never the slot referenced by the branch of the same cycle); if neither
// exists the PC waits. A head PC that is already resident is dropped.
//
// Paper-given: fully associative, trial window of 512 occurrences, the
// confidence policy, the two eviction reasons, evict-only-on-demand.
// This design's own choices: the +9/-11 steps, what counts as a win
// (perceptron right and TAGE-SC-L wrong), the 9- and 16-bit counters
// meaning "after 511 occurrences"/"after 65535 branches", lowest-index slot
// choice.
//
// Timing: the lookup (hit, slot, warm, win_high) is combinational on br_pc;
// counters and admissions update at the clock edge of the same cycle.
module h2p_cache
  import bullseye_pkg::*;
#(
  parameter int unsigned ENTRIES  = 32,
  parameter int unsigned RP_W     = 6,
  parameter int unsigned CONF_W   = 8,
  parameter int unsigned WARM_W   = 9,
  parameter int unsigned STALE_W  = 16,
  parameter int unsigned RP_WIN   = 9,
  parameter int unsigned RP_LOSS  = 11,
  localparam int unsigned SLOT_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // branch of this cycle
  input  logic              br_valid,
  input  pc_t               br_pc,
  input  logic              perc_correct,  // this engine's perceptron was right
  input  logic              tage_correct,  // TAGE-SC-L was right
  output logic              hit,
  output logic [SLOT_W-1:0] hit_slot,
  output logic              warm,          // hit entry is past its warm-up
  output logic              win_high,      // hit entry's win-rate >= 55 %
  // admission from the PC FIFO
  input  logic              adm_valid,
  input  pc_t               adm_pc,
  output logic              adm_pop,       // head consumed (admitted or duplicate)
  output logic              alloc,         // a slot is (re)initialised this cycle
  output logic [SLOT_W-1:0] alloc_slot,
  output logic              evict,         // the allocation replaced a valid entry
  output logic [SLOT_W:0]   occupancy
);
  localparam int signed RP_MAX = (1 <<< (RP_W - 1)) - 1;
  localparam int signed RP_MIN = -(1 <<< (RP_W - 1));

  logic [ENTRIES-1:0]        valid_q;
  pc_t                       tag_q   [ENTRIES];
  logic signed [RP_W-1:0]    rp_q    [ENTRIES];
  logic [CONF_W-1:0]         conf_q  [ENTRIES];
  logic [WARM_W-1:0]         warm_q  [ENTRIES];
  logic [STALE_W-1:0]        stale_q [ENTRIES];

  // ---------------- lookup ----------------
  logic [ENTRIES-1:0] match_vec;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) match_vec[i] = valid_q[i] && (tag_q[i] == br_pc);
    hit      = |match_vec;
    hit_slot = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) if (match_vec[i]) hit_slot = SLOT_W'(i);
  end
  assign warm     = hit && (warm_q[hit_slot] == '1);
  assign win_high = hit && (rp_q[hit_slot] > 0);

  // ---------------- admission ----------------
  logic [ENTRIES-1:0] evictable, dup_vec;
  logic dup, free_found, vic_found;
  logic [SLOT_W-1:0] free_slot, vic_slot;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      evictable[i] = valid_q[i] && (warm_q[i] == '1) &&
                     (((conf_q[i] == '1) && !(rp_q[i] > 0)) || (stale_q[i] == '1)) &&
                     !(br_valid && hit && hit_slot == SLOT_W'(i));
      dup_vec[i] = valid_q[i] && (tag_q[i] == adm_pc);
    end
    dup        = |dup_vec;
    free_found = !(&valid_q);
    vic_found  = |evictable;
    free_slot  = '0;
    vic_slot   = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid_q[i])   free_slot = SLOT_W'(i);
      if (evictable[i])  vic_slot  = SLOT_W'(i);
    end
    occupancy  = (SLOT_W+1)'($countones(valid_q));
    alloc      = adm_valid && !dup && (free_found || vic_found);
    alloc_slot = free_found ? free_slot : vic_slot;
    evict      = alloc && !free_found;
    adm_pop    = adm_valid && (dup || alloc);
  end

  // ---------------- counter update ----------------
  logic decisive, perc_wins;
  assign decisive  = br_valid && hit && (perc_correct != tage_correct);
  assign perc_wins = perc_correct;

  // Next value of the referenced entry's rp and conf.
  logic signed [RP_W-1:0] rp_upd;
  logic [CONF_W-1:0]      conf_upd;
  always_comb begin
    int signed rp_next;
    logic trend_perc;
    trend_perc = (rp_q[hit_slot] > 0);
    rp_next = perc_wins ? int'(rp_q[hit_slot]) + int'(RP_WIN)
                        : int'(rp_q[hit_slot]) - int'(RP_LOSS);
    if (rp_next > RP_MAX) rp_next = RP_MAX;
    if (rp_next < RP_MIN) rp_next = RP_MIN;
    rp_upd = RP_W'(rp_next);
    if (perc_wins == trend_perc) conf_upd = (conf_q[hit_slot] == '1) ? conf_q[hit_slot] : conf_q[hit_slot] + 1'b1;
    else                         conf_upd = conf_q[hit_slot] >> 1;
  end

  always_ff @(posedge clk) begin
    if (br_valid) begin
      for (int i = 0; i < ENTRIES; i++)
        if (stale_q[i] != '1) stale_q[i] <= stale_q[i] + 1'b1;
      if (hit) begin
        stale_q[hit_slot] <= '0;
        if (warm_q[hit_slot] != '1) warm_q[hit_slot] <= warm_q[hit_slot] + 1'b1;
        if (decisive) begin
          rp_q[hit_slot]   <= rp_upd;
          conf_q[hit_slot] <= conf_upd;
        end
      end
    end
    // An allocation never targets the referenced slot, so it cannot collide
    // with the writes above except on stale_q, where it must win.
    if (alloc) begin
      tag_q[alloc_slot]   <= adm_pc;
      rp_q[alloc_slot]    <= '0;
      conf_q[alloc_slot]  <= '0;
      warm_q[alloc_slot]  <= '0;
      stale_q[alloc_slot] <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_q <= '0;
    else if (alloc) valid_q[alloc_slot] <= 1'b1;
  end

  a_alloc_not_hit: assert property (@(posedge clk) disable iff (!rst_n)
    !(alloc && br_valid && hit && alloc_slot == hit_slot));

endmodule
