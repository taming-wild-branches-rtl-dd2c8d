// bullseye_top -- the Bullseye hard-to-predict (H2P) branch subsystem that
// sits beside a TAGE-SC-L predictor.
//
// Structure (one branch per cycle):
//   hit            counts TAGE-SC-L executions/mispredictions per static
//                  branch and flags H2P-active PCs under adaptive thresholds.
//   pc_fifo x2     queue flagged PCs in front of each H2P cache (64 each).
//   h2p_cache x2   local (32 entries) and global (16 entries) caches of H2P
//                  PCs with trial, confidence and eviction bookkeeping.
//   local_perceptron / global_perceptron
//                  predict a hit branch from its slot; trained on outcome.
//   conf_arbiter   takes a strong perceptron's prediction over TAGE-SC-L.
//   tage_filter x2 suppresses TAGE-SC-L updates of branches a perceptron
//                  has predicted right 128 times in a row.
// TAGE-SC-L itself is outside this module: its prediction and confidence
// inputs (tage_pred, tage_u, sc_override, sc_mag) come in on ports and the
// update enable for it goes out on `tage_upd_en`.
//
// Timing: the predictor is evaluated as in trace-driven branch-predictor
// studies: the branch of a cycle (br_valid, br_pc, br_taken, TAGE-SC-L
// fields) yields `pred`, `pred_src` and `tage_upd_en` combinationally from
// the state left by earlier branches, and all state (counters, histories,
// weights, queues) is updated with its outcome at the clock edge. A flagged
// PC reaches its FIFO one cycle after the qualifying branch and can be
// admitted in the following cycle. After reset, `ready` rises once the local
// weight tables are cleared (2^8 cycles); branches presented before that are
// ignored. N_H2P, the population that tightens the HIT thresholds, is taken
// as the occupancy of the local cache, the larger of the two (this design's
// choice; the paper counts "branches resident in the perceptron layer").
module bullseye_top
  import bullseye_pkg::*;
#(
  parameter int unsigned LOCAL_ENTRIES  = 32,
  parameter int unsigned GLOBAL_ENTRIES = 16,
  parameter int unsigned FIFO_DEPTH     = 64,
  parameter int unsigned HIT_SET_BITS   = 6,
  parameter int unsigned HIT_WAYS       = 8,
  parameter int unsigned EXEC_BASE      = 2048,
  parameter int unsigned MISP_MIN       = 256,
  parameter int unsigned WARM_W         = 9,
  parameter int unsigned STALE_W        = 16,
  parameter int unsigned LP_TBITS       = 8,
  parameter int unsigned STREAK         = 128,
  parameter bit          TAGE_GATE      = 1'b0,
  localparam int unsigned LSLOT_W = (LOCAL_ENTRIES > 1) ? $clog2(LOCAL_ENTRIES) : 1,
  localparam int unsigned GSLOT_W = (GLOBAL_ENTRIES > 1) ? $clog2(GLOBAL_ENTRIES) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       ready,
  // resolved branch and the TAGE-SC-L view of it
  input  logic       br_valid,
  input  pc_t        br_pc,
  input  logic       br_taken,
  input  logic       tage_pred,
  input  logic [1:0] tage_u,
  input  logic       sc_override,
  input  logic [7:0] sc_mag,
  // result
  output logic       pred,
  output pred_src_t  pred_src,
  output logic       tage_upd_en,
  output logic [6:0] n_h2p,
  output events_t    events
);
  logic v;
  assign v = br_valid && ready;

  logic tage_correct;
  assign tage_correct = (tage_pred == br_taken);

  // ---------------- caches ----------------
  logic               lc_hit, lc_warm, lc_winh, lc_pop, lc_alloc, lc_evict;
  logic [LSLOT_W-1:0] lc_slot, lc_aslot;
  logic [LSLOT_W:0]   lc_occ;
  logic               gc_hit, gc_warm, gc_winh, gc_pop, gc_alloc, gc_evict;
  logic [GSLOT_W-1:0] gc_slot, gc_aslot;
  logic [GSLOT_W:0]   gc_occ;

  // ---------------- HIT and FIFOs ----------------
  logic hit_flag;
  pc_t  hit_flag_pc;
  pc_t  lf_dout, gf_dout;
  logic lf_empty, lf_full, gf_empty, gf_full;
  logic [$clog2(FIFO_DEPTH):0] lf_count, gf_count;

  assign n_h2p = 7'(lc_occ);

  hit #(
    .SET_BITS (HIT_SET_BITS),
    .WAYS     (HIT_WAYS),
    .EXEC_BASE(EXEC_BASE),
    .MISP_MIN (MISP_MIN)
  ) u_hit (
    .clk, .rst_n,
    .upd_valid  (v),
    .upd_pc     (br_pc),
    .upd_mispred(!tage_correct),
    .resident   (lc_hit || gc_hit),
    .n_h2p      (n_h2p),
    .flag       (hit_flag),
    .flag_pc    (hit_flag_pc)
  );

  pc_fifo #(.DEPTH(FIFO_DEPTH)) u_lfifo (
    .clk, .rst_n,
    .push (hit_flag && !lf_full),
    .din  (hit_flag_pc),
    .pop  (lc_pop),
    .dout (lf_dout),
    .empty(lf_empty),
    .full (lf_full),
    .count(lf_count)
  );

  pc_fifo #(.DEPTH(FIFO_DEPTH)) u_gfifo (
    .clk, .rst_n,
    .push (hit_flag && !gf_full),
    .din  (hit_flag_pc),
    .pop  (gc_pop),
    .dout (gf_dout),
    .empty(gf_empty),
    .full (gf_full),
    .count(gf_count)
  );

  // ---------------- perceptrons ----------------
  logic lp_pred, lp_magh, lp_ready;
  logic gp_pred, gp_magh;
  logic lp_correct, gp_correct;
  assign lp_correct = (lp_pred == br_taken);
  assign gp_correct = (gp_pred == br_taken);

  h2p_cache #(
    .ENTRIES(LOCAL_ENTRIES), .WARM_W(WARM_W), .STALE_W(STALE_W)
  ) u_lcache (
    .clk, .rst_n,
    .br_valid    (v),
    .br_pc       (br_pc),
    .perc_correct(lp_correct),
    .tage_correct(tage_correct),
    .hit         (lc_hit),
    .hit_slot    (lc_slot),
    .warm        (lc_warm),
    .win_high    (lc_winh),
    .adm_valid   (!lf_empty),
    .adm_pc      (lf_dout),
    .adm_pop     (lc_pop),
    .alloc       (lc_alloc),
    .alloc_slot  (lc_aslot),
    .evict       (lc_evict),
    .occupancy   (lc_occ)
  );

  h2p_cache #(
    .ENTRIES(GLOBAL_ENTRIES), .WARM_W(WARM_W), .STALE_W(STALE_W)
  ) u_gcache (
    .clk, .rst_n,
    .br_valid    (v),
    .br_pc       (br_pc),
    .perc_correct(gp_correct),
    .tage_correct(tage_correct),
    .hit         (gc_hit),
    .hit_slot    (gc_slot),
    .warm        (gc_warm),
    .win_high    (gc_winh),
    .adm_valid   (!gf_empty),
    .adm_pc      (gf_dout),
    .adm_pop     (gc_pop),
    .alloc       (gc_alloc),
    .alloc_slot  (gc_aslot),
    .evict       (gc_evict),
    .occupancy   (gc_occ)
  );

  local_perceptron #(.SLOTS(LOCAL_ENTRIES), .TBITS(LP_TBITS)) u_lperc (
    .clk, .rst_n,
    .ready     (lp_ready),
    .lk_slot   (lc_slot),
    .lk_pc     (br_pc),
    .out       (),
    .pred      (lp_pred),
    .mag_high  (lp_magh),
    .upd       (v && lc_hit),
    .taken     (br_taken),
    .alloc     (lc_alloc),
    .alloc_slot(lc_aslot)
  );

  global_perceptron #(.SLOTS(GLOBAL_ENTRIES)) u_gperc (
    .clk, .rst_n,
    .lk_slot   (gc_slot),
    .out       (),
    .pred      (gp_pred),
    .mag_high  (gp_magh),
    .shift     (v),
    .upd       (v && gc_hit),
    .taken     (br_taken),
    .alloc     (gc_alloc),
    .alloc_slot(gc_aslot)
  );

  assign ready = lp_ready;

  // ---------------- arbitration ----------------
  logic lp_strong, gp_strong, tage_strong;
  conf_arbiter #(.TAGE_GATE(TAGE_GATE)) u_arb (
    .tage_pred  (tage_pred),
    .tage_u     (tage_u),
    .sc_override(sc_override),
    .sc_mag     (sc_mag),
    .lp_valid   (lc_hit && lc_warm),
    .lp_conf    ('{win_high: lc_winh, mag_high: lp_magh}),
    .lp_pred    (lp_pred),
    .gp_valid   (gc_hit && gc_warm),
    .gp_conf    ('{win_high: gc_winh, mag_high: gp_magh}),
    .gp_pred    (gp_pred),
    .pred       (pred),
    .src        (pred_src),
    .lp_strong  (lp_strong),
    .gp_strong  (gp_strong),
    .tage_strong(tage_strong)
  );

  // ---------------- TAGE update filtering ----------------
  logic lf_filt, gf_filt;
  tage_filter #(.SLOTS(LOCAL_ENTRIES), .STREAK(STREAK)) u_lfilt (
    .clk, .rst_n,
    .br_valid    (v),
    .hit         (lc_hit),
    .slot        (lc_slot),
    .perc_strong (lp_strong),
    .perc_correct(lp_correct),
    .alloc       (lc_alloc),
    .alloc_slot  (lc_aslot),
    .filtered    (lf_filt)
  );
  tage_filter #(.SLOTS(GLOBAL_ENTRIES), .STREAK(STREAK)) u_gfilt (
    .clk, .rst_n,
    .br_valid    (v),
    .hit         (gc_hit),
    .slot        (gc_slot),
    .perc_strong (gp_strong),
    .perc_correct(gp_correct),
    .alloc       (gc_alloc),
    .alloc_slot  (gc_aslot),
    .filtered    (gf_filt)
  );

  assign tage_upd_en = v && !(lf_filt || gf_filt);

  always_comb begin
    events              = '0;
    events.h2p_flag     = hit_flag;
    events.fifo_drop    = hit_flag && (lf_full || gf_full);
    events.local_alloc  = lc_alloc;
    events.global_alloc = gc_alloc;
    events.local_evict  = lc_evict;
    events.global_evict = gc_evict;
    events.perc_override    = v && (pred_src != SRC_TAGE);
    events.filtered     = v && (lf_filt || gf_filt);
  end

endmodule
