// local_perceptron -- hashed-window local-history perceptron.
//
// Each H2P slot keeps a 124-bit history of its own branch outcomes (bit 0 is
// the newest). Feature i (i = 0..NFEAT-1) is the parity of a window of that
// history starting at bit i*STRIDE, of width 4<<min(i,4) (4, 8, 16, 32, 64,
// then 64), clipped at the end of the history. Each feature selects one word
// in each of two weight tables (2*NFEAT tables of 2^TBITS words of WW bits,
// shared by all slots), at index
//     xorshift32(fold32(PC) ^ (2i+k+1)*0x9E3779B9 ^ parity_i)[TBITS-1:0],
// k = 0,1 -- two independent hashes so that an aliased word in one table is
// usually outvoted by the other. The output is the sum of the 2*NFEAT
// selected words plus a per-slot bias word selected by the newest local
// outcome; its sign is the prediction.
//
// Training (O-GEHL style dynamic threshold, per slot): when the prediction is
// wrong or |out| <= theta, every selected word and the bias move one step
// toward the outcome (+1 taken, -1 not taken), saturating. A TCW-bit signed
// counter tc goes up on a misprediction and down on a correct but low-margin
// prediction; at its top theta grows by one, at its bottom theta shrinks by
// one, and tc returns to zero. theta starts at the number of summed weights.
//
// Sizes follow the paper's budget: 64 tables of 2^8 10-bit words, 32 slots
// of 124-bit history, 2 bias words of 12 bits per slot, (10+7)-bit
// threshold counters per slot. The window placement (STRIDE = 3, windows
// overlap), the hash seeds and the bias index are this design's choices: the
// paper's text asks for growing windows at a constant stride without overlap,
// which cannot give 32 features within a 124-bit history.
//
// Timing: prediction (out, pred, mag_high) is combinational on lk_slot/lk_pc.
// `upd` trains at the next clock edge using the same slot/pc/history.
// `alloc` clears a slot's history, bias and threshold. After reset the weight
// tables are cleared, one row per cycle in all tables; `ready` rises after
// 2^TBITS cycles.
module local_perceptron
  import bullseye_pkg::*;
#(
  parameter int unsigned SLOTS  = 32,
  parameter int unsigned NFEAT  = 32,
  parameter int unsigned TBITS  = 8,
  parameter int unsigned WW     = 10,
  parameter int unsigned LHIST  = 124,
  parameter int unsigned STRIDE = 3,
  parameter int unsigned BW     = 12,
  parameter int unsigned THW    = 10,
  parameter int unsigned TCW    = 7,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned NT     = 2 * NFEAT,
  localparam int unsigned OUT_W  = BW + $clog2(NT + 1) + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    ready,
  input  logic [SLOT_W-1:0]       lk_slot,
  input  pc_t                     lk_pc,
  output logic signed [OUT_W-1:0] out,
  output logic                    pred,
  output logic                    mag_high,
  input  logic                    upd,       // train lk_slot with `taken`
  input  logic                    taken,
  input  logic                    alloc,
  input  logic [SLOT_W-1:0]       alloc_slot
);
  localparam int signed W_MAX = (1 <<< (WW - 1)) - 1;
  localparam int signed W_MIN = -(1 <<< (WW - 1));
  localparam int signed B_MAX = (1 <<< (BW - 1)) - 1;
  localparam int signed B_MIN = -(1 <<< (BW - 1));
  localparam int signed TC_MAX = (1 <<< (TCW - 1)) - 1;
  localparam int signed TC_MIN = -(1 <<< (TCW - 1));
  localparam int unsigned TSIZE = 1 << TBITS;

  function automatic logic [LHIST-1:0] win_mask(input int unsigned i);
    logic [LHIST-1:0] ones;
    int unsigned start, width, sh;
    sh    = (i < 4) ? i : 4;
    start = i * STRIDE;
    width = 4 << sh;
    ones  = '1;
    if (start >= LHIST) return '0;
    if (width > LHIST - start) width = LHIST - start;
    return (ones >> (LHIST - width)) << start;
  endfunction

  logic signed [WW-1:0]  wt     [NT][TSIZE];
  logic [LHIST-1:0]      hist_q [SLOTS];
  logic signed [BW-1:0]  bias_q [SLOTS][2];
  logic [THW-1:0]        theta_q[SLOTS];
  logic signed [TCW-1:0] tc_q   [SLOTS];
  logic [TBITS:0]        init_q;

  assign ready = init_q[TBITS];

  logic [TBITS-1:0] idx [NT];
  logic [LHIST-1:0] h;
  logic             bsel;
  logic [OUT_W-1:0] mag;

  always_comb begin
    logic [31:0] pcf;
    logic par;
    h   = hist_q[lk_slot];
    pcf = pc_fold32(lk_pc);
    for (int unsigned i = 0; i < NFEAT; i++) begin
      par = ^(h & win_mask(i));
      for (int unsigned k = 0; k < 2; k++) begin
        logic [31:0] hx;
        hx = xorshift32(pcf ^ ((2 * i + k + 1) * 32'h9E37_79B9) ^ {31'b0, par});
        idx[2 * i + k] = TBITS'(hx);
      end
    end
  end

  assign bsel = h[0];

  always_comb begin
    logic signed [OUT_W-1:0] s;
    s = OUT_W'(bias_q[lk_slot][bsel]);
    for (int t = 0; t < NT; t++) s = s + OUT_W'(wt[t][idx[t]]);
    out = s;
  end

  assign pred     = !out[OUT_W-1];
  assign mag      = out[OUT_W-1] ? OUT_W'(-out) : OUT_W'(out);
  assign mag_high = mag > OUT_W'(theta_q[lk_slot]);

  logic mispred, train;
  assign mispred = (pred != taken);
  assign train   = upd && (mispred || mag <= OUT_W'(theta_q[lk_slot]));

  // Weight tables: cleared row by row after reset, then trained.
  always_ff @(posedge clk) begin
    if (!ready) begin
      for (int t = 0; t < NT; t++) wt[t][init_q[TBITS-1:0]] <= '0;
    end else if (train) begin
      for (int t = 0; t < NT; t++) begin
        int signed nw;
        nw = int'(wt[t][idx[t]]) + (taken ? 1 : -1);
        if (nw > W_MAX) nw = W_MAX;
        if (nw < W_MIN) nw = W_MIN;
        wt[t][idx[t]] <= WW'(nw);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_q <= '0;
    else if (!ready) init_q <= init_q + 1'b1;
  end

  // Per-slot state.
  always_ff @(posedge clk) begin
    if (alloc) begin
      hist_q[alloc_slot]    <= '0;
      bias_q[alloc_slot][0] <= '0;
      bias_q[alloc_slot][1] <= '0;
      theta_q[alloc_slot]   <= THW'(NT);
      tc_q[alloc_slot]      <= '0;
    end
    if (upd && !(alloc && alloc_slot == lk_slot)) begin
      hist_q[lk_slot] <= {h[LHIST-2:0], taken};
      if (train) begin
        int signed nb;
        nb = int'(bias_q[lk_slot][bsel]) + (taken ? 1 : -1);
        if (nb > B_MAX) nb = B_MAX;
        if (nb < B_MIN) nb = B_MIN;
        bias_q[lk_slot][bsel] <= BW'(nb);
      end
      if (mispred) begin
        if (tc_q[lk_slot] == TCW'(TC_MAX)) begin
          tc_q[lk_slot] <= '0;
          if (theta_q[lk_slot] != '1) theta_q[lk_slot] <= theta_q[lk_slot] + 1'b1;
        end else begin
          tc_q[lk_slot] <= tc_q[lk_slot] + 1'b1;
        end
      end else if (train) begin
        if (tc_q[lk_slot] == TCW'(TC_MIN)) begin
          tc_q[lk_slot] <= '0;
          if (theta_q[lk_slot] != '0) theta_q[lk_slot] <= theta_q[lk_slot] - 1'b1;
        end else begin
          tc_q[lk_slot] <= tc_q[lk_slot] - 1'b1;
        end
      end
    end
  end

endmodule
