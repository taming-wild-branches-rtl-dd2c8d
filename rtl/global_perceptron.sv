// global_perceptron -- folded global-history perceptron, one weight vector
// per H2P slot.
//
// A HG-bit global history register (bit 0 newest) is shifted on every
// resolved branch, H2P or not. It is folded by XOR into WG bits
// (x_i = XOR of ghr[j] for j mod WG = i); with the default HG = WG = 128 the
// fold is the identity. For the branch in slot s the output is
//     out = bias[s][ghr[3:0]] + sum_i (x_i ? +w[s][i] : -w[s][i])
// and the prediction is its sign (out >= 0 means taken). Training: when the
// prediction is wrong or |out| <= theta, each w[s][i] moves +1 if x_i equals
// the outcome and -1 otherwise, and the selected bias moves toward the
// outcome, all saturating. theta is adapted per slot with the same O-GEHL
// rule as the local perceptron: a TCW-bit signed counter goes up on a
// misprediction and down on a correct low-margin one; at its extremes theta
// moves by one. theta starts at WG.
//
// Sizes follow the paper's budget: 16 slots, 128-bit global history, 128
// 12-bit weights per slot, 16 bias words of 10 bits per slot, (14+7)-bit
// threshold counters per slot. This design's choices: the bias index (the
// four newest global outcomes), the initial theta, a slot's weights and bias
// being cleared when a new PC is admitted into it.
//
// Timing: out/pred/mag_high are combinational on lk_slot and the current
// history. `upd` trains lk_slot at the clock edge; `shift` pushes `taken`
// into the history at the same edge. `alloc` clears a slot.
module global_perceptron
  import bullseye_pkg::*;
#(
  parameter int unsigned SLOTS = 16,
  parameter int unsigned HG    = 128,
  parameter int unsigned WG    = 128,
  parameter int unsigned WW    = 12,
  parameter int unsigned BW    = 10,
  parameter int unsigned BBITS = 4,
  parameter int unsigned THW   = 14,
  parameter int unsigned TCW   = 7,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned OUT_W  = WW + $clog2(WG + 1) + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [SLOT_W-1:0]       lk_slot,
  output logic signed [OUT_W-1:0] out,
  output logic                    pred,
  output logic                    mag_high,
  input  logic                    shift,     // a branch resolved: update history
  input  logic                    upd,       // train lk_slot
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

  logic [HG-1:0]         ghr_q;
  logic signed [WW-1:0]  w_q    [SLOTS][WG];
  logic signed [BW-1:0]  bias_q [SLOTS][1 << BBITS];
  logic [THW-1:0]        theta_q[SLOTS];
  logic signed [TCW-1:0] tc_q   [SLOTS];

  logic [WG-1:0]    x;
  logic [BBITS-1:0] bidx;
  logic [OUT_W-1:0] mag;

  always_comb begin
    x = '0;
    for (int j = 0; j < HG; j++) x[j % WG] = x[j % WG] ^ ghr_q[j];
  end
  assign bidx = ghr_q[BBITS-1:0];

  always_comb begin
    logic signed [OUT_W-1:0] s;
    s = OUT_W'(bias_q[lk_slot][bidx]);
    for (int i = 0; i < WG; i++)
      s = x[i] ? s + OUT_W'(w_q[lk_slot][i]) : s - OUT_W'(w_q[lk_slot][i]);
    out = s;
  end

  assign pred     = !out[OUT_W-1];
  assign mag      = out[OUT_W-1] ? OUT_W'(-out) : OUT_W'(out);
  assign mag_high = mag > OUT_W'(theta_q[lk_slot]);

  logic mispred, train, upd_ok;
  assign mispred = (pred != taken);
  assign upd_ok  = upd && !(alloc && alloc_slot == lk_slot);
  assign train   = upd_ok && (mispred || mag <= OUT_W'(theta_q[lk_slot]));

  always_ff @(posedge clk) begin
    if (alloc) begin
      for (int i = 0; i < WG; i++) w_q[alloc_slot][i] <= '0;
      for (int b = 0; b < (1 << BBITS); b++) bias_q[alloc_slot][b] <= '0;
      theta_q[alloc_slot] <= THW'(WG);
      tc_q[alloc_slot]    <= '0;
    end
    if (train) begin
      int signed nb;
      for (int i = 0; i < WG; i++) begin
        int signed nw;
        nw = int'(w_q[lk_slot][i]) + ((x[i] == taken) ? 1 : -1);
        if (nw > W_MAX) nw = W_MAX;
        if (nw < W_MIN) nw = W_MIN;
        w_q[lk_slot][i] <= WW'(nw);
      end
      nb = int'(bias_q[lk_slot][bidx]) + (taken ? 1 : -1);
      if (nb > B_MAX) nb = B_MAX;
      if (nb < B_MIN) nb = B_MIN;
      bias_q[lk_slot][bidx] <= BW'(nb);
    end
    if (upd_ok) begin
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

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ghr_q <= '0;
    else if (shift) ghr_q <= {ghr_q[HG-2:0], taken};
  end

endmodule
