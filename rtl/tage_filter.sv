// tage_filter -- selective suppression of TAGE-SC-L updates for H2P branches
// that a perceptron already predicts reliably.
//
// One streak counter and one `filt` bit per H2P cache slot. While the slot's
// perceptron is strong (see conf_arbiter), each correct perceptron
// prediction extends the streak and a wrong one resets it (a TAGE-SC-L win
// is always a perceptron miss). When the streak reaches STREAK (128) the slot
// becomes filtered: later instances of that branch do not update TAGE-SC-L.
// As soon as the perceptron is no longer strong on an instance, filtering is
// revoked and the streak restarts. Allocating the slot to a new PC clears it.
//
// Paper-given: the 128-correct-in-a-row rule and revocation when confidence
// drops below strong. This design's choices: the streak counts only while
// the perceptron is strong, and a wrong perceptron prediction resets the
// streak without revoking an active filter.
//
// Timing: `filtered` is combinational (state before this branch, qualified
// by the current strong bit); state updates at the clock edge.
module tage_filter #(
  parameter int unsigned SLOTS  = 32,
  parameter int unsigned STREAK = 128,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned CNT_W  = $clog2(STREAK + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              br_valid,
  input  logic              hit,
  input  logic [SLOT_W-1:0] slot,
  input  logic              perc_strong,       // the slot's perceptron is strong now
  input  logic              perc_correct,
  input  logic              alloc,
  input  logic [SLOT_W-1:0] alloc_slot,
  output logic              filtered       // suppress TAGE-SC-L update
);
  logic [SLOTS-1:0] filt_q;
  logic [CNT_W-1:0] streak_q [SLOTS];

  assign filtered = br_valid && hit && perc_strong && filt_q[slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filt_q <= '0;
      for (int i = 0; i < SLOTS; i++) streak_q[i] <= '0;
    end else begin
      if (br_valid && hit && !(alloc && alloc_slot == slot)) begin
        if (!perc_strong) begin
          filt_q[slot]   <= 1'b0;
          streak_q[slot] <= '0;
        end else if (perc_correct) begin
          if (streak_q[slot] != CNT_W'(STREAK)) streak_q[slot] <= streak_q[slot] + 1'b1;
          if (streak_q[slot] == CNT_W'(STREAK - 1)) filt_q[slot] <= 1'b1;
        end else begin
          streak_q[slot] <= '0;
        end
      end
      if (alloc) begin
        filt_q[alloc_slot]   <= 1'b0;
        streak_q[alloc_slot] <= '0;
      end
    end
  end
endmodule
