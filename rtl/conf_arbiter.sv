// conf_arbiter -- single-cycle confidence arbiter between the two Bullseye
// perceptrons and TAGE-SC-L.
//
// A perceptron is "strong" when it is valid for this branch (its H2P cache
// hit and the entry is past warm-up) and both bits of its two-bit conf field
// are set: running win-rate over TAGE-SC-L >= 55 %, and |output| > theta.
// TAGE-SC-L is "strong" when the provider component's usefulness is 3 or the
// statistical corrector overrides with a non-zero magnitude.
//
// The paper states two decision rules. With TAGE_GATE = 0 (default) a strong
// perceptron always wins; this is the rule of the architecture overview and
// of the flow chart ("Perceptron Confidence High? Yes -> Use Perceptron
// Prediction"). With TAGE_GATE = 1 a strong perceptron wins only when
// TAGE-SC-L is not strong. If both perceptrons are strong, the local one is
// used (this design's choice: the paper calls the global perceptron a backup
// view). Purely combinational.
module conf_arbiter
  import bullseye_pkg::*;
#(
  parameter bit          TAGE_GATE = 1'b0,
  parameter int unsigned SCW       = 8
) (
  input  logic           tage_pred,
  input  logic [1:0]     tage_u,        // usefulness of the provider entry
  input  logic           sc_override,   // statistical corrector overrode TAGE
  input  logic [SCW-1:0] sc_mag,        // |SC sum| when it overrode
  input  logic           lp_valid,
  input  conf_t          lp_conf,
  input  logic           lp_pred,
  input  logic           gp_valid,
  input  conf_t          gp_conf,
  input  logic           gp_pred,
  output logic           pred,
  output pred_src_t      src,
  output logic           lp_strong,
  output logic           gp_strong,
  output logic           tage_strong
);
  always_comb begin
    lp_strong   = lp_valid && lp_conf.win_high && lp_conf.mag_high;
    gp_strong   = gp_valid && gp_conf.win_high && gp_conf.mag_high;
    tage_strong = (tage_u == 2'd3) || (sc_override && sc_mag != '0);
    if (lp_strong && !(TAGE_GATE && tage_strong)) begin
      pred = lp_pred;
      src  = SRC_LOCAL;
    end else if (gp_strong && !(TAGE_GATE && tage_strong)) begin
      pred = gp_pred;
      src  = SRC_GLOBAL;
    end else begin
      pred = tage_pred;
      src  = SRC_TAGE;
    end
  end
endmodule
