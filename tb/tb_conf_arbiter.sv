// tb_conf_arbiter -- exhaustive self-checking testbench for the arbiter.
//
// Two arbiter instances, one per decision rule (TAGE_GATE = 0 and 1), are
// driven through every combination of their inputs (sc_mag zero or not) and
// compared with the rules written out here independently.
module tb_conf_arbiter;
  import bullseye_pkg::*;

  logic       tage_pred, sc_override, lp_valid, lp_pred, gp_valid, gp_pred;
  logic [1:0] tage_u;
  logic [7:0] sc_mag;
  conf_t      lp_conf, gp_conf;
  logic       pred0, pred1, lps0, gps0, ts0, lps1, gps1, ts1;
  pred_src_t  src0, src1;
  int checks = 0, failures = 0;

  conf_arbiter #(.TAGE_GATE(1'b0)) u0 (
    .tage_pred, .tage_u, .sc_override, .sc_mag, .lp_valid, .lp_conf, .lp_pred,
    .gp_valid, .gp_conf, .gp_pred, .pred(pred0), .src(src0),
    .lp_strong(lps0), .gp_strong(gps0), .tage_strong(ts0));
  conf_arbiter #(.TAGE_GATE(1'b1)) u1 (
    .tage_pred, .tage_u, .sc_override, .sc_mag, .lp_valid, .lp_conf, .lp_pred,
    .gp_valid, .gp_conf, .gp_pred, .pred(pred1), .src(src1),
    .lp_strong(lps1), .gp_strong(gps1), .tage_strong(ts1));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << 14); v++) begin
      bit ls, gs, ts;
      bit e_pred0, e_pred1;
      int e_src0, e_src1;
      {tage_pred, tage_u, sc_override, lp_valid, lp_pred, gp_valid, gp_pred} = 8'(v);
      lp_conf = conf_t'(2'(v >> 8));
      gp_conf = conf_t'(2'(v >> 10));
      sc_mag  = v[12] ? 8'd0 : 8'(1 + (v >> 13));
      #1;
      ls = lp_valid && lp_conf.win_high && lp_conf.mag_high;
      gs = gp_valid && gp_conf.win_high && gp_conf.mag_high;
      ts = (tage_u == 3) || (sc_override && sc_mag != 0);
      // rule: strong perceptron overrides; local first
      if (ls)      begin e_pred0 = lp_pred;   e_src0 = 1; end
      else if (gs) begin e_pred0 = gp_pred;   e_src0 = 2; end
      else         begin e_pred0 = tage_pred; e_src0 = 0; end
      // rule with TAGE gate: only when TAGE-SC-L is not strong
      if (ls && !ts)      begin e_pred1 = lp_pred;   e_src1 = 1; end
      else if (gs && !ts) begin e_pred1 = gp_pred;   e_src1 = 2; end
      else                begin e_pred1 = tage_pred; e_src1 = 0; end
      checks++;
      if (pred0 != e_pred0 || int'(src0) != e_src0 || pred1 != e_pred1 || int'(src1) != e_src1 ||
          lps0 != ls || gps0 != gs || ts0 != ts || ts1 != ts) begin
        failures++;
        if (failures < 10) $display("FAIL v=%h", v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
