// lp_log_lin: unified log-to-linear fraction converter (PE accumulation stage).
//
// The 8-bit log-domain fraction lnf is read as four 2-bit lanes (MODE-A), two 4-bit lanes
// (MODE-B) or one 8-bit lane (MODE-C). Each lane x of F bits becomes the linear fraction f of
// 1.f = 2^(x / 2^F), rounded to F bits: lf = min(2^F - 1, round((2^(x/2^F) - 1) * 2^F)).
// The paper builds this as gate logic minimised from the truth table; here the same truth table
// is a constant table computed at elaboration, which synthesis reduces to logic. Combinational.
module lp_log_lin
  import lpa_pkg::*;
(
  input  logic [7:0] lnf,
  input  lp_mode_e   m,
  output logic [7:0] lf
);
  always_comb begin
    case (m)
      MODE_A:  lf = {LOG2LIN2[lnf[7:6]], LOG2LIN2[lnf[5:4]], LOG2LIN2[lnf[3:2]], LOG2LIN2[lnf[1:0]]};
      MODE_B:  lf = {LOG2LIN4[lnf[7:4]], LOG2LIN4[lnf[3:0]]};
      default: lf = LOG2LIN8[lnf];
    endcase
  end
endmodule
