// lp_lin_log: unified linear-to-log fraction converter (LP encoder).
//
// Inverse of lp_log_lin, with the same lane split by MODE: each F-bit lane x, the fraction of a
// linear mantissa 1.x, becomes lnf = min(2^F - 1, round(log2(1 + x/2^F) * 2^F)). The paper
// implements it as gate logic minimised from the inverse truth table; here the truth table is a
// constant table computed at elaboration. Combinational.
module lp_lin_log
  import lpa_pkg::*;
(
  input  logic [7:0] lf,
  input  lp_mode_e   m,
  output logic [7:0] lnf
);
  always_comb begin
    case (m)
      MODE_A:  lnf = {LIN2LOG2[lf[7:6]], LIN2LOG2[lf[5:4]], LIN2LOG2[lf[3:2]], LIN2LOG2[lf[1:0]]};
      MODE_B:  lnf = {LIN2LOG4[lf[7:4]], LIN2LOG4[lf[3:0]]};
      default: lnf = LIN2LOG8[lf];
    endcase
  end
endmodule
