// lp_twos_comp: mixed-precision (unified) two's complementer.
//
// Negates every sub-word of an 8-bit word whose sign bit is set, where the word holds four 2-bit,
// two 4-bit or one 8-bit value (MODE-A/B/C). It is built, as in the paper's figure, from four
// 2-bit slices: each slice XORs its two bits with the sign of the sub-word it belongs to and adds
// a carry-in that is either that sign (first slice of a sub-word, supplying the "+1") or the carry
// of the slice to its right. Two levels of 2:1 multiplexers, controlled by m0 and m1, pick the
// sign and the carry-in of each slice; their inputs are those printed in the figure.
// A sub-word whose sign bit is clear passes unchanged.
//
// Interface: op (8 bits), m (MODE, 2 bits); op_ng is combinational.
module lp_twos_comp
  import lpa_pkg::*;
(
  input  logic [7:0] op,
  input  lp_mode_e   m,
  output logic [7:0] op_ng
);
  logic m1, m0;
  logic [3:0] sgn;    // sign applied to slice j (bits 2j+1:2j)
  logic [3:0] cin;    // carry into slice j
  logic [3:0] cout;   // carry out of slice j

  assign m1 = m[1];
  assign m0 = m[0];

  // Sign selection for each slice.
  assign sgn[3] = op[7];
  assign sgn[2] = m1 ? op[7] : (m0 ? op[7] : op[5]);
  assign sgn[1] = m1 ? op[7] : op[3];
  assign sgn[0] = m1 ? op[7] : (m0 ? op[3] : op[1]);

  // Carry-in selection: a new sub-word starts with its sign as "+1", otherwise carry ripples.
  assign cin[0] = m1 ? op[7]   : (m0 ? op[3]   : op[1]);
  assign cin[1] = m1 ? cout[0] : (m0 ? cout[0] : op[3]);
  assign cin[2] = m1 ? cout[1] : (m0 ? op[7]   : op[5]);
  assign cin[3] = m1 ? cout[2] : (m0 ? cout[2] : op[7]);

  for (genvar j = 0; j < 4; j++) begin : g_slice
    logic [2:0] s;
    assign s = {1'b0, op[2*j+1:2*j] ^ {2{sgn[j]}}} + {2'b00, cin[j]};
    assign op_ng[2*j+1:2*j] = s[1:0];
    assign cout[j] = s[2];
  end
endmodule
