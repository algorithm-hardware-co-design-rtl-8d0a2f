// lp_lzd: mixed-precision leading-zero detector.
//
// Counts the leading zeros of each sub-word of an 8-bit word for all three sub-word widths at
// once: four 2-bit detectors (LZD-1 on bits 1:0 ... LZD-4 on bits 7:6) give a count c and a valid
// flag v (the field holds a one) per 2-bit field; pairs are merged into 4-bit results (B0, B1)
// and those into the 8-bit result (C0). Merging follows the paper's figure: the upper count is
// kept when the upper field is valid, otherwise the lower count is added to it, and the valid
// flags are ORed. (The figure draws the merging multiplexer with the sum on its "1" input under
// the upper valid flag; with valid meaning "holds a one", as the figure's legend and its OR gates
// imply, the sum must be taken when the upper flag is 0, which is what is built here.)
//
// Interface: op (8 bits) in; c_a/v_a (four 2-bit fields), c_b/v_b (two 4-bit), c_c/v_c (8-bit)
// out, all combinational. A count equals the field width when the field is all zeros.
module lp_lzd (
  input  logic [7:0]      op,
  output logic [3:0][1:0] c_a,
  output logic [3:0]      v_a,
  output logic [1:0][2:0] c_b,
  output logic [1:0]      v_b,
  output logic [3:0]      c_c,
  output logic            v_c
);
  for (genvar j = 0; j < 4; j++) begin : g_lzd2
    assign v_a[j] = op[2*j+1] | op[2*j];
    assign c_a[j] = op[2*j+1] ? 2'd0 : (op[2*j] ? 2'd1 : 2'd2);
  end

  for (genvar j = 0; j < 2; j++) begin : g_lzd4
    assign v_b[j] = v_a[2*j+1] | v_a[2*j];
    assign c_b[j] = v_a[2*j+1] ? {1'b0, c_a[2*j+1]}
                               : {1'b0, c_a[2*j+1]} + {1'b0, c_a[2*j]};
  end

  assign v_c = v_b[1] | v_b[0];
  assign c_c = v_b[1] ? {1'b0, c_b[1]} : {1'b0, c_b[1]} + {1'b0, c_b[0]};
endmodule
