// lp_lane_add: accumulation stage of one PE lane.
//
// Adds a product (sign, regime, exponent, log-domain fraction already converted to a linear
// fraction) to the incoming partial sum of the same lane. As in the paper's ADD stage the two
// exponents are compared, the fraction with the smaller exponent is shifted right to align, both
// fractions are put in two's complement by their signs, added, and the result turned back to
// sign and magnitude. The result keeps the regime and exponent of the larger operand.
//
// Lane format (LW = 4, 8 or 16; FW = LW/2): regime is an LW-bit two's complement integer,
// exponent an FW-bit unsigned integer, the scale of a value is 2^(regime + exponent). The
// partial-sum magnitude lf is LW bits with one integer bit ([1.0, 2.0) when normalised); a
// magnitude of 0 is the value zero. The product's magnitude is 1.f with the FW-bit fraction f.
// Design choices beyond the paper: when a sum reaches 2.0 it is shifted right by one and the
// regime incremented (saturating), so that the magnitude never overflows; alignment truncates;
// there is no left normalisation (the encoder normalises). Combinational.
module lp_lane_add #(
  parameter int unsigned LW = 16
) (
  input  logic          p_sign,
  input  logic [LW-1:0] p_regime,
  input  logic [LW/2-1:0] p_exp,
  input  logic [LW/2-1:0] p_lf,
  input  logic          r_sign,
  input  logic [LW-1:0] r_regime,
  input  logic [LW/2-1:0] r_exp,
  input  logic [LW-1:0] r_lf,
  output logic          o_sign,
  output logic [LW-1:0] o_regime,
  output logic [LW/2-1:0] o_exp,
  output logic [LW-1:0] o_lf
);
  localparam int unsigned FW = LW / 2;

  logic signed [LW+1:0] xp, xr, diff;
  logic [LW-1:0] mp, mb, ms, ms_sh;
  logic          sb, ss;
  logic signed [LW+1:0] vb, vs, sum;
  logic [LW:0]   mag;
  logic [LW-1:0] rb;
  logic [FW-1:0] eb;

  assign xp = LW'(signed'(p_regime)) + $signed({2'b00, p_exp});
  assign xr = LW'(signed'(r_regime)) + $signed({2'b00, r_exp});
  // product mantissa 1.f, left-aligned under the integer bit
  assign mp = {1'b1, p_lf, {(LW-1-FW){1'b0}}};

  always_comb begin
    if (xp >= xr) begin
      mb = mp;  sb = p_sign; rb = p_regime; eb = p_exp; ms = r_lf; ss = r_sign;
      diff = xp - xr;
    end else begin
      mb = r_lf; sb = r_sign; rb = r_regime; eb = r_exp; ms = mp; ss = p_sign;
      diff = xr - xp;
    end
    ms_sh = (diff >= LW) ? '0 : ms >> diff;
    vb  = sb ? -$signed({2'b00, mb}) : $signed({2'b00, mb});
    vs  = ss ? -$signed({2'b00, ms_sh}) : $signed({2'b00, ms_sh});
    sum = vb + vs;
    mag = sum[LW+1] ? (LW+1)'(-sum) : sum[LW:0];

    if (r_lf == '0) begin
      // empty partial sum: the product passes through
      o_sign = p_sign; o_regime = p_regime; o_exp = p_exp; o_lf = mp;
    end else if (mag[LW]) begin
      o_sign   = sum[LW+1];
      o_lf     = mag[LW:1];
      o_exp    = eb;
      o_regime = (rb == {1'b0, {(LW-1){1'b1}}}) ? rb : rb + 1'b1;
    end else begin
      o_sign   = sum[LW+1] && (mag != '0);
      o_lf     = mag[LW-1:0];
      o_exp    = eb;
      o_regime = rb;
    end
  end
endmodule
