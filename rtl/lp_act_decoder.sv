// lp_act_decoder: LP decoder for one input-buffer byte (one PE row).
//
// Activations are 8-bit LP, or 4-bit LP stored in the upper nibble of the byte with the low
// nibble zero. The decoder reuses the weight decoder's primitives in their 8-bit setting: the
// word is negated when its sign is set (lp_twos_comp), the bits after the sign are inverted by the
// first regime bit, and lp_lzd counts the regime run (a 1 is placed right after the last
// significant bit, so padding zeros of a 4-bit activation never join the run).
//
// Its outputs are sized, as in the paper, to a 1-bit sign, 4-bit regime and 4-bit ulfx. This
// design fixes their meaning: ulfx is 2.2 fixed point holding the two low exponent bits and the
// first two log-fraction bits (further fraction bits are truncated); the exponent bits above the
// two low ones are multiples of 4 and are folded into the regime output, which is
// k * 2^es - sf + 4 * (e >> 2), saturated to the 4-bit range -8..7. Combinational.
module lp_act_decoder
  import lpa_pkg::*;
(
  input  logic [7:0]        x,
  input  logic              act4,   // 1: 4-bit activation in x[7:4]
  input  logic [2:0]        es,
  input  logic signed [7:0] sf,
  output adec_t             d
);
  logic [7:0] y, zp;
  logic [3:0][1:0] c_a;
  logic [3:0]      v_a;
  logic [1:0][2:0] c_b;
  logic [1:0]      v_b;
  logic [3:0]      c_c;
  logic            v_c;
  logic [6:0]      z;

  lp_twos_comp u_tc (.op(x), .m(MODE_C), .op_ng(y));
  lp_lzd u_lzd (.op(zp), .c_a(c_a), .v_a(v_a), .c_b(c_b), .v_b(v_b), .c_c(c_c), .v_c(v_c));

  assign z  = y[6:0] ^ {7{y[6]}};
  assign zp = act4 ? {1'b0, z[6:4], 4'b1000} : {z, 1'b1};

  always_comb begin
    int w, cnt, k, len, rg, ex;
    logic [6:0] b, rem, f;
    logic [13:0] eb;
    w   = act4 ? 4 : 8;
    // zp carries one extra leading 0 in the 4-bit case
    cnt = act4 ? int'(c_c) - 1 : int'(c_c);
    k   = y[6] ? cnt - 1 : -cnt;
    len = (cnt < w - 1) ? cnt + 1 : cnt;
    b   = act4 ? {y[6:4], 4'b0} : y[6:0];          // significant bits, left-aligned in 7
    rem = b << len;
    ex  = (int'(es) > w - 1) ? w - 1 : int'(es);
    eb  = ({7'b0, rem} << es) >> 7;
    f   = rem << ex;
    rg  = (k <<< es) - int'(sf) + 4 * int'(eb >> 2);
    if (rg > 7)  rg = 7;
    if (rg < -8) rg = -8;
    d.sign   = x[7];
    d.regime = rg[3:0];
    d.ulfx   = {eb[1:0], f[6:5]};
  end
endmodule
