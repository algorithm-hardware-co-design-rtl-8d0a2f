// lp_weight_decoder: unified LP decoder for one weight-buffer byte (one PE column).
//
// The byte holds one 8-bit, two 4-bit or four 2-bit LP weights (MODE-C/B/A). Each sub-word of
// width w is decoded as in the paper's decoder: its sign is extracted, the sub-word is replaced
// by its two's complement when negative (lp_twos_comp), the bits below the sign are inverted when
// the first regime bit is 1 so that the regime run becomes a run of zeros, and a leading-zero
// count (lp_lzd) gives the run length m. A 1 is appended below each sub-word's bits before the
// count so that a run reaching the end of the word counts as w-1. The regime value is
// k = -m (first regime bit 0) or m - 1 (first regime bit 1), and the regime output is
// k * 2^es - sf, saturated to its lane. The bits after the regime (and its terminating bit, when
// there is one) form the ulfx: the first es bits are the exponent (integer part, missing bits
// read as 0) and the rest the log-domain fraction, left-aligned.
//
// Outputs (lane i in bits of lane width): sign[i]; regime lane = 4/8/16-bit two's complement;
// ulfx lane = 2.2, 4.4 or 8.8 unsigned fixed point. Unused lanes are 0. Combinational.
// The paper's decoder takes MODE, es and sf from the controller and no regime-size input, so the
// regime run extends up to the end of the word (rs = n - 1), as in standard posits. The pattern
// 0 is not treated as zero (the decoded word has no zero flag); it decodes as the smallest
// magnitude of its format.
module lp_weight_decoder
  import lpa_pkg::*;
(
  input  logic [7:0]        x,      // weight-buffer byte
  input  lp_mode_e          m,
  input  logic [2:0]        es,     // exponent size of the layer's weights
  input  logic signed [7:0] sf,     // scale factor (integer, log2 units)
  output wdec_t             d
);
  logic [7:0] y;          // sub-words after conditional negation
  logic [7:0] zp;         // regime bits made a run of zeros, with a terminating 1 appended
  logic [3:0][1:0] c_a;
  logic [3:0]      v_a;
  logic [1:0][2:0] c_b;
  logic [1:0]      v_b;
  logic [3:0]      c_c;
  logic            v_c;

  lp_twos_comp u_tc (.op(x), .m(m), .op_ng(y));
  lp_lzd u_lzd (.op(zp), .c_a(c_a), .v_a(v_a), .c_b(c_b), .v_b(v_b), .c_c(c_c), .v_c(v_c));

  int w;
  always_comb begin
    w = int'(wbits_of(m));
    for (int p = 0; p < 8; p++) begin
      int o;
      o = p - (p % w);
      if (p % w == 0) zp[p] = 1'b1;
      else            zp[p] = y[p - 1] ^ y[o + w - 2];
    end
  end

  always_comb begin
    d = '0;
    for (int i = 0; i < 4; i++) begin
      int o, cnt, k, len, esl, rg, lo, hi;
      logic [7:0] b, rem, f;
      logic [15:0] e;
      logic r0;
      // defaults, so that no temporary keeps a value from a previous pass
      o = 0; cnt = 0; k = 0; len = 0; esl = 0; rg = 0; lo = 0; hi = 0;
      b = '0; rem = '0; f = '0; e = '0; r0 = 1'b0;
      if (i < int'(lanes_of(m))) begin
      o   = i * w;
      r0  = y[o + w - 2];
      case (m)
        MODE_A:  cnt = int'(c_a[i]);
        MODE_B:  cnt = int'(c_b[i]);
        default: cnt = int'(c_c);
      endcase
      // regime value: NOT/mux then +/-1 (~m + 1 = -m, or m - 1)
      k   = r0 ? cnt - 1 : -cnt;
      len = (cnt < w - 1) ? cnt + 1 : cnt;
      b   = (y >> o) & 8'((1 << (w - 1)) - 1);
      rem = (b << len) & 8'((1 << (w - 1)) - 1);
      esl = (int'(es) > w - 1) ? w - 1 : int'(es);
      e   = ({8'b0, rem} << es) >> (w - 1);
      f   = (rem << esl) & 8'((1 << (w - 1)) - 1);
      d.sign[i] = x[o + w - 1];
      // ulfx lane: w-bit integer part, w-bit fraction part
      for (int q = 0; q < 8; q++) begin
        if (q < w) begin
          d.ulfx[2*w*i + w + q] = e[q];
          d.ulfx[2*w*i + q]     = (q == 0) ? 1'b0 : f[q-1];
        end
      end
      // regime lane: k * 2^es - sf, saturated to 2w bits
      rg = (k <<< es) - int'(sf);
      hi = (1 << (2 * w - 1)) - 1;
      lo = -(1 << (2 * w - 1));
      if (rg > hi) rg = hi;
      if (rg < lo) rg = lo;
      for (int q = 0; q < 16; q++) if (q < 2 * w) d.regime[2*w*i + q] = rg[q];
      end
    end
  end
endmodule
