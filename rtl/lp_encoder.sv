// lp_encoder: unified LP encoder for one PE column.
//
// Turns the partial-sum lanes that leave the bottom of a column (four lanes in MODE-A, two in
// MODE-B, one in MODE-C) into LP output activations of n_out = 4 or 8 bits with exponent size
// es and scale factor sf, each packed into an 8-bit zero-extended byte (a 4-bit result sits in the
// upper nibble). Per lane:
//   1. normalise the linear magnitude lf to 1.x (leading-one detect and left shift, lowering the
//      exponent by the shift);
//   2. convert the F-bit fraction x (F = 2/4/8 by MODE) to the log domain (lp_lin_log);
//   3. form the log2 magnitude L = regime + exponent + lnf / 2^F, add sf, and split it into
//      regime value k = floor((L + sf) / 2^es), exponent bits and fraction bits;
//   4. emit the posit bit string (k+1 ones and a 0 for k >= 0, -k zeros and a 1 for k < 0),
//      then es exponent bits, then the fraction bits, truncated to n_out - 1 bits; k beyond the
//      format's range saturates to the largest or smallest magnitude;
//   5. two's complement the word when the lane is negative.
// A lane whose magnitude is 0 encodes as the pattern 0. The paper states only that the encoder
// mirrors the decoder's primitives, packs to an 8-bit zero-extended format and converts linear
// to log fractions; the rounding (truncation) and saturation are this design's choices.
// Combinational; out[i] is lane i, lanes beyond the mode's count are 0.
module lp_encoder
  import lpa_pkg::*;
(
  input  psum_t             ps,
  input  lp_mode_e          m,
  input  logic              out8,   // 1: 8-bit outputs, 0: 4-bit outputs
  input  logic [2:0]        es,
  input  logic signed [7:0] sf,
  output logic [3:0][7:0]   out
);
  logic [7:0] frac8, lnf8;
  int         xn   [4];     // exponent after normalisation
  logic       nz   [4];     // lane non-zero

  lp_lin_log u_l2g (.lf(frac8), .m(m), .lnf(lnf8));

  always_comb begin
    automatic int lw, fw, sh, p;
    automatic logic [15:0] lf, mant;
    automatic logic [15:0] rg;
    automatic logic [7:0]  ex;
    lf = '0; mant = '0; rg = '0; ex = '0; p = 0; sh = 0;
    lw = 2 * int'(wbits_of(m));
    fw = lw / 2;
    frac8 = '0;
    for (int i = 0; i < 4; i++) begin
      xn[i] = 0;
      nz[i] = 1'b0;
      if (i < int'(lanes_of(m))) begin
        lf = (ps.lf >> (lw * i)) & 16'((1 << lw) - 1);
        rg = (ps.regime >> (lw * i)) & 16'((1 << lw) - 1);
        ex = (ps.exp >> (fw * i)) & 8'((1 << fw) - 1);
        p = 0;
        for (int b = 0; b < 16; b++) if (b < lw && lf[b]) p = b;
        sh   = lw - 1 - p;
        mant = lf << sh;
        nz[i] = (lf != '0);
        // regime lane sign-extended
        xn[i] = int'(rg) - (rg[lw-1] ? (1 << lw) : 0) + int'(ex) - sh;
        for (int b = 0; b < 8; b++)
          if (b < fw) frac8[fw * i + b] = mant[lw - 1 - fw + b];
      end
    end
  end

  always_comb begin
    automatic int fw, n, kmax, lq, q, k, ev, fr, lr, t;
    automatic longint unsigned bs, regbits, body, word;
    lq = 0; q = 0; k = 0; ev = 0; fr = 0; lr = 0; t = 0;
    bs = '0; regbits = '0; body = '0; word = '0;
    fw = int'(wbits_of(m));
    n  = out8 ? 8 : 4;
    kmax = n - 2;
    out = '0;
    for (int i = 0; i < 4; i++) begin
      if (i < int'(lanes_of(m)) && nz[i]) begin
        lq = (xn[i] <<< fw) + int'((lnf8 >> (fw * i)) & 8'((1 << fw) - 1)) + (int'(sf) <<< fw);
        q  = lq >>> fw;
        fr = lq & ((1 << fw) - 1);
        k  = q >>> es;
        ev = q & ((1 << es) - 1);
        if (k > kmax) begin
          body = (64'd1 << (n - 1)) - 1;
        end else if (k < -kmax) begin
          body = 64'd1;
        end else begin
          if (k >= 0) begin
            lr = k + 2;
            regbits = ((64'd1 << (k + 1)) - 1) << 1;
          end else begin
            lr = 1 - k;
            regbits = 64'd1;
          end
          bs = (((regbits << es) | longint'(ev)) << fw) | longint'(fr);
          t  = lr + int'(es) + fw;
          body = (t >= n - 1) ? (bs >> (t - (n - 1))) : (bs << ((n - 1) - t));
        end
        word = ps.sign[i] ? ((64'd1 << n) - body) : body;
        if (out8) out[i] = word[7:0];
        else      out[i] = {word[3:0], 4'b0000};
      end
    end
  end
endmodule
