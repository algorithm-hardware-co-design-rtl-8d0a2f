// tb_lp_encoder: random column partial sums in each MODE, with 4- and 8-bit outputs, es 0..5
// and several scale factors, against the bit-by-bit reference encoder. Counts that zero lanes,
// unnormalised magnitudes and both saturation directions occur.
module tb_lp_encoder;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  psum_t ps;
  lp_mode_e m;
  logic out8;
  logic [2:0] es;
  logic signed [7:0] sf;
  logic [3:0][7:0] out;
  int checks = 0, failures = 0;

  lp_encoder dut (.ps(ps), .m(m), .out8(out8), .es(es), .sf(sf), .out(out));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int zeros = 0, unnorm = 0;
    cnt_sat_hi = 0; cnt_sat_lo = 0;
    for (int it = 0; it < 20000; it++) begin
      int md, lw, fb, n, e, s;
      lane_t l [4];
      md = $urandom % 3;
      lw = 2 * wbits(md);
      fb = lw / 2;
      n  = ($urandom % 2) ? 8 : 4;
      e  = $urandom % 6;
      s  = int'($urandom % 9) - 4;
      m = lp_mode_e'(md); out8 = (n == 8); es = 3'(e); sf = 8'(s);
      ps = '0;
      for (int i = 0; i < nlanes(md); i++) begin
        l[i].s  = $urandom % 2;
        l[i].r  = sext(int'($urandom % 15) - 7, lw);
        l[i].e  = $urandom % (1 << fb);
        l[i].lf = ($urandom % 6 == 0) ? 0 : int'($urandom % (1 << lw));
        if (l[i].lf == 0) zeros++;
        else if (l[i].lf < (1 << (lw - 1))) unnorm++;
        ps.sign[i] = l[i].s[0];
        ps.regime |= 16'((l[i].r & ((1 << lw) - 1)) << (lw * i));
        ps.exp    |= 8'(l[i].e << (fb * i));
        ps.lf     |= 16'(l[i].lf << (lw * i));
      end
      #1;
      for (int i = 0; i < 4; i++) begin
        int exp;
        exp = (i < nlanes(md)) ? ref_encode(l[i], lw, n, e, s) : 0;
        checks++;
        if (int'(out[i]) != exp) begin
          failures++;
          if (failures < 10)
            $display("FAIL mode %0d n %0d es %0d sf %0d lane %0d (s%0d r%0d e%0d lf%0h): got %02h exp %02h",
                     md, n, e, s, i, l[i].s, l[i].r, l[i].e, l[i].lf, out[i], exp);
        end
      end
    end
    $display("events: zero=%0d unnormalised=%0d sat_hi=%0d sat_lo=%0d", zeros, unnorm, cnt_sat_hi, cnt_sat_lo);
    checks++;
    if (zeros == 0 || unnorm == 0 || cnt_sat_hi == 0 || cnt_sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
