// tb_lp_lane_add: random products and partial sums for the 4-, 8- and 16-bit lane adders,
// against the integer reference of the accumulation step. Counts that alignment shifts,
// cancellations, renormalisations and empty partial sums all occur.
module tb_lp_lane_add;
  import lpa_ref_pkg::*;
  int checks = 0, failures = 0;

  logic        ps4, rs4, os4, ps8, rs8, os8, ps16, rs16, os16;
  logic [3:0]  pr4, rr4, or4, rl4, ol4;
  logic [1:0]  pe4, pf4, re4, oe4;
  logic [7:0]  pr8, rr8, or8, rl8, ol8;
  logic [3:0]  pe8, pf8, re8, oe8;
  logic [15:0] pr16, rr16, or16, rl16, ol16;
  logic [7:0]  pe16, pf16, re16, oe16;

  lp_lane_add #(.LW(4)) d4 (.p_sign(ps4), .p_regime(pr4), .p_exp(pe4), .p_lf(pf4),
    .r_sign(rs4), .r_regime(rr4), .r_exp(re4), .r_lf(rl4),
    .o_sign(os4), .o_regime(or4), .o_exp(oe4), .o_lf(ol4));
  lp_lane_add #(.LW(8)) d8 (.p_sign(ps8), .p_regime(pr8), .p_exp(pe8), .p_lf(pf8),
    .r_sign(rs8), .r_regime(rr8), .r_exp(re8), .r_lf(rl8),
    .o_sign(os8), .o_regime(or8), .o_exp(oe8), .o_lf(ol8));
  lp_lane_add #(.LW(16)) d16 (.p_sign(ps16), .p_regime(pr16), .p_exp(pe16), .p_lf(pf16),
    .r_sign(rs16), .r_regime(rr16), .r_exp(re16), .r_lf(rl16),
    .o_sign(os16), .o_regime(or16), .o_exp(oe16), .o_lf(ol16));

  function automatic lane_t mk(input int s, input int r, input int e, input int lf);
    lane_t l;
    l.s = s; l.r = r; l.e = e; l.lf = lf;
    return l;
  endfunction

  task automatic cmp(input int lw, input lane_t exp, input int s, input int r, input int e,
                     input int lf);
    checks++;
    if (exp.s != s || (exp.r & ((1 << lw) - 1)) != r || exp.e != e || exp.lf != lf) begin
      failures++;
      if (failures < 10)
        $display("FAIL lw %0d: got s%0d r%0d e%0d lf%0h exp s%0d r%0d e%0d lf%0h", lw, s, r, e, lf,
                 exp.s, exp.r, exp.e, exp.lf);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int empties = 0;
    cnt_renorm = 0; cnt_cancel = 0; cnt_align_out = 0;
    for (int it = 0; it < 20000; it++) begin
      lane_t p, a, ex;
      int lw, fb, zero;
      zero = ($urandom % 8 == 0);
      if (zero) empties++;
      for (int li = 0; li < 3; li++) begin
        lw = (li == 0) ? 4 : (li == 1) ? 8 : 16;
        fb = lw / 2;
        // small regime range so exponents often coincide or sit close
        p = mk($urandom % 2, sext(int'($urandom % 7) - 3, lw), $urandom % (1 << fb),
               int'($urandom % (1 << fb)));
        a = mk($urandom % 2, sext(int'($urandom % 7) - 3, lw), $urandom % (1 << fb),
               zero ? 0 : int'($urandom % (1 << lw)));
        case (li)
          0: begin ps4 = p.s[0]; pr4 = 4'(p.r); pe4 = 2'(p.e); pf4 = 2'(p.lf);
                   rs4 = a.s[0]; rr4 = 4'(a.r); re4 = 2'(a.e); rl4 = 4'(a.lf); end
          1: begin ps8 = p.s[0]; pr8 = 8'(p.r); pe8 = 4'(p.e); pf8 = 4'(p.lf);
                   rs8 = a.s[0]; rr8 = 8'(a.r); re8 = 4'(a.e); rl8 = 8'(a.lf); end
          default: begin ps16 = p.s[0]; pr16 = 16'(p.r); pe16 = 8'(p.e); pf16 = 8'(p.lf);
                   rs16 = a.s[0]; rr16 = 16'(a.r); re16 = 8'(a.e); rl16 = 16'(a.lf); end
        endcase
      end
      #1;
      for (int li = 0; li < 3; li++) begin
        lane_t pp, aa;
        lw = (li == 0) ? 4 : (li == 1) ? 8 : 16;
        fb = lw / 2;
        case (li)
          0: begin pp = mk(ps4, sext(pr4, 4), pe4, (1 << 3) | (pf4 << 1));
                   aa = mk(rs4, sext(rr4, 4), re4, rl4);
                   cmp(4, ref_add(pp, aa, 4), os4, or4, oe4, ol4); end
          1: begin pp = mk(ps8, sext(pr8, 8), pe8, (1 << 7) | (pf8 << 3));
                   aa = mk(rs8, sext(rr8, 8), re8, rl8);
                   cmp(8, ref_add(pp, aa, 8), os8, or8, oe8, ol8); end
          default: begin pp = mk(ps16, sext(pr16, 16), pe16, (1 << 15) | (pf16 << 7));
                   aa = mk(rs16, sext(rr16, 16), re16, rl16);
                   cmp(16, ref_add(pp, aa, 16), os16, or16, oe16, ol16); end
        endcase
      end
    end
    $display("events: renorm=%0d cancel=%0d align_loss=%0d empty=%0d", cnt_renorm, cnt_cancel,
             cnt_align_out, empties);
    checks++;
    if (cnt_renorm == 0 || cnt_cancel == 0 || cnt_align_out == 0 || empties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
