// tb_lp_weight_decoder: every weight byte in every MODE, for all legal exponent sizes
// (es <= n - 3) and several scale factors, against a bit-by-bit reference decode.
module tb_lp_weight_decoder;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  logic [7:0] x;
  lp_mode_e   m;
  logic [2:0] es;
  logic signed [7:0] sf;
  wdec_t d;
  int checks = 0, failures = 0;
  int sfs [4] = '{0, -5, 3, 100};

  lp_weight_decoder dut (.x(x), .m(m), .es(es), .sf(sf), .d(d));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int md = 0; md < 3; md++) begin
      int esmax;
      esmax = (md == 0) ? 0 : wbits(md) - 3;
      for (int e = 0; e <= esmax; e++) begin
        for (int si = 0; si < 4; si++) begin
          for (int v = 0; v < 256; v++) begin
            logic [35:0] exp;
            m = lp_mode_e'(md); es = 3'(e); sf = 8'(sfs[si]); x = 8'(v);
            #1;
            exp = ref_wdec(v, md, e, sfs[si]);
            checks++;
            if (d !== exp) begin
              failures++;
              if (failures < 10)
                $display("FAIL mode %0d es %0d sf %0d x %02h: got %h exp %h", md, e, sfs[si], v, d, exp);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
