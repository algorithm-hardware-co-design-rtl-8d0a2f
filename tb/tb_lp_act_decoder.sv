// tb_lp_act_decoder: every 8-bit and every 4-bit activation for es = 0..5 and several scale
// factors, against the bit-by-bit reference decode.
module tb_lp_act_decoder;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  logic [7:0] x;
  logic       act4;
  logic [2:0] es;
  logic signed [7:0] sf;
  adec_t d;
  int checks = 0, failures = 0;
  int sfs [3] = '{0, -3, 2};

  lp_act_decoder dut (.x(x), .act4(act4), .es(es), .sf(sf), .d(d));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a4 = 0; a4 < 2; a4++)
      for (int e = 0; e <= 5; e++)
        for (int si = 0; si < 3; si++)
          for (int v = 0; v < 256; v++) begin
            logic [8:0] exp;
            if (a4 != 0 && (v & 15) != 0) continue;
            act4 = a4[0]; es = 3'(e); sf = 8'(sfs[si]); x = 8'(v);
            #1;
            exp = ref_adec(v, a4, e, sfs[si]);
            checks++;
            if (d !== exp) begin
              failures++;
              if (failures < 10)
                $display("FAIL act4 %0d es %0d sf %0d x %02h: got %h exp %h", a4, e, sfs[si], v, d, exp);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
