// tb_lp_lin_log: exhaustive check of the linear-to-log fraction converter: every 8-bit input in every
// MODE, lane by lane, against the converter's definition evaluated in floating point.
module tb_lp_lin_log;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  logic [7:0] xin, yout;
  lp_mode_e   m;
  int checks = 0, failures = 0;

  lp_lin_log dut (.lf(xin), .m(m), .lnf(yout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int md = 0; md < 3; md++) begin
      int fb;
      fb = wbits(md);
      m = lp_mode_e'(md);
      for (int v = 0; v < 256; v++) begin
        xin = 8'(v);
        #1;
        for (int i = 0; i < 8 / fb; i++) begin
          int got, exp;
          got = (int'(yout) >> (fb * i)) & ((1 << fb) - 1);
          exp = ref_lin2log((v >> (fb * i)) & ((1 << fb) - 1), fb);
          checks++;
          if (got != exp) begin
            failures++;
            if (failures < 10) $display("FAIL mode %0d in %02h lane %0d: got %0d exp %0d", md, v, i, got, exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
