// tb_lp_twos_comp: exhaustive check of the mixed-precision two's complementer.
// Every 8-bit operand in every MODE is compared with a per-sub-word negation computed by the
// reference model.
module tb_lp_twos_comp;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  logic [7:0] op, ng;
  lp_mode_e   m;
  int checks = 0, failures = 0;

  lp_twos_comp dut (.op(op), .m(m), .op_ng(ng));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int md = 0; md < 3; md++) begin
      m = lp_mode_e'(md);
      for (int x = 0; x < 256; x++) begin
        op = 8'(x);
        #1;
        checks++;
        if (int'(ng) != ref_twos(x, wbits(md))) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d op %02h: got %02h exp %02h", md, x, ng, ref_twos(x, wbits(md)));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
