// tb_lpa_pkg: checks the package's elaboration-time tables against floating-point evaluation of
// their definitions for all entries and all three fraction widths, and the MODE helpers.
module tb_lpa_pkg;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam tab8_t L8 = gen_tab8(1'b1), G8 = gen_tab8(1'b0);
  localparam tab4_t L4 = gen_tab4(1'b1), G4 = gen_tab4(1'b0);
  localparam tab2_t L2 = gen_tab2(1'b1), G2 = gen_tab2(1'b0);

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; if (failures < 10) $display("FAIL %s: %0d vs %0d", what, got, exp); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    for (int x = 0; x < 256; x++) begin
      chk(int'(L8[x]), ref_log2lin(x, 8), "log2lin8");
      chk(int'(G8[x]), ref_lin2log(x, 8), "lin2log8");
    end
    for (int x = 0; x < 16; x++) begin
      chk(int'(L4[x]), ref_log2lin(x, 4), "log2lin4");
      chk(int'(G4[x]), ref_lin2log(x, 4), "lin2log4");
    end
    for (int x = 0; x < 4; x++) begin
      chk(int'(L2[x]), ref_log2lin(x, 2), "log2lin2");
      chk(int'(G2[x]), ref_lin2log(x, 2), "lin2log2");
    end
    chk(int'(lanes_of(MODE_A)), 4, "lanes A"); chk(int'(lanes_of(MODE_B)), 2, "lanes B");
    chk(int'(lanes_of(MODE_C)), 1, "lanes C");
    chk(int'(wbits_of(MODE_A)), 2, "bits A"); chk(int'(wbits_of(MODE_B)), 4, "bits B");
    chk(int'(wbits_of(MODE_C)), 8, "bits C");
    chk(int'(MODE_A), 0, "enc A"); chk(int'(MODE_B), 1, "enc B"); chk(int'(MODE_C), 2, "enc C");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
