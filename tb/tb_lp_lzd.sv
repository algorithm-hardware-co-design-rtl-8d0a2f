// tb_lp_lzd: exhaustive check of the mixed-precision leading-zero detector: for every 8-bit
// input, the counts and valid flags of the four 2-bit, two 4-bit and one 8-bit fields.
module tb_lp_lzd;
  import lpa_ref_pkg::*;
  logic [7:0] op;
  logic [3:0][1:0] c_a;
  logic [3:0]      v_a;
  logic [1:0][2:0] c_b;
  logic [1:0]      v_b;
  logic [3:0]      c_c;
  logic            v_c;
  int checks = 0, failures = 0;

  lp_lzd dut (.op(op), .c_a(c_a), .v_a(v_a), .c_b(c_b), .v_b(v_b), .c_c(c_c), .v_c(v_c));

  task automatic chk(input int got, input int exp, input string what, input int x);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s op %02h: got %0d exp %0d", what, x, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++) begin
      op = 8'(x);
      #1;
      for (int j = 0; j < 4; j++) begin
        chk(int'(c_a[j]), ref_lzc((x >> (2 * j)) & 3, 2), "c_a", x);
        chk(int'(v_a[j]), int'(((x >> (2 * j)) & 3) != 0), "v_a", x);
      end
      for (int j = 0; j < 2; j++) begin
        chk(int'(c_b[j]), ref_lzc((x >> (4 * j)) & 15, 4), "c_b", x);
        chk(int'(v_b[j]), int'(((x >> (4 * j)) & 15) != 0), "v_b", x);
      end
      chk(int'(c_c), ref_lzc(x, 8), "c_c", x);
      chk(int'(v_c), int'(x != 0), "v_c", x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
