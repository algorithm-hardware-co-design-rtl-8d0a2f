// tb_lp_ppu: output-format rules (n_out = min(8, 2 n_w), es_out = min(5, 2 es_w),
// sf_out = sf_a + sf_w with saturation) for all inputs, and the ReLU output stage with its
// one-clock latency on random words.
module tb_lp_ppu;
  import lpa_pkg::*;
  localparam int NB = 32, AW = 12;
  logic clk = 0, rst_n = 0;
  lp_mode_e m;
  logic [2:0] es_w, es_out;
  logic signed [7:0] sf_w, sf_a, sf_out;
  logic out8, relu, in_valid, out_valid;
  logic [AW-1:0] in_addr, out_addr;
  logic [NB-1:0][7:0] in_data, out_data;
  int checks = 0, failures = 0;

  lp_ppu #(.NB(NB), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m = MODE_A; es_w = 0; sf_w = 0; sf_a = 0; relu = 0; in_valid = 0; in_addr = 0; in_data = '0;
    // format rules
    for (int md = 0; md < 3; md++)
      for (int e = 0; e < 8; e++)
        for (int a = -128; a < 128; a += 7)
          for (int w = -128; w < 128; w += 11) begin
            int nexp, eexp, sexp;
            m = lp_mode_e'(md); es_w = 3'(e); sf_a = 8'(a); sf_w = 8'(w);
            #1;
            nexp = (2 * ((md == 0) ? 2 : (md == 1) ? 4 : 8) > 8) ? 8 : 2 * ((md == 0) ? 2 : (md == 1) ? 4 : 8);
            eexp = (2 * e > 5) ? 5 : 2 * e;
            sexp = (a + w > 127) ? 127 : (a + w < -128) ? -128 : a + w;
            checks++;
            if (int'(out8) != int'(nexp == 8) || int'(es_out) != eexp || int'(sf_out) != sexp) begin
              failures++;
              if (failures < 10) $display("FAIL fmt md %0d es %0d sf %0d %0d", md, e, a, w);
            end
          end
    rst_n = 1;
    // ReLU stage
    for (int it = 0; it < 2000; it++) begin
      logic [NB-1:0][7:0] d;
      logic r, v;
      logic [AW-1:0] ad;
      @(negedge clk);
      for (int b = 0; b < NB; b++) d[b] = 8'($urandom);
      r = 1'($urandom); v = 1'($urandom); ad = AW'($urandom);
      in_data = d; relu = r; in_valid = v; in_addr = ad;
      @(posedge clk); #1;
      checks++;
      if (out_valid !== v) failures++;
      if (v) begin
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (out_data[b] !== ((r && d[b][7]) ? 8'h00 : d[b])) failures++;
        end
        checks++;
        if (out_addr !== ad) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
