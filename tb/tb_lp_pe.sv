// tb_lp_pe: one PE in all three MODEs. Weights are shifted into the shadow register and swapped
// in; random decoded activations and partial sums are applied every clock and the registered
// partial sum is compared with the reference product-and-accumulate of every lane. New shadow
// weights are loaded while computing to check that the active weights change only on swap.
module tb_lp_pe;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  lp_mode_e m;
  adec_t a_in, a_out;
  logic a_valid_in, a_valid_out;
  psum_t ps_in, ps_out;
  wdec_t w_in, w_out;
  logic w_shift, w_swap;
  int checks = 0, failures = 0;

  lp_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic psum_t expected(input int md, input logic [35:0] wd, input logic [8:0] ad,
                                     input psum_t pin);
    psum_t o;
    int lw, fb;
    lw = 2 * wbits(md);
    fb = lw / 2;
    o = '0;
    for (int i = 0; i < nlanes(md); i++) begin
      lane_t p, a, r;
      p = ref_product(md, wd, ad, i);
      a.s  = int'(pin.sign[i]);
      a.r  = sext(int'(pin.regime >> (lw * i)), lw);
      a.e  = int'(pin.exp >> (fb * i)) & ((1 << fb) - 1);
      a.lf = int'(pin.lf >> (lw * i)) & ((1 << lw) - 1);
      r = ref_add(p, a, lw);
      o.sign[i] = r.s[0];
      o.regime |= 16'((r.r & ((1 << lw) - 1)) << (lw * i));
      o.exp    |= 8'(r.e << (fb * i));
      o.lf     |= 16'(r.lf << (lw * i));
    end
    return o;
  endfunction

  function automatic psum_t rand_psum(input int md);
    psum_t p;
    int lw, fb;
    lw = 2 * wbits(md);
    fb = lw / 2;
    p = '0;
    for (int i = 0; i < nlanes(md); i++) begin
      p.sign[i] = 1'($urandom);
      p.regime |= 16'((sext(int'($urandom % 9) - 4, lw) & ((1 << lw) - 1)) << (lw * i));
      p.exp    |= 8'(($urandom % (1 << fb)) << (fb * i));
      p.lf     |= 16'((($urandom % 5 == 0) ? 0 : $urandom % (1 << lw)) << (lw * i));
    end
    return p;
  endfunction

  logic [35:0] w_active, w_next;

  task automatic load_shadow(input logic [35:0] wd);
    @(negedge clk);
    w_in = wd; w_shift = 1;
    @(negedge clk);
    w_shift = 0;
    checks++;
    if (w_out !== wd) begin failures++; $display("FAIL shadow/w_out"); end
  endtask

  initial begin
    m = MODE_A; a_in = '0; a_valid_in = 0; ps_in = '0; w_in = '0; w_shift = 0; w_swap = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int md = 0; md < 3; md++) begin
      int esw;
      m = lp_mode_e'(md);
      esw = (md == 2) ? 2 : (md == 1) ? 1 : 0;
      w_active = ref_wdec($urandom % 256, md, esw, int'($urandom % 3) - 1);
      load_shadow(w_active);
      @(negedge clk); w_swap = 1; @(negedge clk); w_swap = 0;
      for (int it = 0; it < 3000; it++) begin
        logic [8:0] ad;
        psum_t pin, exp;
        // load the next weights in the background half-way, swap them in later
        if (it == 1500) begin
          w_next = ref_wdec($urandom % 256, md, esw, 0);
          @(negedge clk); w_in = w_next; w_shift = 1;
        end
        if (it == 2000) begin
          @(negedge clk); w_swap = 1; w_shift = 0;
          @(negedge clk); w_swap = 0;
          w_active = w_next;
        end
        @(negedge clk);
        w_shift = 0;
        ad  = ref_adec($urandom % 256, 0, 1, 0);
        pin = rand_psum(md);
        a_in = ad; a_valid_in = 1'($urandom); ps_in = pin;
        exp = expected(md, w_active, ad, pin);
        @(posedge clk); #1;
        checks++;
        if (ps_out !== exp || a_out !== adec_t'(ad) || a_valid_out !== a_valid_in) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d it %0d: ps_out %h exp %h", md, it, ps_out, exp);
        end
      end
    end
    $display("events: renorm=%0d cancel=%0d", cnt_renorm, cnt_cancel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
