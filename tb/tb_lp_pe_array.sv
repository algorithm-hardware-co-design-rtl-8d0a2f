// tb_lp_pe_array: the 8 x 8 array in each MODE. Weights are shifted down the columns (row 7
// first) and swapped in; activation vectors enter skewed by one clock per row; each column's
// bottom partial sum is compared with the reference accumulation over rows 0..7, and its arrival
// time with the systolic latency (vector t leaves column c at ROWS + c clocks after row 0 took it).
module tb_lp_pe_array;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  localparam int ROWS = 8, COLS = 8, T = 24;
  logic clk = 0, rst_n = 0;
  lp_mode_e m;
  adec_t a_in [ROWS];
  logic  a_valid [ROWS];
  wdec_t w_in [COLS];
  logic  w_shift, w_swap;
  psum_t ps_out [COLS];
  logic  ps_valid [COLS];
  int checks = 0, failures = 0;

  lp_pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [35:0] wd [ROWS][COLS];
  logic [8:0]  ad [T][ROWS];
  psum_t       exp_ps [T][COLS];
  int          got_n [COLS];
  int          cyc, t0;

  always @(posedge clk) cyc <= cyc + 1;

  // collect outputs
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < COLS; c++) begin
        if (ps_valid[c]) begin
          int t;
          t = got_n[c];
          checks++;
          if (t >= T || ps_out[c] !== exp_ps[t][c] || cyc - t0 != t + ROWS + c) begin
            failures++;
            if (failures < 10) $display("FAIL col %0d vec %0d cyc %0d: got %h exp %h", c, t, cyc - t0,
                                        ps_out[c], exp_ps[t][c]);
          end
          got_n[c] = got_n[c] + 1;
        end
      end
    end
  end

  initial begin
    cyc = 0;
    for (int r = 0; r < ROWS; r++) begin a_in[r] = '0; a_valid[r] = 0; end
    for (int c = 0; c < COLS; c++) w_in[c] = '0;
    w_shift = 0; w_swap = 0; m = MODE_A;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int md = 0; md < 3; md++) begin
      int esw;
      esw = (md == 2) ? 3 : (md == 1) ? 1 : 0;
      m = lp_mode_e'(md);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) wd[r][c] = ref_wdec($urandom % 256, md, esw, 1);
      for (int t = 0; t < T; t++)
        for (int r = 0; r < ROWS; r++) ad[t][r] = ref_adec($urandom % 256, 0, 1, 0);
      // reference
      for (int t = 0; t < T; t++)
        for (int c = 0; c < COLS; c++) begin
          int lw, fb;
          psum_t o;
          lw = 2 * wbits(md); fb = lw / 2;
          o = '0;
          for (int i = 0; i < nlanes(md); i++) begin
            lane_t acc;
            acc.s = 0; acc.r = 0; acc.e = 0; acc.lf = 0;
            for (int r = 0; r < ROWS; r++) acc = ref_add(ref_product(md, wd[r][c], ad[t][r], i), acc, lw);
            o.sign[i] = acc.s[0];
            o.regime |= 16'((acc.r & ((1 << lw) - 1)) << (lw * i));
            o.exp    |= 8'(acc.e << (fb * i));
            o.lf     |= 16'(acc.lf << (lw * i));
          end
          exp_ps[t][c] = o;
        end
      // load weights, bottom row first
      for (int k = 0; k < ROWS; k++) begin
        @(negedge clk);
        for (int c = 0; c < COLS; c++) w_in[c] = wd[ROWS - 1 - k][c];
        w_shift = 1;
      end
      @(negedge clk); w_shift = 0; w_swap = 1;
      @(negedge clk); w_swap = 0;
      for (int c = 0; c < COLS; c++) got_n[c] = 0;
      // stream, skewed
      t0 = cyc + 1;
      for (int k = 0; k < T + ROWS; k++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          int t;
          t = k - r;
          a_valid[r] = (t >= 0 && t < T);
          a_in[r] = (t >= 0 && t < T) ? adec_t'(ad[t][r]) : '0;
        end
      end
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) a_valid[r] = 0;
      repeat (COLS + 4) @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (got_n[c] != T) begin failures++; $display("FAIL col %0d got %0d results", c, got_n[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
