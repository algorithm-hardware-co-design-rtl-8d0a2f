// tb_lpa_controller: runs tile commands through the controller with the array modelled as a
// fixed delay from a_inject to res_valid. Checks the weight-buffer read order (row ROWS-1 first),
// that each w_shift follows its read by one clock, that w_swap comes once, after the last shift,
// that input and output-buffer addresses are consecutive from their bases, that done comes once
// per command, and the command's total cycle count. Commands alternate with preload pairs: the
// first command of a pair preloads the next tile's weights (reads from wb_next while streaming),
// the second skips the weight load; both the read addresses and the shortened cycle count are
// checked.
module tb_lpa_controller;
  import lpa_pkg::*;
  localparam int ROWS = 8, LAT = 17;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  lpa_cfg_t cmd, cfg;
  logic wb_re, w_shift, w_swap, ib_re, a_inject, res_valid, ob_we, ob_re, ppu_valid;
  logic [14:0] wb_raddr;
  logic [13:0] ib_raddr;
  logic [11:0] ob_waddr, ob_raddr, ppu_addr;
  logic [LAT-1:0] dly;
  int checks = 0, failures = 0;

  lpa_controller #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) dly <= {dly[LAT-2:0], a_inject & rst_n};
  assign res_valid = dly[LAT-1];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dly = '0; start = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      int nv, cyc, nwb, nib, nobw, nobr, nppu, nswap, ndone, last_shift, swap_at, prev_wb, npl;
      bit pre, ready;
      pre   = (k % 4) == 1;
      ready = (k % 4) == 2;
      nv = 1 + $urandom % 20;
      if (!ready) cmd = '0;
      cmd.mode = lp_mode_e'(ready ? int'(cmd.mode) : k % 3);
      cmd.w_pre = pre;
      cmd.w_ready = ready;
      cmd.wb_next = 16'(2000 + $urandom % 1000);
      cmd.wb_base = 16'($urandom % 1000);
      cmd.ib_base = 16'($urandom % 1000);
      cmd.ob_base = 16'($urandom % 1000);
      cmd.num_vec = 16'(nv);
      @(negedge clk); start = 1;
      @(posedge clk); #1; start = 0;
      cyc = 1; nwb = 0; nib = 0; nobw = 0; nobr = 0; nppu = 0; nswap = 0; ndone = 0;
      last_shift = -1; swap_at = -1; prev_wb = 0; npl = 0;
      while (ndone == 0 && cyc < 2000) begin
        if (w_shift) begin chk(prev_wb == 1, "w_shift without read"); last_shift = cyc; end
        prev_wb = 0;
        if (wb_re && swap_at < 0) begin
          chk(int'(wb_raddr) == int'(cmd.wb_base) + ROWS - 1 - nwb, "wb address");
          nwb++; prev_wb = 1;
        end else if (wb_re) begin
          chk(pre && int'(wb_raddr) == int'(cmd.wb_next) + ROWS - 1 - npl, "preload address");
          chk(nib > 0 || ib_re, "preload while streaming");
          npl++; prev_wb = 1;
        end
        if (w_swap) begin
          nswap++; swap_at = cyc;
          chk(ready ? (cyc == 1 && nwb == 0) : (last_shift == cyc - 1 && nwb == ROWS), "swap after last shift");
        end
        if (ib_re) begin chk(int'(ib_raddr) == int'(cmd.ib_base) + nib, "ib address"); chk(swap_at > 0, "stream before swap"); nib++; end
        if (ob_we) begin chk(int'(ob_waddr) == int'(cmd.ob_base) + nobw, "ob write address"); nobw++; end
        if (ob_re) begin chk(int'(ob_raddr) == int'(cmd.ob_base) + nobr, "ob read address"); chk(nobw == nv, "drain before flush"); nobr++; end
        if (ppu_valid) nppu++;
        if (done) ndone++;
        if (ndone == 0) begin @(posedge clk); #1; cyc++; end
      end
      chk(npl == (pre ? ROWS : 0), "preload reads");
      chk(nwb == (ready ? 0 : ROWS) && nswap == 1 && nib == nv && nobw == nv && nobr == nv && nppu == nv && ndone == 1, "counts");
      // LOAD ROWS+1, SWAP 1, COMPUTE nv, array latency + 2 (write count, FLUSH exit),
      // DRAIN nv, FIN 2, done registered 1
      chk(cyc == (ready ? 0 : ROWS + 1) + 1 + nv + (LAT + 2) + nv + 3, $sformatf("cycles %0d", cyc));
      @(negedge clk);
      chk(!busy, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
