// tb_lpa_top: end-to-end test of the LP accelerator at its default size (8 x 8 array,
// 512 kB of buffers).
//
// For a series of tiles covering MODE-A (2-bit weights, 4-bit activations and outputs),
// MODE-B and MODE-C (4/8-bit weights, 8-bit activations and outputs), with and without ReLU and
// with varied exponent sizes and scale factors, it loads weights and activations through the load
// port, issues the command, and compares every output word with a reference computed by
// lpa_ref_pkg (decode, lane products, accumulation down each column, encoding, ReLU). It also
// checks that results stream out one word per clock, the tile's cycle count (shorter when the
// weights were preloaded), and the output format reported for the next layer. Each mechanism of
// the design must occur at least once: each MODE, 4-bit activations, weight swap, weights
// preloaded during the previous tile, ReLU clipping, renormalisation and cancellation in the
// accumulators, and saturation in the encoder.
module tb_lpa_top;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  localparam int ROWS = 8, COLS = 8;
  logic clk = 0, rst_n = 0;
  logic ld_we, ld_sel, start, busy, done, out_valid, out_is8;
  logic [15:0] ld_addr, out_addr;
  logic [63:0] ld_data;
  lpa_cfg_t cmd;
  logic [COLS*4-1:0][7:0] out_data;
  logic [2:0] out_es;
  logic signed [7:0] out_sf;
  int checks = 0, failures = 0;

  lpa_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  int n_mode [3], n_act4, n_relu_clip, n_swap, n_preload;
  logic [7:0]  wbyte [ROWS][COLS];
  logic [7:0]  nwbyte [ROWS][COLS];   // next tile's weights, preloaded
  int          nwb_base;
  logic [7:0]  abyte [][ROWS];
  logic [COLS*4-1:0][7:0] expw [];

  task automatic run_tile(input int md, input int act4, input int esw, input int sfw,
                          input int esa, input int sfa, input int relu, input int nv,
                          input bit pre = 0, input bit ready = 0);
    int wb_base, ib_base, ob_base, n, eso, sfo, cyc, nout, first_out, last_out;
    logic [35:0] wd [ROWS][COLS];
    logic [8:0]  ad [ROWS];
    wb_base = ready ? nwb_base : $urandom % 15000;
    ib_base = $urandom % 16000;
    ob_base = $urandom % 4000;
    abyte = new[nv];
    expw  = new[nv];
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) wbyte[r][c] = ready ? nwbyte[r][c] : 8'($urandom);
    if (pre) begin
      nwb_base = 15000 + $urandom % 15000;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) nwbyte[r][c] = 8'($urandom);
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        ld_we = 1; ld_sel = 0; ld_addr = 16'(nwb_base + r);
        for (int c = 0; c < COLS; c++) ld_data[8*c +: 8] = nwbyte[r][c];
      end
    end
    for (int t = 0; t < nv; t++)
      for (int r = 0; r < ROWS; r++) abyte[t][r] = act4 ? {4'($urandom), 4'b0} : 8'($urandom);
    // load port
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      ld_we = 1; ld_sel = 0; ld_addr = 16'(wb_base + r);
      for (int c = 0; c < COLS; c++) ld_data[8*c +: 8] = wbyte[r][c];
    end
    for (int t = 0; t < nv; t++) begin
      @(negedge clk);
      ld_we = 1; ld_sel = 1; ld_addr = 16'(ib_base + t);
      for (int r = 0; r < ROWS; r++) ld_data[8*r +: 8] = abyte[t][r];
    end
    @(negedge clk); ld_we = 0;
    // reference
    n   = (md == 0) ? 4 : 8;
    eso = (2 * esw > 5) ? 5 : 2 * esw;
    sfo = sfa + sfw;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) wd[r][c] = ref_wdec(wbyte[r][c], md, esw, sfw);
    for (int t = 0; t < nv; t++) begin
      for (int r = 0; r < ROWS; r++) ad[r] = ref_adec(abyte[t][r], act4, esa, sfa);
      expw[t] = '0;
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < nlanes(md); i++) begin
          lane_t acc;
          int b;
          acc.s = 0; acc.r = 0; acc.e = 0; acc.lf = 0;
          for (int r = 0; r < ROWS; r++)
            acc = ref_add(ref_product(md, wd[r][c], ad[r], i), acc, 2 * wbits(md));
          b = ref_encode(acc, 2 * wbits(md), n, eso, sfo);
          if (relu != 0 && b >= 128) begin b = 0; n_relu_clip++; end
          expw[t][4*c + i] = 8'(b);
        end
    end
    // command
    cmd = '0;
    cmd.mode = lp_mode_e'(md); cmd.es_w = 3'(esw); cmd.sf_w = 8'(sfw); cmd.act4 = act4[0];
    cmd.es_a = 3'(esa); cmd.sf_a = 8'(sfa); cmd.relu = relu[0];
    cmd.wb_base = 16'(wb_base); cmd.ib_base = 16'(ib_base); cmd.ob_base = 16'(ob_base);
    cmd.num_vec = 16'(nv);
    cmd.w_pre = pre; cmd.wb_next = 16'(nwb_base); cmd.w_ready = ready;
    @(negedge clk); start = 1;
    @(posedge clk); #1; start = 0;
    cyc = 1; nout = 0; first_out = -1; last_out = -1;
    while (!done && cyc < 5000) begin
      if (dut.w_swap) n_swap++;
      if (out_valid) begin
        int t;
        t = int'(out_addr) - ob_base;
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
        chk(t == nout, $sformatf("output order %0d", t));
        checks++;
        if (t < 0 || t >= nv || out_data !== expw[t]) begin
          failures++;
          if (failures < 15) begin
            $display("FAIL mode %0d vec %0d", md, t);
            $display("  got %h", out_data);
            $display("  exp %h", expw[t]);
          end
        end
        nout++;
      end
      @(posedge clk); #1; cyc++;
    end
    chk(nout == nv, "number of outputs");
    chk(last_out - first_out == nv - 1, "outputs stream one per clock");
    // LOAD 9 (none when preloaded), SWAP 1, stream nv, array+alignment ROWS+COLS-1 (+2),
    // drain nv, finish 3
    if (ready) n_preload++;
    chk(cyc == (ready ? 0 : ROWS + 1) + 1 + nv + (ROWS + COLS - 1 + 2) + nv + 3, $sformatf("cycle count %0d", cyc));
    chk(int'(out_is8) == int'(n == 8) && int'(out_es) == eso && int'(out_sf) == sfo,
        "next-layer format");
    n_mode[md]++;
    if (act4 != 0) n_act4++;
  endtask

  initial begin
    ld_we = 0; ld_sel = 0; ld_addr = 0; ld_data = 0; start = 0; cmd = '0;
    n_mode = '{0, 0, 0}; n_act4 = 0; n_relu_clip = 0; n_swap = 0; n_preload = 0; nwb_base = 0;
    cnt_renorm = 0; cnt_cancel = 0; cnt_sat_hi = 0; cnt_sat_lo = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // md act4 esw sfw esa sfa relu nv
    run_tile(0, 1, 0,  0, 0,  0, 1, 12);
    run_tile(1, 0, 1, -1, 2,  1, 0, 20);
    run_tile(2, 0, 3,  2, 4, -2, 1, 16);
    run_tile(2, 0, 5,  0, 5,  3, 0, 8);
    run_tile(1, 0, 0,  3, 2, -1, 1, 10);
    run_tile(0, 1, 0, -2, 0,  1, 0, 6);
    // a layer split into three tiles, the second and third weights preloaded during the
    // previous tile (same weight format, different activations and outputs)
    run_tile(1, 0, 1,  1, 3,  0, 0, 5, 1, 0);
    run_tile(1, 1, 1,  1, 0,  2, 1, 3, 1, 1);
    run_tile(1, 0, 1,  1, 2, -1, 0, 9, 0, 1);
    run_tile(2, 0, 2, -1, 4,  0, 1, 2, 1, 0);
    run_tile(2, 0, 2, -1, 1,  1, 0, 7, 0, 1);
    for (int k = 0; k < 6; k++) begin
      int md, esw;
      md = $urandom % 3;
      esw = (md == 0) ? 0 : $urandom % (wbits(md) - 2);
      run_tile(md, md == 0, esw, int'($urandom % 5) - 2, (md == 0) ? 0 : $urandom % 6,
               int'($urandom % 5) - 2, $urandom % 2, 1 + $urandom % 24);
    end
    $display("mechanisms: modeA=%0d modeB=%0d modeC=%0d act4=%0d swaps=%0d preloads=%0d relu_clip=%0d renorm=%0d cancel=%0d sat_hi=%0d sat_lo=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_act4, n_swap, n_preload, n_relu_clip, cnt_renorm, cnt_cancel,
             cnt_sat_hi, cnt_sat_lo);
    chk(n_mode[0] > 0 && n_mode[1] > 0 && n_mode[2] > 0, "all modes used");
    chk(n_act4 > 0, "4-bit activations used");
    chk(n_swap > 0, "weight swap used");
    chk(n_preload > 0, "weights preloaded during a previous tile");
    chk(n_relu_clip > 0, "ReLU clipped");
    chk(cnt_renorm > 0, "accumulator renormalised");
    chk(cnt_cancel > 0, "accumulator cancellation");
    chk(cnt_sat_hi > 0 || cnt_sat_lo > 0, "encoder saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
