// tb_lpa_layer_slice: a slice of a convolution layer run end to end on the default-size
// accelerator (8 x 8 array, 512 kB of buffers).
//
// The slice is a pointwise (1 x 1) convolution over a 14 x 14 feature map (196 activation
// vectors) with 8 input channels and 64 output channels: one 8-channel slice of a layer at the
// 14 x 14 resolution of a ResNet stage. It is run once per precision: MODE-A (2-bit weights, 4-bit activations),
// MODE-B (4-bit weights) and MODE-C (8-bit weights). A PE column yields 4, 2 or 1 output channels,
// so the 64 channels take 2, 4 or 8 tiles. The activations are loaded into the input buffer once
// and reused by every tile; each tile's weights are preloaded during the previous tile, so only
// the first tile of a layer pays for a weight load.
//
// Every output word is compared with the reference model (decode, lane products, accumulation
// down the column, encoding, ReLU). The testbench also checks that each tile streams its 196
// results one per clock, and that the tiles of a layer take, from start to done, together
//   (ROWS + 1) + tiles * (1 + 196 + (ROWS + COLS + 1) + 196 + 3)
// clocks, i.e. that preloading removed every weight load after the first. It prints the
// multiply-accumulates per clock reached in each mode.
module tb_lpa_layer_slice;
  import lpa_pkg::*;
  import lpa_ref_pkg::*;
  localparam int ROWS = 8, COLS = 8, NV = 196, OC = 64;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  logic [7:0] wbyte [8][ROWS][COLS];   // [tile][row][column]
  logic [7:0] abyte [NV][ROWS];
  int n_tiles_run, n_preloaded;

  task automatic run_layer(input int md, input int esw, input int sfw, input int esa,
                           input int sfa, input int relu);
    int act4, tiles, n, eso, sfo, cyc, total, nout, first_out, last_out, expect_cyc;
    logic [8:0]  ad [NV][ROWS];
    act4  = (md == 0);
    tiles = OC / (COLS * nlanes(md));
    n     = (md == 0) ? 4 : 8;
    eso   = (2 * esw > 5) ? 5 : 2 * esw;
    sfo   = sfa + sfw;
    // data: weights of all tiles at WB words 8t..8t+7, activations at IB words 0..NV-1
    for (int t = 0; t < tiles; t++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) wbyte[t][r][c] = 8'($urandom);
    for (int v = 0; v < NV; v++)
      for (int r = 0; r < ROWS; r++) abyte[v][r] = act4 ? {4'($urandom), 4'b0} : 8'($urandom);
    for (int t = 0; t < tiles; t++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        ld_we = 1; ld_sel = 0; ld_addr = 16'(ROWS * t + r);
        for (int c = 0; c < COLS; c++) ld_data[8*c +: 8] = wbyte[t][r][c];
      end
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      ld_we = 1; ld_sel = 1; ld_addr = 16'(v);
      for (int r = 0; r < ROWS; r++) ld_data[8*r +: 8] = abyte[v][r];
    end
    @(negedge clk); ld_we = 0;
    for (int v = 0; v < NV; v++)
      for (int r = 0; r < ROWS; r++) ad[v][r] = ref_adec(abyte[v][r], act4, esa, sfa);

    total = 0;
    for (int t = 0; t < tiles; t++) begin
      logic [35:0] wd [ROWS][COLS];
      logic [COLS*4-1:0][7:0] expw [NV];
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) wd[r][c] = ref_wdec(wbyte[t][r][c], md, esw, sfw);
      for (int v = 0; v < NV; v++) begin
        expw[v] = '0;
        for (int c = 0; c < COLS; c++)
          for (int i = 0; i < nlanes(md); i++) begin
            lane_t acc;
            int b;
            acc.s = 0; acc.r = 0; acc.e = 0; acc.lf = 0;
            for (int r = 0; r < ROWS; r++)
              acc = ref_add(ref_product(md, wd[r][c], ad[v][r], i), acc, 2 * wbits(md));
            b = ref_encode(acc, 2 * wbits(md), n, eso, sfo);
            if (relu != 0 && b >= 128) b = 0;
            expw[v][4*c + i] = 8'(b);
          end
      end
      cmd = '0;
      cmd.mode = lp_mode_e'(md); cmd.es_w = 3'(esw); cmd.sf_w = 8'(sfw); cmd.act4 = act4[0];
      cmd.es_a = 3'(esa); cmd.sf_a = 8'(sfa); cmd.relu = relu[0];
      cmd.wb_base = 16'(ROWS * t); cmd.ib_base = 16'd0; cmd.ob_base = 16'(NV * t);
      cmd.num_vec = 16'(NV);
      cmd.w_pre   = (t < tiles - 1);
      cmd.wb_next = 16'(ROWS * (t + 1));
      cmd.w_ready = (t > 0);
      @(negedge clk); start = 1;
      @(posedge clk); #1; start = 0;
      cyc = 1; nout = 0; first_out = -1; last_out = -1;
      while (!done && cyc < 5000) begin
        if (out_valid) begin
          int v;
          v = int'(out_addr) - NV * t;
          if (first_out < 0) first_out = cyc;
          last_out = cyc;
          checks++;
          if (v != nout || out_data !== expw[nout]) begin
            failures++;
            if (failures < 15) $display("FAIL mode %0d tile %0d vector %0d", md, t, v);
          end
          nout++;
        end
        @(posedge clk); #1; cyc++;
      end
      total += cyc;
      chk(nout == NV, $sformatf("mode %0d tile %0d outputs %0d", md, t, nout));
      chk(last_out - first_out == NV - 1, "results stream one per clock");
      n_tiles_run++;
      if (t > 0) n_preloaded++;
    end
    expect_cyc = (ROWS + 1) + tiles * (1 + NV + (ROWS + COLS + 1) + NV + 3);
    chk(total == expect_cyc, $sformatf("mode %0d layer cycles %0d, expected %0d", md, total,
                                       expect_cyc));
    $display("mode %0d: %0d tiles, %0d clocks from start to done, %0d MACs, %0d MACs per streaming clock",
             md, tiles, total, NV * ROWS * OC, ROWS * COLS * nlanes(md));
  endtask

  initial begin
    ld_we = 0; ld_sel = 0; ld_addr = 0; ld_data = 0; start = 0; cmd = '0;
    n_tiles_run = 0; n_preloaded = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    //        md esw sfw esa sfa relu
    run_layer(0, 0,  0,  0,  1,  1);
    run_layer(1, 1, -1,  2,  0,  1);
    run_layer(2, 2,  1,  4, -1,  0);
    chk(n_tiles_run == 14, "tiles run");
    chk(n_preloaded == 11, "tiles with preloaded weights");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
