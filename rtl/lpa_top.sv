// lpa_top: LP accelerator (LPA) top level.
//
// Data path, following the paper's architecture figure:
//   weight buffer (WB) -> one unified LP decoder per column -> PE array (from the top)
//   input buffer (IB)  -> one LP activation decoder per row -> row skew -> PE array (from the left)
//   PE array bottom    -> column de-skew -> one LP encoder per column -> output buffer (OB)
//   OB -> post-processing unit (PPU, ReLU) -> output stream
// and a controller that sequences a tile (see lpa_controller) and supplies MODE, es and sf.
// External memory is outside this block: words are written into WB or IB through the load port,
// and results leave through the output stream.
//
// Buffer words: a WB word holds one weight byte per column (byte c = column c) for one array
// row; an IB word holds one activation byte per row (byte r = row r) for one vector; an OB word
// holds, for one vector, four output bytes per column (byte 4c + i = lane i of column c: in
// MODE-A output channel 4c+i, in MODE-B lanes 0-1, in MODE-C lane 0). Output bytes are LP in the
// 8-bit zero-extended format, 4-bit when the weights are 2-bit.
// Sizes: 8 x 8 array and 512 kB of buffers in all (paper); the split WB 256 kB, IB 128 kB,
// OB 128 kB is this design's choice.
// Timing: a tile takes ROWS + 2 clocks of weight loading (1 when its weights were preloaded
// during the previous tile), num_vec clocks of streaming, the array latency (ROWS + COLS + 2
// clocks), num_vec clocks of draining and 2 clocks to finish.
module lpa_top
  import lpa_pkg::*;
#(
  parameter int unsigned ROWS     = 8,
  parameter int unsigned COLS     = 8,
  parameter int unsigned WB_DEPTH = 32768,   // 32768 x 64 bit = 256 kB
  parameter int unsigned IB_DEPTH = 16384,   // 16384 x 64 bit = 128 kB
  parameter int unsigned OB_DEPTH = 4096,    //  4096 x 256 bit = 128 kB
  parameter int unsigned LDW      = 8 * ((ROWS > COLS) ? ROWS : COLS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // load port (from external memory)
  input  logic                  ld_we,
  input  logic                  ld_sel,      // 0: weight buffer, 1: input buffer
  input  logic [15:0]           ld_addr,
  input  logic [LDW-1:0]        ld_data,
  // command
  input  logic                  start,
  input  lpa_cfg_t              cmd,
  output logic                  busy,
  output logic                  done,
  // output stream (to external memory)
  output logic                  out_valid,
  output logic [15:0]           out_addr,
  output logic [COLS*4-1:0][7:0] out_data,
  // LP parameters of the produced activations (for the next layer)
  output logic                  out_is8,
  output logic [2:0]            out_es,
  output logic signed [7:0]     out_sf
);
  localparam int unsigned WB_AW = (WB_DEPTH > 1) ? $clog2(WB_DEPTH) : 1;
  localparam int unsigned IB_AW = (IB_DEPTH > 1) ? $clog2(IB_DEPTH) : 1;
  localparam int unsigned OB_AW = (OB_DEPTH > 1) ? $clog2(OB_DEPTH) : 1;

  lpa_cfg_t cfg;

  // ---------------- controller ----------------
  logic wb_re, ib_re, ob_re, w_shift, w_swap, a_inject, res_valid, ob_we, ppu_valid;
  logic [WB_AW-1:0] wb_raddr;
  logic [IB_AW-1:0] ib_raddr;
  logic [OB_AW-1:0] ob_waddr, ob_raddr, ppu_addr, ppu_out_addr;

  lpa_controller #(.ROWS(ROWS), .WB_AW(WB_AW), .IB_AW(IB_AW), .OB_AW(OB_AW)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .cmd(cmd), .cfg(cfg), .busy(busy), .done(done),
    .wb_re(wb_re), .wb_raddr(wb_raddr), .w_shift(w_shift), .w_swap(w_swap),
    .ib_re(ib_re), .ib_raddr(ib_raddr), .a_inject(a_inject),
    .res_valid(res_valid), .ob_we(ob_we), .ob_waddr(ob_waddr),
    .ob_re(ob_re), .ob_raddr(ob_raddr), .ppu_valid(ppu_valid), .ppu_addr(ppu_addr));

  // ---------------- buffers ----------------
  logic [COLS-1:0][7:0]   wb_rdata;
  logic [ROWS-1:0][7:0]   ib_rdata;
  logic [COLS*4-1:0][7:0] ob_wdata, ob_rdata;

  lp_sram #(.WIDTH(8 * COLS), .DEPTH(WB_DEPTH)) u_wb (
    .clk(clk), .we(ld_we && !ld_sel), .waddr(WB_AW'(ld_addr)), .wdata(ld_data[8*COLS-1:0]),
    .re(wb_re), .raddr(wb_raddr), .rdata(wb_rdata));

  lp_sram #(.WIDTH(8 * ROWS), .DEPTH(IB_DEPTH)) u_ib (
    .clk(clk), .we(ld_we && ld_sel), .waddr(IB_AW'(ld_addr)), .wdata(ld_data[8*ROWS-1:0]),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata));

  lp_sram #(.WIDTH(32 * COLS), .DEPTH(OB_DEPTH)) u_ob (
    .clk(clk), .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata));

  // ---------------- decoders ----------------
  wdec_t w_dec [COLS];
  adec_t a_dec [ROWS];

  for (genvar c = 0; c < COLS; c++) begin : g_wdec
    lp_weight_decoder u_wdec (.x(wb_rdata[c]), .m(cfg.mode), .es(cfg.es_w), .sf(cfg.sf_w),
                              .d(w_dec[c]));
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_adec
    lp_act_decoder u_adec (.x(ib_rdata[r]), .act4(cfg.act4), .es(cfg.es_a), .sf(cfg.sf_a),
                           .d(a_dec[r]));
  end

  // ---------------- row skew: row r enters r clocks late ----------------
  adec_t a_sk  [ROWS];
  logic  av_sk [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_nodly
      assign a_sk[r]  = a_dec[r];
      assign av_sk[r] = a_inject;
    end else begin : g_dly
      adec_t d_q [r];
      logic  v_q [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin d_q[i] <= '0; v_q[i] <= 1'b0; end
        end else begin
          d_q[0] <= a_dec[r];
          v_q[0] <= a_inject;
          for (int i = 1; i < r; i++) begin d_q[i] <= d_q[i-1]; v_q[i] <= v_q[i-1]; end
        end
      end
      assign a_sk[r]  = d_q[r-1];
      assign av_sk[r] = v_q[r-1];
    end
  end

  // ---------------- PE array ----------------
  psum_t ps_out [COLS];
  logic  ps_valid [COLS];

  lp_pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk(clk), .rst_n(rst_n), .m(cfg.mode), .a_in(a_sk), .a_valid(av_sk),
    .w_in(w_dec), .w_shift(w_shift), .w_swap(w_swap), .ps_out(ps_out), .ps_valid(ps_valid));

  // ---------------- column de-skew: column c waits COLS-1-c clocks ----------------
  psum_t ps_al [COLS];
  logic  pv_al [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    localparam int unsigned D = COLS - 1 - c;
    if (D == 0) begin : g_nodly
      assign ps_al[c] = ps_out[c];
      assign pv_al[c] = ps_valid[c];
    end else begin : g_dly
      psum_t d_q [D];
      logic  v_q [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < int'(D); i++) begin d_q[i] <= '0; v_q[i] <= 1'b0; end
        end else begin
          d_q[0] <= ps_out[c];
          v_q[0] <= ps_valid[c];
          for (int i = 1; i < int'(D); i++) begin d_q[i] <= d_q[i-1]; v_q[i] <= v_q[i-1]; end
        end
      end
      assign ps_al[c] = d_q[D-1];
      assign pv_al[c] = v_q[D-1];
    end
  end

  assign res_valid = pv_al[0];

  // ---------------- PPU format logic and encoders ----------------
  logic              enc8;
  logic [2:0]        enc_es;
  logic signed [7:0] enc_sf;

  for (genvar c = 0; c < COLS; c++) begin : g_enc
    lp_encoder u_enc (.ps(ps_al[c]), .m(cfg.mode), .out8(enc8), .es(enc_es), .sf(enc_sf),
                      .out(ob_wdata[4*c+3:4*c]));
  end

  lp_ppu #(.NB(COLS * 4), .AW(OB_AW)) u_ppu (
    .clk(clk), .rst_n(rst_n),
    .m(cfg.mode), .es_w(cfg.es_w), .sf_w(cfg.sf_w), .sf_a(cfg.sf_a),
    .out8(enc8), .es_out(enc_es), .sf_out(enc_sf),
    .relu(cfg.relu), .in_valid(ppu_valid), .in_addr(ppu_addr), .in_data(ob_rdata),
    .out_valid(out_valid), .out_addr(ppu_out_addr), .out_data(out_data));

  assign out_addr = 16'(ppu_out_addr);
  assign out_is8  = enc8;
  assign out_es   = enc_es;
  assign out_sf   = enc_sf;
endmodule
