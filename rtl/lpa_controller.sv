// lpa_controller: tile sequencer of the LP accelerator.
//
// A tile is one weight-stationary pass: ROWS x COLS weight bytes (one weight-buffer word per array
// row) applied to num_vec activation vectors. On start the controller latches the command and
//   LOAD    reads weight-buffer words row ROWS-1 down to row 0, one per clock; each word is
//           decoded at the column decoders and shifted into the PEs' shadow registers (w_shift
//           one clock after the read, when the data arrive), ROWS + 1 clocks in all;
//   SWAP    pulses w_swap so every PE switches to the new weights;
//   COMPUTE reads one input-buffer word per clock; a_inject marks, one clock later, the decoded
//           activation vector entering the row skew registers;
//   FLUSH   waits until every vector's outputs, aligned by the caller, have been written to the
//           output buffer (ob_we is raised by this block on out_valid);
//   DRAIN   reads the tile's output-buffer words, one per clock, into the PPU (ppu_valid one clock
//           after each read);
//   DONE    waits for the PPU's last output, then pulses done and returns to IDLE.
// MODE, es and sf of the current command are held on cfg for the decoders and encoders.
// Weight preloading uses the PEs' double buffer: a command with w_pre set also reads the next
// tile's ROWS weight words (from wb_next) during its first ROWS streaming clocks and shifts them
// into the shadow registers, which the active weights do not see. The next command then sets
// w_ready, skips LOAD and starts with SWAP, so back-to-back tiles of a layer lose no clocks to
// weight loading. The preloaded words are decoded with the current command's weight format, so
// the next command must use the same MODE, es_w and sf_w (tiles of one layer do).
// The paper names the controller, says it provides MODE, es and sf, and gives the PEs a double
// buffer "for the next computation"; the sequence and the preload handshake are this design's.
// Assertions: start only while idle, with at least one vector; w_ready only after a preload
// with the same weight format.
module lpa_controller
  import lpa_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned WB_AW = 15,
  parameter int unsigned IB_AW = 14,
  parameter int unsigned OB_AW = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  lpa_cfg_t         cmd,
  output lpa_cfg_t         cfg,
  output logic             busy,
  output logic             done,
  // weight buffer / weight loading
  output logic             wb_re,
  output logic [WB_AW-1:0] wb_raddr,
  output logic             w_shift,
  output logic             w_swap,
  // input buffer / activation injection
  output logic             ib_re,
  output logic [IB_AW-1:0] ib_raddr,
  output logic             a_inject,
  // aligned array outputs -> output buffer
  input  logic             res_valid,
  output logic             ob_we,
  output logic [OB_AW-1:0] ob_waddr,
  // output buffer -> PPU
  output logic             ob_re,
  output logic [OB_AW-1:0] ob_raddr,
  output logic             ppu_valid,
  output logic [OB_AW-1:0] ppu_addr
);
  typedef enum logic [2:0] {IDLE, LOAD, SWAP, COMPUTE, FLUSH, DRAIN, FIN} state_e;
  state_e st;
  logic [15:0] cnt;       // per-phase counter
  logic [15:0] wr_cnt;    // outputs written this tile
  logic        pl_act;    // preload of the next tile's weights in progress
  logic [15:0] pl_cnt;    // preload row counter
  logic        pl_done;   // shadow registers hold a preloaded tile
  logic        ld_rd;     // LOAD-state weight read

  assign busy     = (st != IDLE);
  assign ld_rd    = (st == LOAD) && (cnt < 16'(ROWS));
  assign wb_re    = ld_rd || (pl_act && pl_cnt < 16'(ROWS));
  assign wb_raddr = ld_rd ? WB_AW'(cfg.wb_base + 16'(ROWS - 1) - cnt)
                          : WB_AW'(cfg.wb_next + 16'(ROWS - 1) - pl_cnt);
  assign w_swap   = (st == SWAP);
  assign ib_re    = (st == COMPUTE);
  assign ib_raddr = IB_AW'(cfg.ib_base + cnt);
  assign ob_we    = res_valid;
  assign ob_waddr = OB_AW'(cfg.ob_base + wr_cnt);
  assign ob_re    = (st == DRAIN);
  assign ob_raddr = OB_AW'(cfg.ob_base + cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IDLE;
      cfg       <= '0;
      cnt       <= '0;
      wr_cnt    <= '0;
      done      <= 1'b0;
      w_shift   <= 1'b0;
      a_inject  <= 1'b0;
      ppu_valid <= 1'b0;
      ppu_addr  <= '0;
      pl_act    <= 1'b0;
      pl_cnt    <= '0;
      pl_done   <= 1'b0;
    end else begin
      done      <= 1'b0;
      w_shift   <= wb_re;
      a_inject  <= ib_re;
      ppu_valid <= ob_re;
      ppu_addr  <= ob_raddr;
      if (res_valid) wr_cnt <= wr_cnt + 1'b1;
      if (pl_act) begin
        pl_cnt <= pl_cnt + 1'b1;
        if (pl_cnt == 16'(ROWS - 1)) begin pl_act <= 1'b0; pl_done <= 1'b1; end
      end
      case (st)
        IDLE: if (start) begin
          cfg    <= cmd;
          cnt    <= '0;
          wr_cnt <= '0;
          st     <= cmd.w_ready ? SWAP : LOAD;
          pl_done <= 1'b0;
        end
        LOAD: begin
          if (cnt == 16'(ROWS)) begin cnt <= '0; st <= SWAP; end
          else cnt <= cnt + 1'b1;
        end
        SWAP: begin
          st <= COMPUTE;
          if (cfg.w_pre) begin pl_act <= 1'b1; pl_cnt <= '0; end
        end
        COMPUTE: begin
          if (cnt == cfg.num_vec - 1'b1) begin cnt <= '0; st <= FLUSH; end
          else cnt <= cnt + 1'b1;
        end
        FLUSH: if (wr_cnt == cfg.num_vec) st <= DRAIN;
        DRAIN: begin
          if (cnt == cfg.num_vec - 1'b1) begin cnt <= '0; st <= FIN; end
          else cnt <= cnt + 1'b1;
        end
        FIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'd1) begin done <= 1'b1; st <= IDLE; end
        end
        default: st <= IDLE;
      endcase
    end
  end

  // A command may only be issued while idle, and must stream at least one vector.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> (st == IDLE && cmd.num_vec != 0))
    else $error("lpa_controller: start while busy or with num_vec = 0");
  a_ready_preloaded: assert property (@(posedge clk) disable iff (!rst_n)
                                      start && cmd.w_ready |-> pl_done && cmd.mode == cfg.mode &&
                                      cmd.es_w == cfg.es_w && cmd.sf_w == cfg.sf_w)
    else $error("lpa_controller: w_ready without a matching preload");
endmodule
