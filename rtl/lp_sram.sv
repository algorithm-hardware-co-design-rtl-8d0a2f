// lp_sram: on-chip buffer array with one write and one read port.
//
// Used for the weight buffer, input buffer and output buffer. A write stores wdata at waddr on
// the clock edge; a read returns mem[raddr] on rdata one clock after re (synchronous read, as a
// compiled SRAM macro would). The paper gives only the total on-chip capacity (512 kB shared by
// the buffers); the split, the port structure and the latency are this design's choices.
// The array is not reset: software loads it before use.
module lp_sram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
