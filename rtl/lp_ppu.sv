// lp_ppu: post-processing unit.
//
// Two parts. (1) Output-format logic, combinational: from the layer's weight parameters it derives
// the LP parameters of the layer's output activations as the paper's quantization flow sets them:
//   n_out = min(8, 2 * n_w)      (2-bit weights give 4-bit outputs, 4/8-bit weights 8-bit ones)
//   es_out = min(5, 2 * es_w)
//   sf_out = sf_a + sf_w         (saturated to 8 bits)
// These configure the encoders (quantisation to 4- or 8-bit LP) and are reported for the next
// layer. (2) An output stage, registered: each output-buffer word read for draining passes through
// an optional ReLU (a negative LP byte, sign bit 7 set, becomes 0) and leaves with its address one
// clock later. Softmax, which the paper also assigns to the PPU, is not built here.
module lp_ppu
  import lpa_pkg::*;
#(
  parameter int unsigned NB = 32,   // bytes per output word (COLS * 4)
  parameter int unsigned AW = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // format logic
  input  lp_mode_e          m,
  input  logic [2:0]        es_w,
  input  logic signed [7:0] sf_w,
  input  logic signed [7:0] sf_a,
  output logic              out8,
  output logic [2:0]        es_out,
  output logic signed [7:0] sf_out,
  // output stage
  input  logic              relu,
  input  logic              in_valid,
  input  logic [AW-1:0]     in_addr,
  input  logic [NB-1:0][7:0] in_data,
  output logic              out_valid,
  output logic [AW-1:0]     out_addr,
  output logic [NB-1:0][7:0] out_data
);
  logic signed [8:0] sf_sum;

  assign out8   = (m != MODE_A);
  assign es_out = (es_w >= 3'd3) ? 3'd5 : {es_w[1:0], 1'b0};
  assign sf_sum = {sf_a[7], sf_a} + {sf_w[7], sf_w};
  assign sf_out = (sf_sum > 9'sd127) ? 8'sd127 : (sf_sum < -9'sd128) ? -8'sd128 : sf_sum[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_addr  <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_addr <= in_addr;
        for (int b = 0; b < int'(NB); b++)
          out_data[b] <= (relu && in_data[b][7]) ? 8'h00 : in_data[b];
      end
    end
  end
endmodule
