// lp_pe_array: ROWS x COLS weight-stationary systolic array of LP PEs (8 x 8 in the paper).
//
// Row r receives decoded activations at its left edge (already skewed by r cycles by the caller)
// and passes them right; column c receives decoded weights at its top edge during weight loading
// and partial sums flow down it, starting from an empty (zero) partial sum at row 0. The bottom
// row's partial sums are the array outputs; ps_valid[c] marks, for column c, the cycle in which
// the partial sum of an activation vector leaves row ROWS-1.
// Weight loading: with w_shift high for ROWS cycles, the words presented on w_in[c] in the
// order row ROWS-1 first ... row 0 last end up in the shadow registers of their rows; w_swap
// then makes them active in all PEs at once. MODE is common to the whole array.
module lp_pe_array
  import lpa_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  lp_mode_e m,
  input  adec_t    a_in     [ROWS],
  input  logic     a_valid  [ROWS],
  input  wdec_t    w_in     [COLS],
  input  logic     w_shift,
  input  logic     w_swap,
  output psum_t    ps_out   [COLS],
  output logic     ps_valid [COLS]
);
  adec_t a_h  [ROWS][COLS+1];
  logic  av_h [ROWS][COLS+1];
  psum_t ps_v [ROWS+1][COLS];
  wdec_t w_v  [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0]  = a_in[r];
    assign av_h[r][0] = a_valid[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      lp_pe u_pe (
        .clk(clk), .rst_n(rst_n), .m(m),
        .a_in(a_h[r][c]), .a_valid_in(av_h[r][c]),
        .a_out(a_h[r][c+1]), .a_valid_out(av_h[r][c+1]),
        .ps_in(ps_v[r][c]), .ps_out(ps_v[r+1][c]),
        .w_in(w_v[r][c]), .w_shift(w_shift), .w_swap(w_swap), .w_out(w_v[r+1][c]));
      if (r == ROWS - 1) begin : g_out
        assign ps_valid[c] = av_h[r][c+1];
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign ps_v[0][c] = '0;
    assign w_v[0][c]  = w_in[c];
    assign ps_out[c]  = ps_v[ROWS][c];
  end
endmodule
