// lp_pe: weight-stationary, double-buffered LP processing element.
//
// One PE multiplies one decoded activation (from the left) by one, two or four decoded weights
// held in the PE (MODE-C/B/A) and adds each product to the matching lane of the partial sum
// arriving from the PE above. Activation and partial sum leave to the right and downwards, each
// registered, every cycle.
//
// MUL stage (paper figure): multiplication of LP values is addition of their regimes and of their
// ulfx fields. Two sets of four 4-bit adders add the activation's regime and ulfx to the 16-bit
// weight regime and ulfx. A multiplexer per adder, driven by MODE, picks the activation operand,
// and a multiplexer per carry picks the carry of the adder to the right or 0: no carries in
// MODE-A (four 4-bit lanes), carries inside each 8-bit lane in MODE-B, a full 16-bit add in
// MODE-C. Operands: MODE-A the whole 4-bit activation; MODE-B/C the activation sign-extended
// (regime) or its 2.2 ulfx aligned to the lane's 4.4 / 8.8 fixed point. Product signs are the
// XOR of weight and activation signs. "Bit unpack" then splits each ulfx lane into its integer
// part (exponent) and fraction (lnf), packed into 8-bit exponent and lnf words, and lnf passes
// through the log-linear converter.
//
// ADD stage: one lp_lane_add per lane (four 4-bit-lf lanes, two 8-bit or one 16-bit), selected
// by MODE. The paper shares one set of 2-bit adders across modes; here each mode's lanes are
// separate and a multiplexer picks the result, which computes the same function.
//
// Weights: w_shift moves w_in into the shadow register (and the old shadow out to w_out, to the
// PE below); w_swap copies the shadow into the active register used for computing, so the next
// tile's weights can be loaded while the current one computes.
// Timing: outputs change one clock after the inputs; a_valid travels with the activation and
// marks the partial sum it produces.
module lp_pe
  import lpa_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  lp_mode_e m,
  // activation from the left
  input  adec_t    a_in,
  input  logic     a_valid_in,
  output adec_t    a_out,
  output logic     a_valid_out,
  // partial sum from above
  input  psum_t    ps_in,
  output psum_t    ps_out,
  // weight loading (shadow chain down the column)
  input  wdec_t    w_in,
  input  logic     w_shift,
  input  logic     w_swap,
  output wdec_t    w_out
);
  wdec_t w_shadow, w_act;

  // ---------------- MUL stage ----------------
  logic [3:0][3:0] ra_op, ua_op;   // activation operand per 4-bit adder
  logic [3:0][4:0] r_sum, u_sum;
  logic [3:0]      cen;            // carry enable into adder j
  logic [15:0]     r_m, u_m;
  logic [3:0]      s_m;
  logic [7:0]      e_m, lnf_m, lf_m;

  always_comb begin
    case (m)
      MODE_A: begin
        ra_op = {4{a_in.regime}};
        ua_op = {4{a_in.ulfx}};
        cen   = 4'b0000;
        s_m   = w_act.sign ^ {4{a_in.sign}};
      end
      MODE_B: begin
        ra_op = {{4{a_in.regime[3]}}, a_in.regime, {4{a_in.regime[3]}}, a_in.regime};
        ua_op = {{2'b00, a_in.ulfx[3:2]}, {a_in.ulfx[1:0], 2'b00},
                 {2'b00, a_in.ulfx[3:2]}, {a_in.ulfx[1:0], 2'b00}};
        cen   = 4'b1010;
        s_m   = {2'b00, w_act.sign[1:0] ^ {2{a_in.sign}}};
      end
      default: begin
        ra_op = {{12{a_in.regime[3]}}, a_in.regime};
        ua_op = {4'b0000, {2'b00, a_in.ulfx[3:2]}, {a_in.ulfx[1:0], 2'b00}, 4'b0000};
        cen   = 4'b1110;
        s_m   = {3'b000, w_act.sign[0] ^ a_in.sign};
      end
    endcase
  end

  for (genvar j = 0; j < 4; j++) begin : g_mul
    logic rc, uc;
    if (j == 0) begin : g_c0
      assign rc = 1'b0;
      assign uc = 1'b0;
    end else begin : g_cj
      assign rc = cen[j] ? r_sum[j-1][4] : 1'b0;
      assign uc = cen[j] ? u_sum[j-1][4] : 1'b0;
    end
    assign r_sum[j] = {1'b0, w_act.regime[4*j+3:4*j]} + {1'b0, ra_op[j]} + {4'b0, rc};
    assign u_sum[j] = {1'b0, w_act.ulfx[4*j+3:4*j]}   + {1'b0, ua_op[j]} + {4'b0, uc};
    assign r_m[4*j+3:4*j] = r_sum[j][3:0];
    assign u_m[4*j+3:4*j] = u_sum[j][3:0];
  end

  // Bit unpack: ulfx lanes -> exponent / log fraction
  always_comb begin
    case (m)
      MODE_A: begin
        e_m   = {u_m[15:14], u_m[11:10], u_m[7:6], u_m[3:2]};
        lnf_m = {u_m[13:12], u_m[9:8],   u_m[5:4], u_m[1:0]};
      end
      MODE_B: begin
        e_m   = {u_m[15:12], u_m[7:4]};
        lnf_m = {u_m[11:8],  u_m[3:0]};
      end
      default: begin
        e_m   = u_m[15:8];
        lnf_m = u_m[7:0];
      end
    endcase
  end

  lp_log_lin u_l2l (.lnf(lnf_m), .m(m), .lf(lf_m));

  // ---------------- ADD stage ----------------
  psum_t res_a, res_b, res_c, res;

  for (genvar i = 0; i < 4; i++) begin : g_add_a
    lp_lane_add #(.LW(4)) u_add (
      .p_sign(s_m[i]), .p_regime(r_m[4*i+3:4*i]), .p_exp(e_m[2*i+1:2*i]), .p_lf(lf_m[2*i+1:2*i]),
      .r_sign(ps_in.sign[i]), .r_regime(ps_in.regime[4*i+3:4*i]), .r_exp(ps_in.exp[2*i+1:2*i]),
      .r_lf(ps_in.lf[4*i+3:4*i]),
      .o_sign(res_a.sign[i]), .o_regime(res_a.regime[4*i+3:4*i]), .o_exp(res_a.exp[2*i+1:2*i]),
      .o_lf(res_a.lf[4*i+3:4*i]));
  end

  for (genvar i = 0; i < 2; i++) begin : g_add_b
    lp_lane_add #(.LW(8)) u_add (
      .p_sign(s_m[i]), .p_regime(r_m[8*i+7:8*i]), .p_exp(e_m[4*i+3:4*i]), .p_lf(lf_m[4*i+3:4*i]),
      .r_sign(ps_in.sign[i]), .r_regime(ps_in.regime[8*i+7:8*i]), .r_exp(ps_in.exp[4*i+3:4*i]),
      .r_lf(ps_in.lf[8*i+7:8*i]),
      .o_sign(res_b.sign[i]), .o_regime(res_b.regime[8*i+7:8*i]), .o_exp(res_b.exp[4*i+3:4*i]),
      .o_lf(res_b.lf[8*i+7:8*i]));
  end
  assign res_b.sign[3:2] = 2'b00;

  lp_lane_add #(.LW(16)) u_add_c (
    .p_sign(s_m[0]), .p_regime(r_m), .p_exp(e_m), .p_lf(lf_m),
    .r_sign(ps_in.sign[0]), .r_regime(ps_in.regime), .r_exp(ps_in.exp), .r_lf(ps_in.lf),
    .o_sign(res_c.sign[0]), .o_regime(res_c.regime), .o_exp(res_c.exp), .o_lf(res_c.lf));
  assign res_c.sign[3:1] = 3'b000;

  always_comb begin
    case (m)
      MODE_A:  res = res_a;
      MODE_B:  res = res_b;
      default: res = res_c;
    endcase
  end

  // ---------------- registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_shadow    <= '0;
      w_act       <= '0;
      a_out       <= '0;
      a_valid_out <= 1'b0;
      ps_out      <= '0;
    end else begin
      if (w_shift) w_shadow <= w_in;
      if (w_swap)  w_act    <= w_shadow;
      a_out       <= a_in;
      a_valid_out <= a_valid_in;
      ps_out      <= res;
    end
  end

  assign w_out = w_shadow;
endmodule
