// lpa_pkg: types, constants and table generators shared by the LP accelerator.
//
// Logarithmic posit (LP) words are stored 8 bits wide. A weight byte holds one 8-bit, two
// 4-bit or four 2-bit LP weights, selected by the 2-bit MODE m = m1 m0:
//   MODE-A (00) four 2-bit weights, MODE-B (01) two 4-bit weights, MODE-C (10) one 8-bit weight.
// The m1/m0 encoding is read off the multiplexer inputs of the mixed-precision 2's complementer
// (sub-word sign op5 is chosen only when m1 = m0 = 0, op3 for the low half when m0 = 1).
//
// Decoded weights use a 16-bit regime and a 16-bit ulfx split into lanes: four 4-bit lanes in
// MODE-A, two 8-bit lanes in MODE-B, one 16-bit lane in MODE-C. A regime lane is a two's
// complement integer (k * 2^es - sf); an ulfx lane is unsigned fixed point with equal integer and
// fraction widths (2.2, 4.4 or 8.8). Decoded activations carry a 1-bit sign, a 4-bit regime and a
// 4-bit ulfx (2.2). A partial sum lane holds sign, regime, exponent and a linear magnitude lf
// (1 integer bit, the rest fraction); its value is (-1)^s * lf * 2^(regime + exponent).
//
// The log/linear conversion tables are computed at elaboration from their definitions:
//   log2lin_F(x) = min(2^F - 1, round((2^(x / 2^F) - 1) * 2^F))
//   lin2log_F(x) = min(2^F - 1, round(log2(1 + x / 2^F) * 2^F))
// with F = 2, 4 or 8 fraction bits, using 30-bit fixed-point integer arithmetic.
package lpa_pkg;

  typedef enum logic [1:0] {
    MODE_A = 2'b00,   // four 2-bit weights per PE
    MODE_B = 2'b01,   // two 4-bit weights per PE
    MODE_C = 2'b10    // one 8-bit weight per PE
  } lp_mode_e;

  // Decoded weight word (one PE's worth: 1, 2 or 4 weights).
  typedef struct packed {
    logic [3:0]  sign;
    logic [15:0] regime;
    logic [15:0] ulfx;
  } wdec_t;

  // Decoded activation.
  typedef struct packed {
    logic       sign;
    logic [3:0] regime;
    logic [3:0] ulfx;
  } adec_t;

  // Partial sum travelling down a PE column (lanes as for the weights).
  typedef struct packed {
    logic [3:0]  sign;
    logic [15:0] regime;
    logic [7:0]  exp;
    logic [15:0] lf;
  } psum_t;

  // One tile command: the layer's LP parameters and where its data sit in the buffers.
  typedef struct packed {
    lp_mode_e           mode;     // weight precision
    logic [2:0]         es_w;     // weight exponent size
    logic signed [7:0]  sf_w;     // weight scale factor
    logic               act4;     // activations are 4-bit (else 8-bit)
    logic [2:0]         es_a;     // activation exponent size
    logic signed [7:0]  sf_a;     // activation scale factor
    logic               relu;     // apply ReLU to the outputs
    logic [15:0]        wb_base;  // first of ROWS weight-buffer words (word r = array row r)
    logic [15:0]        ib_base;  // first activation vector in the input buffer
    logic [15:0]        ob_base;  // first output-buffer word
    logic [15:0]        num_vec;  // activation vectors to stream (>= 1)
    logic               w_pre;    // while streaming, preload the next tile's weights
    logic [15:0]        wb_next;  // first weight-buffer word of the next tile (with w_pre)
    logic               w_ready;  // this tile's weights were preloaded: skip the weight load
  } lpa_cfg_t;

  // Number of weights (lanes) per PE in a mode.
  function automatic int unsigned lanes_of(input lp_mode_e m);
    case (m)
      MODE_A:  return 4;
      MODE_B:  return 2;
      default: return 1;
    endcase
  endfunction

  // Weight width n in a mode.
  function automatic int unsigned wbits_of(input lp_mode_e m);
    case (m)
      MODE_A:  return 2;
      MODE_B:  return 4;
      default: return 8;
    endcase
  endfunction

  // ---------------------------------------------------------------------------------------
  // Elaboration-time table generation (Q30 fixed point).
  localparam int unsigned QB = 30;
  localparam longint unsigned QONE = 64'd1 << QB;

  function automatic longint unsigned isqrt(input longint unsigned v);
    longint unsigned r, b;
    r = 0;
    b = 64'd1 << 62;
    while (b > v) b = b >> 2;
    while (b != 0) begin
      if (v >= r + b) begin
        v = v - (r + b);
        r = (r >> 1) + b;
      end else begin
        r = r >> 1;
      end
      b = b >> 2;
    end
    return r;
  endfunction

  // 2^(x / 2^F) - 1, rounded to F fraction bits.
  function automatic int unsigned exp2_frac(input int unsigned x, input int unsigned f);
    longint unsigned c, p, r;
    p = QONE;
    c = isqrt(64'd2 << (2 * QB));          // 2^(1/2) in Q30
    for (int i = 0; i < int'(f); i++) begin
      if (x[f-1-i]) p = (p * c) >> QB;
      c = isqrt(c << QB);                   // next root: 2^(2^-(i+2))
    end
    r = ((p - QONE) + (64'd1 << (QB - f - 1))) >> (QB - f);
    if (r > (64'd1 << f) - 1) r = (64'd1 << f) - 1;
    return int'(r);
  endfunction

  // log2(1 + x / 2^F), rounded to F fraction bits.
  function automatic int unsigned log2_frac(input int unsigned x, input int unsigned f);
    longint unsigned m, bits;
    m = QONE + (longint'(x) << (QB - f));
    bits = 0;
    for (int i = 0; i < int'(f) + 1; i++) begin
      m = (m * m) >> QB;
      bits = bits << 1;
      if (m >= 2 * QONE) begin
        bits = bits | 1;
        m = m >> 1;
      end
    end
    bits = (bits + 1) >> 1;
    if (bits > (64'd1 << f) - 1) bits = (64'd1 << f) - 1;
    return int'(bits);
  endfunction

  typedef logic [7:0] tab8_t [256];
  typedef logic [3:0] tab4_t [16];
  typedef logic [1:0] tab2_t [4];

  function automatic tab8_t gen_tab8(input bit to_lin);
    tab8_t t;
    for (int i = 0; i < 256; i++)
      t[i] = 8'(to_lin ? exp2_frac(i, 8) : log2_frac(i, 8));
    return t;
  endfunction

  function automatic tab4_t gen_tab4(input bit to_lin);
    tab4_t t;
    for (int i = 0; i < 16; i++)
      t[i] = 4'(to_lin ? exp2_frac(i, 4) : log2_frac(i, 4));
    return t;
  endfunction

  function automatic tab2_t gen_tab2(input bit to_lin);
    tab2_t t;
    for (int i = 0; i < 4; i++)
      t[i] = 2'(to_lin ? exp2_frac(i, 2) : log2_frac(i, 2));
    return t;
  endfunction

  // The tables, computed once.
  localparam tab8_t LOG2LIN8 = gen_tab8(1'b1);
  localparam tab4_t LOG2LIN4 = gen_tab4(1'b1);
  localparam tab2_t LOG2LIN2 = gen_tab2(1'b1);
  localparam tab8_t LIN2LOG8 = gen_tab8(1'b0);
  localparam tab4_t LIN2LOG4 = gen_tab4(1'b0);
  localparam tab2_t LIN2LOG2 = gen_tab2(1'b0);

endpackage
