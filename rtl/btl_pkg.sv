// btl_pkg: types, widths and fixed-point helpers shared by the binary/ternary
// LSTM engine.
//
// Number formats. Activations (x, h, c and the gate values f, i, o, g) are
// 12-bit two's-complement fixed point, which follows the 12-bit activation
// precision of the original engine. The split into 3 integer and 8 fractional
// bits (Q3.8, range [-8, 8), 1.0 = 256) is this design's choice. Accumulators
// are 24 bits wide, enough for 2^12 full-scale terms without overflow. The
// folded batch-normalisation scales are 16-bit with 12 fractional bits and the
// folded biases are 16-bit with 8 fractional bits. These widths are also this
// design's choice.
//
// Weight codes. A binary weight is one bit: 1 means +1 and 0 means -1. A
// ternary weight is two bits: 2'b01 means +1, 2'b11 means -1, and 2'b00 or
// 2'b10 mean 0. The encodings are this design's choice.
//
// Gate order. Row r of the stacked gate matrix belongs to unit r/4 and gate
// r%4, with the gates in the order f, i, o, g.
package btl_pkg;

  localparam int ACT_W   = 12;  // activation width
  localparam int FRAC    = 8;   // fractional bits of activations
  localparam int ACC_W   = 24;  // accumulator width
  localparam int SC_W    = 16;  // folded BN scale width
  localparam int SC_FRAC = 12;  // fractional bits of a BN scale
  localparam int BIAS_W  = 16;  // folded bias width (FRAC fractional bits)
  localparam int NGATES  = 4;

  typedef enum logic {W_BINARY = 1'b0, W_TERNARY = 1'b1} wmode_e;

  typedef enum logic [1:0] {G_F = 2'd0, G_I = 2'd1, G_O = 2'd2, G_G = 2'd3} gate_e;

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [SC_W-1:0]   scale_t;
  typedef logic signed [BIAS_W-1:0] bias_t;

  // Folded BN of one gate row:
  //   pre = (a_h * (W_h h) + a_x * (W_x x)) / 2^SC_FRAC + bias
  // with a_h = phi_h / sqrt(V_h + eps), a_x = phi_x / sqrt(V_x + eps) and
  // bias = b - a_h * E_h - a_x * E_x.
  typedef struct packed {
    scale_t a_h;
    scale_t a_x;
    bias_t  bias;
  } bn_gate_t;

  // All parameters of one LSTM unit: the four gate rows and the optional
  // batch normalisation of the cell state, BN(c) = a_c * c / 2^SC_FRAC + b_c
  // (a_c = 1.0 = 4096 and b_c = 0 disable it).
  typedef struct packed {
    bn_gate_t [NGATES-1:0] gate;
    scale_t                a_c;
    bias_t                 b_c;
  } bn_unit_t;

  localparam int BN_UNIT_W = $bits(bn_unit_t);

  localparam act_t ACT_MAX = act_t'((1 << (ACT_W-1)) - 1);
  localparam act_t ACT_MIN = act_t'(-(1 << (ACT_W-1)));

  // Saturate a wide signed value to the activation range.
  function automatic act_t sat_act(input logic signed [47:0] v);
    if (v > 48'(signed'(ACT_MAX)))      return ACT_MAX;
    else if (v < 48'(signed'(ACT_MIN))) return ACT_MIN;
    else                                return act_t'(v);
  endfunction

  // Bits per weight in each mode.
  function automatic int wbits(input wmode_e m);
    return (m == W_TERNARY) ? 2 : 1;
  endfunction

endpackage
