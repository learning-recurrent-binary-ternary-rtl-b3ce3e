// cell_update: element-wise state update of one LSTM unit.
//
//   c_t = f * c_{t-1} + i * g
//   h_t = o * tanh(BN(c_t)),   BN(c) = floor(a_c * c / 2^SC_FRAC) + b_c
//
// The equations follow the LSTM used by the method, including its optional
// batch normalisation of the cell state. Setting a_c = 1.0 (4096) and b_c = 0
// turns that normalisation into the identity. Each product of two Q3.8
// values is shifted right by 8 (floor) and saturated to 12 bits, which is
// this design's choice. The unit has three 12x12 multipliers and one 16x12
// multiplier.
//
// Purely combinational.
module cell_update
  import btl_pkg::*;
(
  input  act_t   f,
  input  act_t   i,
  input  act_t   o,
  input  act_t   g,
  input  act_t   c_prev,
  input  scale_t a_c,
  input  bias_t  b_c,
  output act_t   c_new,
  output act_t   h_new
);

  logic signed [47:0] fc, ig, cs, oh;
  act_t c_bn, tanh_c;

  nl_act u_tanh (.x(c_bn), .is_tanh(1'b1), .y(tanh_c));

  always_comb begin
    fc = 48'(f);
    fc = fc * 48'(c_prev);
    ig = 48'(i);
    ig = ig * 48'(g);
    c_new = sat_act((fc + ig) >>> FRAC);
    cs = 48'(c_new);
    cs = cs * 48'(a_c);
    c_bn = sat_act((cs >>> SC_FRAC) + 48'(b_c));
    oh = 48'(o);
    oh = oh * 48'(tanh_c);
    h_new = sat_act(oh >>> FRAC);
  end

endmodule
