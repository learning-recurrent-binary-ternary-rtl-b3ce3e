// bn_fold: batch normalisation of one gate row, folded for inference.
//
// During training, the method normalises each of the two binary/ternary
// products of a gate separately: BN(W_h h; phi_h, 0) + BN(W_x x; phi_x, 0) + b.
// At inference the mean and variance are constants, so the whole expression
// is an affine map of the two accumulator values:
//   pre = floor((a_h * acc_h + a_x * acc_x) / 2^SC_FRAC) + bias
// The parameters a_h, a_x and bias are precomputed off-line, as described in
// btl_pkg. The result saturates to the 12-bit activation range. The fold and
// the rounding (floor) are this design's choice. The BN itself comes from the
// training method. This unit holds the only multipliers left outside the
// element-wise cell update: two per gate row, against d_h + d_x
// accumulations per row.
//
// Purely combinational.
module bn_fold
  import btl_pkg::*;
(
  input  acc_t     acc_h,
  input  acc_t     acc_x,
  input  bn_gate_t p,
  output act_t     pre
);

  logic signed [47:0] prod_h, prod_x, scaled;

  always_comb begin
    // Both operands are extended to 48 bits before multiplying.
    prod_h = 48'(acc_h);
    prod_h = prod_h * 48'(p.a_h);
    prod_x = 48'(acc_x);
    prod_x = prod_x * 48'(p.a_x);
    scaled = ((prod_h + prod_x) >>> SC_FRAC) + 48'(p.bias);
    pre      = sat_act(scaled);
  end

endmodule
