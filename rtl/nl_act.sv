// nl_act: logistic sigmoid or tanh of a 12-bit fixed-point value.
//
// The LSTM needs sigma for the f, i and o gates and tanh for g and for the
// cell state. Only the functions come from the original engine. How it
// evaluates them is not given, so this unit uses the common piecewise-linear
// sigmoid approximation (PLAN), whose slopes are powers of two and so need
// only shifts and adds. For x >= 0:
//   x >= 5          : 1
//   2.375 <= x < 5  : x/32 + 0.84375
//   1 <= x < 2.375  : x/8  + 0.625
//   0 <= x < 1      : x/4  + 0.5
// and sigma(-x) = 1 - sigma(x). tanh is taken from the identity
// tanh(x) = 2*sigma(2x) - 1. Its largest error against the exact function is
// about 0.02 for sigma and 0.04 for tanh. All values are Q3.8 (1.0 = 256), and
// the divisions truncate.
//
// is_tanh selects the function. Purely combinational.
module nl_act
  import btl_pkg::*;
(
  input  act_t x,
  input  logic is_tanh,
  output act_t y
);

  // Q3.8 constants.
  localparam int ONE = 1 << FRAC;           // 1.0
  localparam int T5  = 5 * ONE;             // 5.0
  localparam int T2  = (19 * ONE) / 8;      // 2.375
  localparam int C3  = (27 * ONE) / 32;     // 0.84375
  localparam int C2  = (5 * ONE) / 8;       // 0.625
  localparam int C1  = ONE / 2;             // 0.5

  logic signed [ACT_W+1:0] xs;    // x or 2x, 14 bits
  logic        [ACT_W+1:0] mag;   // |xs|
  logic        [ACT_W+1:0] sp;    // sigma(|xs|), at most 1.0
  logic signed [ACT_W+1:0] s;     // sigma(xs)

  always_comb begin
    xs  = is_tanh ? ((ACT_W+2)'(x) <<< 1) : (ACT_W+2)'(x);
    mag = xs[ACT_W+1] ? (ACT_W+2)'(-xs) : (ACT_W+2)'(xs);
    if (mag >= (ACT_W+2)'(T5))      sp = (ACT_W+2)'(ONE);
    else if (mag >= (ACT_W+2)'(T2)) sp = (mag >> 5) + (ACT_W+2)'(C3);
    else if (mag >= (ACT_W+2)'(ONE)) sp = (mag >> 3) + (ACT_W+2)'(C2);
    else                             sp = (mag >> 2) + (ACT_W+2)'(C1);
    s = xs[ACT_W+1] ? (ACT_W+2)'(ONE) - signed'(sp) : signed'(sp);
    if (is_tanh) y = act_t'((s <<< 1) - (ACT_W+2)'(ONE));
    else         y = act_t'(s);
  end

endmodule
