// tb_ref_pkg: reference arithmetic for the testbenches of the binary/ternary
// LSTM engine.
//
// These functions restate the number formats of btl_pkg in a different way:
// real-valued formulas followed by an explicit floor, rather than shifts.
// The testbenches compare the RTL against them. wgen() is a deterministic
// pseudo-random weight generator. The behavioural weight-memory model and
// the reference LSTM step both use it, so they agree on the weights without
// storing any table.
package tb_ref_pkg;
  import btl_pkg::*;

  function automatic int sat12(input longint v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return int'(v);
  endfunction

  // floor(a / 2^s) computed with reals
  function automatic longint fdiv(input longint a, input int s);
    real r;
    r = real'(a) / real'(longint'(1) << s);
    return longint'($floor(r));
  endfunction

  // Piecewise-linear sigmoid in Q3.8 (1.0 = 256), for any integer input.
  function automatic int ref_sigmoid(input int xq);
    real m, y;
    int  yp;
    m = (xq < 0) ? -real'(xq) / 256.0 : real'(xq) / 256.0;
    if (m >= 5.0)        y = 1.0;
    else if (m >= 2.375) y = m / 32.0 + 0.84375;
    else if (m >= 1.0)   y = m / 8.0 + 0.625;
    else                 y = m / 4.0 + 0.5;
    yp = int'($floor(y * 256.0 + 1.0e-9));
    return (xq < 0) ? 256 - yp : yp;
  endfunction

  function automatic int ref_tanh(input int xq);
    return sat12(2 * ref_sigmoid(2 * xq) - 256);
  endfunction

  // Folded BN of one gate row.
  function automatic int ref_bn(input longint acc_h, input longint acc_x,
                                input int a_h, input int a_x, input int bias);
    return sat12(fdiv(acc_h * a_h + acc_x * a_x, 12) + bias);
  endfunction

  // Cell update: returns {c_new, h_new} through outputs.
  function automatic void ref_cell(input int f, input int i, input int o, input int g,
                                   input int c_prev, input int a_c, input int b_c,
                                   output int c_new, output int h_new);
    int cb;
    c_new = sat12(fdiv(longint'(f) * c_prev + longint'(i) * g, 8));
    cb    = sat12(fdiv(longint'(c_new) * a_c, 12) + b_c);
    h_new = sat12(fdiv(longint'(o) * ref_tanh(cb), 8));
  endfunction

  // Deterministic weight of row r, column k, step seed s.
  // Binary: returns +1/-1. Ternary: +1/0/-1.
  function automatic int wgen(input int s, input int r, input int k, input bit ternary);
    int unsigned h;
    h = 32'h9E3779B9 * (32'(s) + 32'd1);
    h = h ^ (32'(r) * 32'h85EBCA6B);
    h = h ^ (32'(k) * 32'hC2B2AE35);
    h = h ^ (h >> 15);
    h = h * 32'h27D4EB2F;
    h = h ^ (h >> 13);
    if (!ternary) return h[7] ? 1 : -1;
    case (h[9:8])
      2'd0:    return 0;
      2'd1:    return 1;
      2'd2:    return -1;
      default: return h[10] ? 1 : -1;
    endcase
  endfunction

  // Weight code for the RTL.
  function automatic logic [1:0] wcode(input int w, input bit ternary);
    if (!ternary) return (w > 0) ? 2'b01 : 2'b00;
    if (w > 0) return 2'b01;
    if (w < 0) return 2'b11;
    return 2'b00;
  endfunction

  // One reference LSTM time step. The weights come from wgen(seed, row, col),
  // row = 4*unit + gate (f, i, o, g) and col < d_h for h, col >= d_h for x.
  // h and c are updated in place. n_csat counts saturated cell states.
  function automatic void ref_step(input int seed, input int dh, input int dx,
                                   input bit ternary, ref int h[], ref int c[],
                                   ref int x[], ref bn_unit_t prm[], ref int n_csat);
    int hn[], cn[];
    hn = new[dh];
    cn = new[dh];
    for (int j = 0; j < dh; j++) begin
      int gv[4];
      for (int q = 0; q < 4; q++) begin
        longint ah, ax;
        int pre;
        ah = 0; ax = 0;
        for (int k = 0; k < dh; k++) ah += longint'(wgen(seed, 4*j + q, k, ternary)) * h[k];
        for (int k = 0; k < dx; k++) ax += longint'(wgen(seed, 4*j + q, dh + k, ternary)) * x[k];
        pre   = ref_bn(ah, ax, prm[j].gate[q].a_h, prm[j].gate[q].a_x, prm[j].gate[q].bias);
        gv[q] = (q == 3) ? ref_tanh(pre) : ref_sigmoid(pre);
      end
      ref_cell(gv[0], gv[1], gv[2], gv[3], c[j], prm[j].a_c, prm[j].b_c, cn[j], hn[j]);
      if (cn[j] == 2047 || cn[j] == -2048) n_csat++;
    end
    for (int j = 0; j < dh; j++) begin h[j] = hn[j]; c[j] = cn[j]; end
  endfunction

  // Random BN parameters scaled to the row length n, so that the gate
  // pre-activations spread over roughly [-4, 4].
  function automatic bn_unit_t rand_bn(input int dh, input int dx, input bit cell_bn);
    bn_unit_t p;
    int sh, sx;
    sh = 4096 * 3 / ($sqrt(real'(dh)) > 1.0 ? int'($sqrt(real'(dh))) : 1);
    sx = 4096 * 3 / ($sqrt(real'(dx)) > 1.0 ? int'($sqrt(real'(dx))) : 1);
    sh = sh / 2;
    for (int q = 0; q < 4; q++) begin
      p.gate[q].a_h  = scale_t'($urandom_range(0, sh));
      p.gate[q].a_x  = scale_t'($urandom_range(0, sx));
      p.gate[q].bias = bias_t'(int'($urandom_range(0, 512)) - 256);
    end
    if (cell_bn) begin
      p.a_c = scale_t'($urandom_range(2048, 8192));
      p.b_c = bias_t'(int'($urandom_range(0, 128)) - 64);
    end else begin
      p.a_c = 16'sd4096;
      p.b_c = '0;
    end
    return p;
  endfunction

endpackage
