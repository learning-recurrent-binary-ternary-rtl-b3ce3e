// tb_nl_act: exhaustive self-checking test of the sigmoid/tanh unit. All
// 4096 12-bit inputs are applied for both functions. Each output is compared
// bit for bit with the reference piecewise-linear formula. It is also
// checked against the exact sigma and tanh: the error must stay within
// 0.025 for sigma and 0.05 for tanh.
module tb_nl_act;
  import btl_pkg::*;
  import tb_ref_pkg::*;

  act_t x, y;
  logic is_tanh;

  nl_act dut (.x, .is_tanh, .y);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    real xr, yr, ex;
    for (int f = 0; f < 2; f++) begin
      for (int v = -2048; v < 2048; v++) begin
        x = act_t'(v); is_tanh = f[0];
        #1;
        e  = f ? ref_tanh(v) : ref_sigmoid(v);
        xr = real'(v) / 256.0;
        ex = f ? (($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr))) : 1.0 / (1.0 + $exp(-xr));
        yr = real'(y) / 256.0;
        checks += 2;
        if (int'(y) != e) begin
          failures++;
          if (failures < 10) $display("%s(%0d): got %0d exp %0d", f ? "tanh" : "sig", v, y, e);
        end
        if ((yr - ex > (f ? 0.05 : 0.025)) || (ex - yr > (f ? 0.05 : 0.025))) begin
          failures++;
          if (failures < 10) $display("%s(%f) = %f, exact %f", f ? "tanh" : "sig", xr, yr, ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
