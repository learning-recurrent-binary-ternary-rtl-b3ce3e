// tb_bn_fold: self-checking test of the folded batch normalisation.
// It uses random accumulator values, scales and biases, includes corner
// values that drive the result into both saturation limits, and compares
// the result with the reference formula.
module tb_bn_fold;
  import btl_pkg::*;
  import tb_ref_pkg::*;

  acc_t acc_h, acc_x;
  bn_gate_t p;
  act_t pre;

  bn_fold dut (.acc_h, .acc_x, .p, .pre);

  int checks = 0, failures = 0, n_sat = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int t = 0; t < 20000; t++) begin
      if (t < 4) begin
        acc_h = (t % 2) ? acc_t'(-(1 << 23)) : acc_t'((1 << 23) - 1);
        acc_x = acc_h;
        p.a_h = (t < 2) ? 16'sh7FFF : 16'sh8000;
        p.a_x = p.a_h;
        p.bias = (t % 2) ? 16'sh8000 : 16'sh7FFF;
      end else begin
        acc_h  = acc_t'(int'($urandom_range(0, 1 << 17)) - (1 << 16));
        acc_x  = acc_t'(int'($urandom_range(0, 1 << 15)) - (1 << 14));
        p.a_h  = scale_t'($urandom);
        p.a_x  = scale_t'($urandom);
        p.bias = bias_t'(int'($urandom_range(0, 4096)) - 2048);
      end
      #1;
      e = ref_bn(acc_h, acc_x, p.a_h, p.a_x, p.bias);
      if (e == 2047 || e == -2048) n_sat++;
      checks++;
      if (int'(pre) != e) begin
        failures++;
        if (failures < 10) $display("acc %0d %0d a %0d %0d b %0d: got %0d exp %0d",
                                    acc_h, acc_x, p.a_h, p.a_x, p.bias, pre, e);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
