// tb_cell_update: self-checking test of the element-wise LSTM state update.
// It applies random gate values in their natural ranges and random cell
// states, with the cell-state BN both as the identity and random, plus
// corner cases that saturate c. Outputs are compared with the reference.
module tb_cell_update;
  import btl_pkg::*;
  import tb_ref_pkg::*;

  act_t f, i, o, g, c_prev, c_new, h_new;
  scale_t a_c;
  bias_t  b_c;

  cell_update dut (.f, .i, .o, .g, .c_prev, .a_c, .b_c, .c_new, .h_new);

  int checks = 0, failures = 0, n_sat = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ec, eh;
    for (int t = 0; t < 20000; t++) begin
      f = act_t'($urandom_range(0, 256));
      i = act_t'($urandom_range(0, 256));
      o = act_t'($urandom_range(0, 256));
      g = act_t'(int'($urandom_range(0, 512)) - 256);
      c_prev = act_t'(int'($urandom_range(0, 4095)) - 2048);
      if (t % 2) begin a_c = 16'sd4096; b_c = '0; end
      else begin a_c = scale_t'($urandom_range(0, 16384)); b_c = bias_t'(int'($urandom_range(0, 512)) - 256); end
      if (t < 2) begin f = 12'sd256; i = 12'sd256; g = t ? -12'sd256 : 12'sd256; c_prev = t ? ACT_MIN : ACT_MAX; end
      #1;
      ref_cell(f, i, o, g, c_prev, a_c, b_c, ec, eh);
      if (ec == 2047 || ec == -2048) n_sat++;
      checks += 2;
      if (int'(c_new) != ec || int'(h_new) != eh) begin
        failures++;
        if (failures < 10) $display("f%0d i%0d o%0d g%0d c%0d: got c%0d h%0d exp c%0d h%0d",
                                    f, i, o, g, c_prev, c_new, h_new, ec, eh);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation of c never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
