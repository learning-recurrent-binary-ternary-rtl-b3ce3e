// tb_bt_lstm_top: end-to-end test of the LSTM engine. It runs two reduced
// instances: binary with 16 lanes, and ternary with 8 lanes and a 4-bit-wide
// group. Both use 32 hidden and 16 input elements at most. Each instance runs
// tb_top_run's sequences, and h and c are checked after every time step. The
// test then requires every mechanism to have happened at least once: a
// stalled weight stream, the MAC array waiting for the post-processor, a
// partly used last row group, a step with no input vector, consecutive steps
// through the h ping-pong buffers, a saturated cell state, the cell-state BN,
// and ternary zero weights.
module tb_bt_lstm_top;
  import btl_pkg::*;

  int ck[2], fl[2], sw[2], hp[2], pa[2], d0[2], ps[2], cs[2], cb[2], zw[2];
  bit fin[2];

  tb_top_run #(.N_MAC(16), .WMODE(W_BINARY),  .SEED(1)) u_bin (
    .checks(ck[0]), .failures(fl[0]), .n_stall_w(sw[0]), .n_hold_post(hp[0]), .n_partial(pa[0]),
    .n_dx0(d0[0]), .n_swap(ps[0]), .n_csat(cs[0]), .n_cellbn(cb[0]), .n_zero_w(zw[0]), .finished(fin[0]));
  tb_top_run #(.N_MAC(8),  .WMODE(W_TERNARY), .SEED(2)) u_ter (
    .checks(ck[1]), .failures(fl[1]), .n_stall_w(sw[1]), .n_hold_post(hp[1]), .n_partial(pa[1]),
    .n_dx0(d0[1]), .n_swap(ps[1]), .n_csat(cs[1]), .n_cellbn(cb[1]), .n_zero_w(zw[1]), .finished(fin[1]));

  int checks, failures;

  task automatic need(input int n, input string what);
    checks++;
    $display("  %-40s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", ck[0] + ck[1], fl[0] + fl[1] + 1);
    $finish;
  end

  initial begin
    wait (fin[0] && fin[1]);
    checks = ck[0] + ck[1];
    failures = fl[0] + fl[1];
    for (int i = 0; i < 2; i++) begin
      $display("%s instance:", i ? "ternary" : "binary");
      need(sw[i], "weight stream stall cycles");
      need(hp[i], "cycles waiting for post-processing");
      need(pa[i], "steps with a partial last group");
      need(d0[i], "steps with d_x = 0");
      need(ps[i], "steps after a ping-pong swap");
      need(cs[i], "saturated cell states");
      need(cb[i], "steps with cell-state BN");
    end
    need(zw[1], "ternary zero weights");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
