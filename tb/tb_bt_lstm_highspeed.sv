// tb_bt_lstm_highspeed: the two high-speed engines, 1000 binary MAC lanes
// and 500 ternary MAC lanes, and the 100-lane ternary low-power engine, each
// running LSTM layers of task sizes (MNIST,
// Penn Treebank characters, Linux kernel, small Penn Treebank word model)
// through tb_hs_run. At the same clock the 1000-lane engine should be 10x
// faster per step than the 100-lane default, and the 500-lane one 5x.
module tb_bt_lstm_highspeed;
  import btl_pkg::*;

  int ck[3], fl[3];
  bit fin[3];

  tb_hs_run #(.N_MAC(1000), .WMODE(W_BINARY))  u_bin (.checks(ck[0]), .failures(fl[0]), .finished(fin[0]));
  tb_hs_run #(.N_MAC(500),  .WMODE(W_TERNARY)) u_ter (.checks(ck[1]), .failures(fl[1]), .finished(fin[1]));
  tb_hs_run #(.N_MAC(100),  .WMODE(W_TERNARY)) u_lpt (.checks(ck[2]), .failures(fl[2]), .finished(fin[2]));

  initial begin
    #50000000;
    $display("TB_RESULT checks=%0d failures=%0d", ck[0] + ck[1] + ck[2], fl[0] + fl[1] + fl[2] + 1);
    $finish;
  end

  initial begin
    wait (fin[0] && fin[1] && fin[2]);
    $display("TB_RESULT checks=%0d failures=%0d", ck[0] + ck[1] + ck[2], fl[0] + fl[1] + fl[2]);
    $finish;
  end
endmodule
