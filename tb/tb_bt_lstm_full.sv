// tb_bt_lstm_full: bt_lstm_top at its default size (100 binary MAC lanes,
// 2048-element buffers), running LSTM layers with the sizes of the tasks the
// engine was evaluated on:
//   MNIST (pixel by pixel)        d_h =  100, d_x =    1, 3 steps
//   Penn Treebank (characters)    d_h = 1000, d_x =   50
//   War & Peace (characters)      d_h =  512, d_x =   87
//   Linux kernel (characters)     d_h =  512, d_x =  101
//   Text8 (characters)            d_h = 2000, d_x =   27
//   Penn Treebank (words) S/M/L   d_h =  300 /  650 / 1500, d_x = d_h; the
//                                 large model's two layers are stacked, the
//                                 second taking the first's h_t as x_t
//   CNN question answering        d_h =  256, d_x =  256 (one direction)
// Character tasks use one-hot inputs of the vocabulary size, and MNIST one
// pixel. For the word models and the question-answering encoder, the input
// width is taken equal to the layer size, an embedding width that the
// evaluation does not state.
// Weights come from tb_ref_pkg::wgen and the stream never stalls. After each
// step all of h_t and c_t are compared with tb_ref_pkg::ref_step. The step
// time is checked against 4*d_h*(d_h+d_x)/100 cycles, one accumulation per
// lane per cycle, plus at most a 31-cycle tail. A layer whose 4*d_h rows are not a multiple
// of 100 leaves lanes idle in its last group, so its step takes
// ceil(4*d_h/100)*(d_h+d_x) cycles.
module tb_bt_lstm_full;
  import btl_pkg::*;
  import tb_ref_pkg::*;

  localparam int N_MAC = 100, UPG = 25, H_MAX = 2048, X_MAX = 2048;
  localparam int UW = $clog2(H_MAX);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic start, busy, done, w_valid, w_ready;
  logic [11:0] cfg_dh, cfg_dx;  // 12 bits: $clog2(2048 + 1)
  logic [N_MAC-1:0] w_data;
  logic x_we, p_we, st_we;
  logic [10:0] x_addr;
  logic [UW-1:0] p_addr, st_addr, rd_addr;
  act_t x_data, st_h, st_c, rd_h, rd_c;
  bn_unit_t p_data;
  logic [31:0] perf_cycles, perf_wait_w, perf_wait_post;

  bt_lstm_top dut (.*);

  int seed_cur, dh_cur, cols_cur, widx;
  always_comb begin
    int g, k, r;
    g = widx / cols_cur;
    k = widx % cols_cur;
    for (int i = 0; i < N_MAC; i++) begin
      r = g * N_MAC + i;
      w_data[i] = (r < 4 * dh_cur) ? wcode(wgen(seed_cur, r, k, 1'b0), 1'b0)[0] : 1'b0;
    end
  end
  always @(posedge clk) if (w_valid && w_ready) widx <= widx + 1;
  assign w_valid = busy;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_h[];   // h of the previous layer, read back from the engine

  task automatic run_layer(input string name, input int dh, input int dx, input int nstep,
                           input int sd, input bit stacked = 1'b0);
    int h[], c[], x[], nsat, cols, G, cyc, lat;
    bn_unit_t prm[];
    h = new[dh]; c = new[dh]; x = new[dx]; prm = new[dh];
    nsat = 0;
    for (int j = 0; j < dh; j++) begin
      h[j] = int'($urandom_range(0, 512)) - 256;
      c[j] = int'($urandom_range(0, 1024)) - 512;
      prm[j] = rand_bn(dh, dx, j[0]);
      @(negedge clk);
      st_we = 1; st_addr = UW'(j); st_h = act_t'(h[j]); st_c = act_t'(c[j]);
      p_we = 1; p_addr = UW'(j); p_data = prm[j];
    end
    @(negedge clk);
    st_we = 0; p_we = 0;
    for (int t = 0; t < nstep; t++) begin
      for (int k = 0; k < dx; k++) begin
        x[k] = (k == (t * 13 + sd) % dx) ? 256 : 0;   // one-hot (or one pixel)
        if (dx == 1) x[k] = int'($urandom_range(0, 256));
        if (stacked) x[k] = last_h[k];
        @(negedge clk);
        x_we = 1; x_addr = 11'(k); x_data = act_t'(x[k]);
      end
      @(negedge clk);
      x_we = 0;
      seed_cur = sd * 100 + t; dh_cur = dh; cols = dh + dx; cols_cur = cols; widx = 0;
      G = (4 * dh + N_MAC - 1) / N_MAC;
      start = 1; cfg_dh = 12'(dh); cfg_dx = 12'(dx);
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done && cyc < 1000000) begin @(negedge clk); cyc++; end
      check(done, {name, ": step did not finish"});
      ref_step(seed_cur, dh, dx, 1'b0, h, c, x, prm, nsat);
      lat = G * cols;
      check(widx == G * cols, $sformatf("%s: %0d words, exp %0d", name, widx, G * cols));
      check(int'(perf_cycles) >= lat && int'(perf_cycles) <= lat + UPG + 6,
            $sformatf("%s: %0d cycles, exp %0d..%0d", name, perf_cycles, lat, lat + UPG + 6));
      $display("%-14s d_h=%0d d_x=%0d step %0d: %0d cycles = %.1f ns at 400 MHz (ideal 4*d_h*(d_h+d_x)/N = %0d cycles)",
               name, dh, dx, t, perf_cycles, real'(perf_cycles) * 2.5, (4 * dh * cols) / N_MAC);
      @(negedge clk);
      for (int j = 0; j < dh; j++) begin
        rd_addr = UW'(j);
        #0.5;
        check(int'(rd_h) == h[j] && int'(rd_c) == c[j],
              $sformatf("%s step %0d unit %0d: h %0d c %0d, exp h %0d c %0d",
                        name, t, j, rd_h, rd_c, h[j], c[j]));
      end
      // The host reads h back; a stacked layer takes it as its input.
      last_h = new[dh];
      for (int j = 0; j < dh; j++) begin
        rd_addr = UW'(j);
        #0.5;
        last_h[j] = int'(rd_h);
      end
    end
  endtask

  initial begin
    start = 0; cfg_dh = '0; cfg_dx = '0; x_we = 0; p_we = 0; st_we = 0;
    x_addr = '0; p_addr = '0; st_addr = '0; rd_addr = '0; x_data = '0; st_h = '0; st_c = '0;
    p_data = '0; widx = 0; seed_cur = 0; dh_cur = 0; cols_cur = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_layer("MNIST", 100, 1, 3, 1);
    run_layer("PTB-char", 1000, 50, 1, 4);
    run_layer("War&Peace", 512, 87, 1, 2);
    run_layer("LinuxKernel", 512, 101, 1, 5);
    run_layer("Text8", 2000, 27, 1, 3);
    run_layer("PTB-word-S", 300, 300, 1, 6);
    run_layer("PTB-word-M", 650, 650, 1, 7);
    run_layer("PTB-word-L1", 1500, 1500, 1, 8);
    run_layer("PTB-word-L2", 1500, 1500, 1, 10, 1'b1);   // layer 2: x = h of layer 1
    run_layer("CNN-QA", 256, 256, 1, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
