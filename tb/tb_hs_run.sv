// tb_hs_run: runs LSTM layers of real task sizes on one bt_lstm_top
// configuration, given by N_MAC and WMODE. It is used for the high-speed
// engines: 1000 binary lanes and 500 ternary lanes. Weights come from
// tb_ref_pkg::wgen and the stream never stalls. h_t and c_t are compared
// with tb_ref_pkg::ref_step after every step. The step time must be
// ceil(4*d_h/N_MAC)*(d_h+d_x) cycles plus at most an N_MAC/4 + 6 tail.
module tb_hs_run
  import btl_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int     N_MAC = 1000,
  parameter wmode_e WMODE = W_BINARY
) (
  output int  checks,
  output int  failures,
  output bit  finished
);
  localparam int UPG = N_MAC / 4, H_MAX = 2048, X_MAX = 2048;
  localparam int WB = (WMODE == W_TERNARY) ? 2 : 1;
  localparam bit TERN = (WMODE == W_TERNARY);
  localparam int UW = $clog2(H_MAX);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic start, busy, done, w_valid, w_ready;
  logic [11:0] cfg_dh, cfg_dx;  // 12 bits: $clog2(2048 + 1)
  logic [N_MAC*WB-1:0] w_data;
  logic x_we, p_we, st_we;
  logic [10:0] x_addr;
  logic [UW-1:0] p_addr, st_addr, rd_addr;
  act_t x_data, st_h, st_c, rd_h, rd_c;
  bn_unit_t p_data;
  logic [31:0] perf_cycles, perf_wait_w, perf_wait_post;

  bt_lstm_top #(.N_MAC(N_MAC), .WMODE(WMODE)) dut (.*);

  int seed_cur, dh_cur, cols_cur, widx;
  always_comb begin
    int g, k, r;
    g = widx / cols_cur;
    k = widx % cols_cur;
    for (int i = 0; i < N_MAC; i++) begin
      r = g * N_MAC + i;
      w_data[i*WB +: WB] = (r < 4 * dh_cur) ? WB'(wcode(wgen(seed_cur, r, k, TERN), TERN)) : '0;
    end
  end
  always @(posedge clk) if (w_valid && w_ready) widx <= widx + 1;
  assign w_valid = busy;


  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask


  task automatic run_layer(input string name, input int dh, input int dx, input int nstep, input int sd);
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
      ref_step(seed_cur, dh, dx, TERN, h, c, x, prm, nsat);
      lat = G * cols;
      check(widx == G * cols, $sformatf("%s: %0d words, exp %0d", name, widx, G * cols));
      check(int'(perf_cycles) >= lat && int'(perf_cycles) <= lat + UPG + 6,
            $sformatf("%s: %0d cycles, exp %0d..%0d", name, perf_cycles, lat, lat + UPG + 6));
      $display("N=%0d %s %-14s d_h=%0d d_x=%0d step %0d: %0d cycles = %.1f ns at 400 MHz (ideal 4*d_h*(d_h+d_x)/N = %0d cycles)",
               N_MAC, WMODE.name(), name, dh, dx, t, perf_cycles, real'(perf_cycles) * 2.5, (4 * dh * cols) / N_MAC);
      @(negedge clk);
      for (int j = 0; j < dh; j++) begin
        rd_addr = UW'(j);
        #0.5;
        check(int'(rd_h) == h[j] && int'(rd_c) == c[j],
              $sformatf("%s step %0d unit %0d: h %0d c %0d, exp h %0d c %0d",
                        name, t, j, rd_h, rd_c, h[j], c[j]));
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    start = 0; cfg_dh = '0; cfg_dx = '0; x_we = 0; p_we = 0; st_we = 0;
    x_addr = '0; p_addr = '0; st_addr = '0; rd_addr = '0; x_data = '0; st_h = '0; st_c = '0;
    p_data = '0; widx = 0; seed_cur = 0; dh_cur = 0; cols_cur = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_layer("MNIST", 100, 1, 2, 11);
    run_layer("PTB-char", 1000, 50, 1, 14);
    run_layer("LinuxKernel", 512, 101, 1, 15);
    run_layer("PTB-word-S", 300, 300, 1, 16);
    finished = 1;
  end
endmodule
