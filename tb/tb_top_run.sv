// tb_top_run: end-to-end test harness for bt_lstm_top at a reduced size.
//
// It runs a series of sequences. Each sequence loads random BN parameters
// and an initial h and c, then runs several time steps with a fresh random
// x_t each. The harness plays the external weight memory: it serves the word
// of the current group and column, computed from tb_ref_pkg::wgen. Lanes
// past the last valid row get random bits, which the engine must ignore.
// Words are valid either always or at random. After each step the whole
// h_t and c_t are read back and compared with tb_ref_pkg::ref_step. With a
// stream that never stalls, the step must take between
// ceil(4*d_h/N_MAC)*(d_h+d_x) and that plus N_MAC/4 + 6 cycles.
// The mechanism counters are outputs, so the test that uses the harness can
// require each one to have happened.
module tb_top_run
  import btl_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int     N_MAC  = 16,
  parameter wmode_e WMODE  = W_BINARY,
  parameter int     H_MAX  = 32,
  parameter int     X_MAX  = 16,
  parameter int     NSEQ   = 12,
  parameter int     SEED   = 1
) (
  output int checks,
  output int failures,
  output int n_stall_w,      // cycles the weight stream was not valid
  output int n_hold_post,    // cycles the last column waited for post-processing
  output int n_partial,      // steps whose last group was only partly used
  output int n_dx0,          // steps with no input vector
  output int n_swap,         // steps that started from a previous step's h
  output int n_csat,         // cell states that saturated
  output int n_cellbn,       // steps with the cell-state BN enabled
  output int n_zero_w,       // zero weights served (ternary)
  output bit finished
);
  localparam int  WB  = (WMODE == W_TERNARY) ? 2 : 1;
  localparam int  UPG = N_MAC / 4;
  localparam int  HW  = $clog2(H_MAX + 1);
  localparam int  XW  = $clog2(X_MAX + 1);
  localparam int  UW  = $clog2(H_MAX);
  localparam int  XAW = $clog2(X_MAX);
  localparam bit  TERN = (WMODE == W_TERNARY);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic start, busy, done, w_valid, w_ready;
  logic [HW-1:0] cfg_dh;
  logic [XW-1:0] cfg_dx;
  logic [N_MAC*WB-1:0] w_data;
  logic x_we, p_we, st_we;
  logic [XAW-1:0] x_addr;
  logic [UW-1:0] p_addr, st_addr, rd_addr;
  act_t x_data, st_h, st_c, rd_h, rd_c;
  bn_unit_t p_data;
  logic [31:0] perf_cycles, perf_wait_w, perf_wait_post;

  bt_lstm_top #(.N_MAC(N_MAC), .WMODE(WMODE), .H_MAX(H_MAX), .X_MAX(X_MAX)) dut (.*);

  // ---- behavioural weight memory ----
  int  seed_cur, dh_cur, cols_cur, widx;
  bit  stall_mode;
  always_comb begin
    int g, k, r;
    g = (cols_cur > 0) ? widx / cols_cur : 0;
    k = (cols_cur > 0) ? widx % cols_cur : 0;
    w_data = '0;
    for (int i = 0; i < N_MAC; i++) begin
      r = g * N_MAC + i;
      if (r < 4 * dh_cur) w_data[i*WB +: WB] = WB'(wcode(wgen(seed_cur, r, k, TERN), TERN));
      else                w_data[i*WB +: WB] = WB'(r * 7 + k);
    end
  end
  always @(posedge clk) begin
    if (w_valid && w_ready) begin
      widx <= widx + 1;
      for (int i = 0; i < N_MAC; i++)
        if (g_rowvalid(i) && TERN && w_data[i*WB +: WB] == '0) n_zero_w++;
    end
  end
  function automatic bit g_rowvalid(input int i);
    return ((widx / (cols_cur > 0 ? cols_cur : 1)) * N_MAC + i) < 4 * dh_cur;
  endfunction
  always @(negedge clk) w_valid <= busy && (!stall_mode || ($urandom_range(0, 3) != 0));
  always @(posedge clk) if (busy && !w_valid) n_stall_w++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL (N=%0d %s): %s", N_MAC, WMODE.name(), msg); end
  endtask

  initial begin
    int h[], c[], x[];
    bn_unit_t prm[];
    int dh, dx, nstep, cols, G, cyc;
    bit cell_bn;
    checks = 0; failures = 0; n_stall_w = 0; n_hold_post = 0; n_partial = 0; n_dx0 = 0;
    n_swap = 0; n_csat = 0; n_cellbn = 0; n_zero_w = 0; finished = 0;
    start = 0; cfg_dh = '0; cfg_dx = '0; x_we = 0; p_we = 0; st_we = 0;
    x_addr = '0; p_addr = '0; st_addr = '0; rd_addr = '0; x_data = '0; st_h = '0; st_c = '0;
    p_data = '0; widx = 0; seed_cur = 0; dh_cur = 0; cols_cur = 1; stall_mode = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NSEQ; s++) begin
      case (s % 4)
        0: begin dh = H_MAX; dx = X_MAX; end                       // full size
        1: begin dh = $urandom_range(1, H_MAX); dx = 0; end         // no input
        2: begin dh = UPG + 1; dx = 0; end                          // short rows: post hold-back
        default: begin dh = $urandom_range(1, H_MAX); dx = $urandom_range(1, X_MAX); end
      endcase
      nstep   = $urandom_range(2, 4);
      cell_bn = s[0];
      stall_mode = s[1];
      h = new[dh]; c = new[dh]; x = new[dx > 0 ? dx : 1]; prm = new[dh];
      for (int j = 0; j < dh; j++) begin
        h[j] = int'($urandom_range(0, 512)) - 256;
        c[j] = (s == 0 && j < 2) ? ((j == 0) ? 2040 : -2040) : int'($urandom_range(0, 1024)) - 512;
        prm[j] = rand_bn(dh, dx, cell_bn);
        if (s == 0 && j < 2) begin   // drive two cells into saturation
          prm[j].gate[0].bias = 16'sd2047; prm[j].gate[1].bias = 16'sd2047;
          prm[j].gate[3].bias = (j == 0) ? 16'sd2047 : -16'sd2048;
          prm[j].gate[0].a_h = '0; prm[j].gate[0].a_x = '0;
          prm[j].gate[1].a_h = '0; prm[j].gate[1].a_x = '0;
          prm[j].gate[3].a_h = '0; prm[j].gate[3].a_x = '0;
        end
        @(negedge clk);
        st_we = 1; st_addr = UW'(j); st_h = act_t'(h[j]); st_c = act_t'(c[j]);
        p_we = 1; p_addr = UW'(j); p_data = prm[j];
      end
      @(negedge clk);
      st_we = 0; p_we = 0;
      for (int t = 0; t < nstep; t++) begin
        for (int k = 0; k < dx; k++) begin
          x[k] = int'($urandom_range(0, 512)) - 256;
          @(negedge clk);
          x_we = 1; x_addr = XAW'(k); x_data = act_t'(x[k]);
        end
        @(negedge clk);
        x_we = 0;
        seed_cur = SEED * 1000 + s * 10 + t; dh_cur = dh; cols = dh + dx; cols_cur = cols; widx = 0;
        G = (dh + UPG - 1) / UPG;
        start = 1; cfg_dh = HW'(dh); cfg_dx = XW'(dx);
        @(negedge clk);
        start = 0;
        cyc = 0;
        while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
        check(done, "step did not finish");
        ref_step(seed_cur, dh, dx, TERN, h, c, x, prm, n_csat);
        check(widx == G * cols, $sformatf("%0d words taken, exp %0d", widx, G * cols));
        n_hold_post += perf_wait_post;
        if (dh % UPG != 0) n_partial++;
        if (dx == 0) n_dx0++;
        if (t > 0) n_swap++;
        if (cell_bn) n_cellbn++;
        if (!stall_mode) begin
          check(perf_wait_w == 0, "weight waits with a full stream");
          if (cols >= UPG + 2)
            check(int'(perf_cycles) >= G * cols && int'(perf_cycles) <= G * cols + UPG + 6,
                  $sformatf("dh %0d dx %0d: %0d cycles, exp %0d..%0d", dh, dx, perf_cycles,
                            G * cols, G * cols + UPG + 6));
        end
        @(negedge clk);
        for (int j = 0; j < dh; j++) begin
          rd_addr = UW'(j);
          #0.5;
          check(int'(rd_h) == h[j] && int'(rd_c) == c[j],
                $sformatf("seq %0d step %0d unit %0d: h %0d c %0d, exp h %0d c %0d",
                          s, t, j, rd_h, rd_c, h[j], c[j]));
        end
      end
    end
    finished = 1;
  end
endmodule
