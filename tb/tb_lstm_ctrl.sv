// tb_lstm_ctrl: self-checking test of the step sequencer with 16 lanes
// (4 units per group). A behavioural post-processor stands in for post_unit:
// it reads for U cycles and stays busy for U + 3. The weight stream is
// either always valid or valid at random. For random layer sizes the test
// checks:
// - every accepted word's column, phase, h/x address and last flag;
// - the number of accepted words, which must be ceil(d_h/4) * (d_h + d_x);
// - the base and size of every group handed to the post-processor;
// - a single done pulse, with swap on the edge before it;
// - the cycle count. With a stream that never stalls and groups longer than
//   the post-processor's read, a step must take the accepted words plus at
//   most U + 6 cycles, with no waiting counted.
// Short rows must make the controller wait for the post-processor at least
// once.
module tb_lstm_ctrl;
  import btl_pkg::*;

  localparam int N = 16, HM = 32, XM = 16, UPG = N / 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic start, w_valid, w_ready, mac_en, mac_phase_x, mac_last, grp_start;
  logic [5:0] cfg_dh;
  logic [4:0] cfg_dx;
  logic [4:0] h_addr, grp_base;
  logic [3:0] x_addr;
  logic [2:0] grp_units;
  logic post_rd_busy, post_busy, busy, done, swap;
  logic [31:0] perf_cycles, perf_wait_w, perf_wait_post;

  lstm_ctrl #(.N_MAC(N), .H_MAX(HM), .X_MAX(XM)) dut (.*);

  // Behavioural post-processor.
  int prd = 0, pbusy = 0;
  assign post_rd_busy = (prd > 0);
  assign post_busy    = (pbusy > 0);
  always @(posedge clk) begin
    if (grp_start) begin prd <= grp_units; pbusy <= grp_units + 3; end
    else begin
      if (prd > 0) prd <= prd - 1;
      if (pbusy > 0) pbusy <= pbusy - 1;
    end
  end

  int checks = 0, failures = 0;
  int n_holdback_steps = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    int dh, dx, cols, G, acc, grp, col, ngs, ndone, cyc, nswap;
    bit stall;
    start = 0; cfg_dh = '0; cfg_dx = '0; w_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      dh = $urandom_range(1, HM);
      dx = $urandom_range(0, XM);
      if (t % 4 == 3) begin dh = $urandom_range(1, 6); dx = $urandom_range(0, 1); end
      stall = (t % 2 == 1);
      cols = dh + dx;
      G = (dh + UPG - 1) / UPG;
      @(negedge clk);
      start = 1; cfg_dh = 6'(dh); cfg_dx = 5'(dx);
      @(negedge clk);
      start = 0;
      acc = 0; grp = 0; col = 0; ngs = 0; ndone = 0; cyc = 1; nswap = 0;
      while (ndone == 0 && cyc < 5000) begin
        w_valid = stall ? 1'($urandom_range(0, 2) != 0) : 1'b1;
        #0.5;
        if (swap) nswap++;
        if (mac_en) begin
          check(mac_phase_x == (col >= dh), $sformatf("phase at col %0d", col));
          if (col < dh) check(int'(h_addr) == col, $sformatf("h_addr %0d exp %0d", h_addr, col));
          else          check(int'(x_addr) == col - dh, $sformatf("x_addr %0d exp %0d", x_addr, col - dh));
          check(mac_last == (col == cols - 1), $sformatf("last at col %0d", col));
          acc++;
          col++;
          if (col == cols) begin col = 0; grp++; end
        end
        @(negedge clk);
        cyc++;
        if (grp_start) begin
          check(int'(grp_base) == UPG * ngs, $sformatf("grp_base %0d exp %0d", grp_base, UPG * ngs));
          check(int'(grp_units) == ((dh - UPG * ngs > UPG) ? UPG : dh - UPG * ngs),
                $sformatf("grp_units %0d", grp_units));
          ngs++;
        end
        if (done) ndone++;
      end
      w_valid = 0;
      check(acc == G * cols, $sformatf("dh %0d dx %0d: %0d words, exp %0d", dh, dx, acc, G * cols));
      check(ngs == G, $sformatf("%0d groups, exp %0d", ngs, G));
      check(ndone == 1 && nswap == 1, $sformatf("done %0d swap %0d", ndone, nswap));
      check(int'(perf_cycles) == cyc, $sformatf("perf_cycles %0d exp %0d", perf_cycles, cyc));
      @(negedge clk);
      check(!busy && !done, "busy/done after step");
      if (!stall && cols >= UPG + 2) begin
        check(perf_wait_w == 0 && perf_wait_post == 0, "waits counted with a full stream");
        check(int'(perf_cycles) <= G * cols + UPG + 6,
              $sformatf("dh %0d dx %0d: %0d cycles > %0d", dh, dx, perf_cycles, G * cols + UPG + 6));
      end
      if (perf_wait_post > 0) n_holdback_steps++;
    end
    check(n_holdback_steps > 0, "post-processor hold-back never happened");
    $display("steps held back by the post-processor: %0d", n_holdback_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
