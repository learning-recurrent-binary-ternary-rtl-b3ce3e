// tb_post_unit: self-checking test of the post-processing pipeline with 16
// lanes (4 units per group). Random hold values, BN parameters and cell
// states are offered for full and partial groups. Each written c and h is
// checked against the reference, and so is the unit it is written for. The
// test also checks that a group of U units finishes in U + 3 cycles and that
// rd_busy is high for exactly U cycles.
module tb_post_unit;
  import btl_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 16, HM = 32, UPG = N / 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic start;
  logic [4:0] start_base, rd_unit, wr_unit;
  logic [2:0] start_units;
  acc_t hold_h [N], hold_x [N];
  bn_unit_t bnp;
  act_t c_prev, wr_c, wr_h;
  logic wr_en, rd_busy, busy;

  post_unit #(.N_MAC(N), .H_MAX(HM)) dut (.clk, .rst_n, .start, .start_base, .start_units,
    .hold_h, .hold_x, .rd_unit, .bnp, .c_prev, .wr_en, .wr_unit, .wr_c, .wr_h, .rd_busy, .busy);

  bn_unit_t pmem [HM];
  act_t     cmem [HM];
  assign bnp    = pmem[rd_unit];
  assign c_prev = cmem[rd_unit];

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_c [HM], exp_h [HM];
  bit seen [HM];

  // Writes are checked as they appear.
  always @(posedge clk) begin
    if (rst_n && wr_en) begin
      checks++;
      if (seen[wr_unit] || int'(wr_c) != exp_c[wr_unit] || int'(wr_h) != exp_h[wr_unit]) begin
        failures++;
        $display("unit %0d: got c%0d h%0d exp c%0d h%0d (seen %0d)", wr_unit, wr_c, wr_h,
                 exp_c[wr_unit], exp_h[wr_unit], seen[wr_unit]);
      end
      seen[wr_unit] = 1'b1;
    end
  end

  initial begin
    int units, base, cyc, rdc, pre[4], gv[4];
    start = 0; start_base = '0; start_units = '0;
    for (int l = 0; l < N; l++) begin hold_h[l] = '0; hold_x[l] = '0; end
    for (int j = 0; j < HM; j++) begin
      for (int q = 0; q < 4; q++) begin
        pmem[j].gate[q].a_h  = scale_t'($urandom_range(0, 1024));
        pmem[j].gate[q].a_x  = scale_t'($urandom_range(0, 8192));
        pmem[j].gate[q].bias = bias_t'(int'($urandom_range(0, 512)) - 256);
      end
      pmem[j].a_c = (j % 2) ? 16'sd4096 : scale_t'($urandom_range(2048, 8192));
      pmem[j].b_c = (j % 2) ? 16'sd0 : bias_t'(int'($urandom_range(0, 64)) - 32);
      cmem[j] = act_t'(int'($urandom_range(0, 1024)) - 512);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int grp = 0; grp < 40; grp++) begin
      units = (grp % 3 == 2) ? $urandom_range(1, UPG) : UPG;
      base  = $urandom_range(0, HM - units);
      for (int l = 0; l < N; l++) begin
        hold_h[l] = acc_t'(int'($urandom_range(0, 40000)) - 20000);
        hold_x[l] = acc_t'(int'($urandom_range(0, 4000)) - 2000);
      end
      for (int j = 0; j < HM; j++) seen[j] = 0;
      for (int u = 0; u < units; u++) begin
        for (int q = 0; q < 4; q++) begin
          pre[q] = ref_bn(hold_h[4*u+q], hold_x[4*u+q], pmem[base+u].gate[q].a_h,
                          pmem[base+u].gate[q].a_x, pmem[base+u].gate[q].bias);
          gv[q]  = (q == 3) ? ref_tanh(pre[q]) : ref_sigmoid(pre[q]);
        end
        ref_cell(gv[0], gv[1], gv[2], gv[3], cmem[base+u], pmem[base+u].a_c,
                 pmem[base+u].b_c, exp_c[base+u], exp_h[base+u]);
      end
      @(negedge clk);
      start = 1; start_base = 5'(base); start_units = 3'(units);
      @(negedge clk);
      start = 0;
      cyc = 1; rdc = 0;
      while (busy) begin
        if (rd_busy) rdc++;
        @(negedge clk);
        cyc++;
      end
      checks += 3;
      if (cyc != units + 3) begin failures++; $display("group %0d: %0d cycles, exp %0d", grp, cyc, units + 3); end
      if (rdc != units) begin failures++; $display("group %0d: rd_busy %0d cycles, exp %0d", grp, rdc, units); end
      begin
        automatic int nseen = 0;
        for (int j = 0; j < HM; j++) nseen += seen[j];
        if (nseen != units) begin failures++; $display("group %0d: %0d units written, exp %0d", grp, nseen, units); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
