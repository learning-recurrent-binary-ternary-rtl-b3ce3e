// tb_bt_mac: self-checking test of one multiplier-free MAC lane, in binary
// and ternary mode. Random activations and weights are fed for random row
// lengths with a random split between the h and x phases and random idle
// cycles. The hold registers are compared with sums computed here.
module tb_bt_mac;
  import btl_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic en, phase_x, last;
  act_t act;
  logic [0:0] wb;
  logic [1:0] wt;
  acc_t bh, bx, th, tx;

  bt_mac #(.WMODE(W_BINARY))  u_b (.clk, .rst_n, .en, .phase_x, .last, .act, .wcode(wb), .hold_h(bh), .hold_x(bx));
  bt_mac #(.WMODE(W_TERNARY)) u_t (.clk, .rst_n, .en, .phase_x, .last, .act, .wcode(wt), .hold_h(th), .hold_x(tx));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sbh, sbx, sth, stx;
    int n, nh, wbv, wtv, a;
    en = 0; phase_x = 0; last = 0; act = '0; wb = '0; wt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int row = 0; row < 300; row++) begin
      n  = 1 + $urandom_range(0, 60);
      nh = (row % 5 == 0) ? n : $urandom_range(1, n);  // some rows with d_x = 0
      if (row < 4) begin
        nh = n;  // large activations to exercise wide sums
      end
      sbh = 0; sbx = 0; sth = 0; stx = 0;
      for (int k = 0; k < n; k++) begin
        // random idle cycles in between
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          en = 0; act = act_t'($urandom); wb = 1'($urandom); wt = 2'($urandom);
          last = 1'($urandom);
        end
        @(negedge clk);
        a   = (row < 4) ? ((row % 2) ? -2048 : 2047) : $urandom_range(0, 4095) - 2048;
        wbv = $urandom_range(0, 1) ? 1 : -1;
        wtv = $urandom_range(0, 2) - 1;
        en = 1; act = act_t'(a); phase_x = (k >= nh); last = (k == n - 1);
        wb = 1'(wcode(wbv, 1'b0)); wt = wcode(wtv, 1'b1);
        if (row == 7 && k == 0) wt = 2'b10;  // the second zero code
        if (k < nh) begin sbh += a * wbv; sth += a * ((wt == 2'b10) ? 0 : wtv); end
        else        begin sbx += a * wbv; stx += a * wtv; end
      end
      @(negedge clk);
      en = 0; last = 0;
      checks += 4;
      if (longint'(bh) != sbh) begin failures++; $display("row %0d binary h: got %0d exp %0d", row, bh, sbh); end
      if (longint'(bx) != sbx) begin failures++; $display("row %0d binary x: got %0d exp %0d", row, bx, sbx); end
      if (longint'(th) != sth) begin failures++; $display("row %0d ternary h: got %0d exp %0d", row, th, sth); end
      if (longint'(tx) != stx) begin failures++; $display("row %0d ternary x: got %0d exp %0d", row, tx, stx); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
