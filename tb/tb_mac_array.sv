// tb_mac_array: self-checking test of the MAC array with 8 lanes, in binary
// and ternary mode. Each row group uses random weights per lane and column
// and a random h/x split. Every lane's two sums are checked against values
// computed here.
module tb_mac_array;
  import btl_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic en, phase_x, last;
  act_t act;
  logic [N-1:0]   wb;
  logic [2*N-1:0] wt;
  acc_t bh [N], bx [N], th [N], tx [N];

  mac_array #(.N_MAC(N), .WMODE(W_BINARY))  u_b (.clk, .rst_n, .en, .phase_x, .last, .act, .wdata(wb), .hold_h(bh), .hold_x(bx));
  mac_array #(.N_MAC(N), .WMODE(W_TERNARY)) u_t (.clk, .rst_n, .en, .phase_x, .last, .act, .wdata(wt), .hold_h(th), .hold_x(tx));

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sbh [N], sbx [N], sth [N], stx [N];
    int n, nh, a, w;
    en = 0; phase_x = 0; last = 0; act = '0; wb = '0; wt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int grp = 0; grp < 60; grp++) begin
      n  = $urandom_range(1, 40);
      nh = $urandom_range(1, n);
      for (int l = 0; l < N; l++) begin sbh[l] = 0; sbx[l] = 0; sth[l] = 0; stx[l] = 0; end
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        a = $urandom_range(0, 4095) - 2048;
        en = 1; act = act_t'(a); phase_x = (k >= nh); last = (k == n - 1);
        for (int l = 0; l < N; l++) begin
          w = wgen(grp, l, k, 1'b0);
          wb[l] = wcode(w, 1'b0)[0];
          if (k < nh) sbh[l] += a * w; else sbx[l] += a * w;
          w = wgen(grp, l, k, 1'b1);
          wt[2*l +: 2] = wcode(w, 1'b1);
          if (k < nh) sth[l] += a * w; else stx[l] += a * w;
        end
      end
      @(negedge clk);
      en = 0; last = 0;
      for (int l = 0; l < N; l++) begin
        checks += 4;
        if (longint'(bh[l]) != sbh[l] || longint'(bx[l]) != sbx[l] ||
            longint'(th[l]) != sth[l] || longint'(tx[l]) != stx[l]) begin
          failures++;
          $display("group %0d lane %0d: b %0d/%0d exp %0d/%0d, t %0d/%0d exp %0d/%0d",
                   grp, l, bh[l], bx[l], sbh[l], sbx[l], th[l], tx[l], sth[l], stx[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
