// tb_vec_buffer: self-checking test of the vector buffer. Random writes and
// reads on both read ports are compared with an array model kept here.
module tb_vec_buffer;
  localparam int DEPTH = 64, W = 12;
  logic clk = 1'b0;
  always #1 clk = ~clk;

  logic we;
  logic [5:0] waddr, raddr0, raddr1;
  logic [W-1:0] wdata, rdata0, rdata1;

  vec_buffer #(.DEPTH(DEPTH), .W(W)) dut (.clk, .we, .waddr, .wdata, .raddr0, .rdata0, .raddr1, .rdata1);

  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr0 = '0; raddr1 = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = W'($urandom); model[a] = wdata;
    end
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 6'($urandom); wdata = W'($urandom);
      raddr0 = 6'($urandom); raddr1 = 6'($urandom);
      #0.5;
      checks += 2;
      if (rdata0 != model[raddr0] || rdata1 != model[raddr1]) begin
        failures++;
        if (failures < 10) $display("read %0d/%0d: got %h/%h exp %h/%h", raddr0, raddr1,
                                    rdata0, rdata1, model[raddr0], model[raddr1]);
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
