// vec_buffer: on-chip vector buffer with one write port and two read ports.
//
// The engine keeps the hidden state h (two of these, used as a ping-pong
// pair), the cell state c, the input vector x_t and the per-unit folded BN
// parameters in buffers of this kind. The original engine keeps weights and
// activations in DRAM and does not describe its on-chip storage. These
// buffers are this design's choice: one word per vector element, written as
// a plain array.
//
// Timing: a write lands at the clock edge when `we` is high. Reads are
// asynchronous, so rdata follows raddr in the same cycle, as in a register
// file. The contents are not reset. Whatever is read must be written first.
module vec_buffer #(
  parameter int DEPTH = 2048,
  parameter int W     = 12,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr0,
  output logic [W-1:0]  rdata0,
  input  logic [AW-1:0] raddr1,
  output logic [W-1:0]  rdata1
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];

endmodule
