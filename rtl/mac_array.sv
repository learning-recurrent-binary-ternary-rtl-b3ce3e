// mac_array: N_MAC multiplier-free MAC lanes working side by side.
//
// Each cycle one element of the input vector [h_{t-1}; x_t] is broadcast to
// all lanes, and lane i multiplies it by its own binary/ternary weight, taken
// from bits [i*WB +: WB] of the weight word. Lane i therefore builds the dot
// product of one row of the stacked gate matrix. The lane count is 100 by
// default, the size of the original low-power engine; its high-speed variants
// use 1000 (binary) or 500 (ternary) lanes. Broadcasting one input element to
// all lanes, so that every lane owns one output row, is this design's choice
// of dataflow.
//
// Timing: en/phase_x/last act as in bt_mac, for all lanes at once. The holds
// of all lanes become valid on the cycle after an accepted `last`.
module mac_array
  import btl_pkg::*;
#(
  parameter int     N_MAC = 100,
  parameter wmode_e WMODE = W_BINARY,
  localparam int    WB    = (WMODE == W_TERNARY) ? 2 : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              phase_x,
  input  logic              last,
  input  act_t              act,
  input  logic [N_MAC*WB-1:0] wdata,
  output acc_t              hold_h [N_MAC],
  output acc_t              hold_x [N_MAC]
);

  for (genvar i = 0; i < N_MAC; i++) begin : g_lane
    bt_mac #(.WMODE(WMODE)) u_mac (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (en),
      .phase_x(phase_x),
      .last   (last),
      .act    (act),
      .wcode  (wdata[i*WB +: WB]),
      .hold_h (hold_h[i]),
      .hold_x (hold_x[i])
    );
  end

endmodule
