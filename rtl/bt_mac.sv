// bt_mac: one multiplier-free MAC lane.
//
// The weights are binary (+1/-1) or ternary (+1/0/-1), so the product of a
// weight and the broadcast 12-bit activation is a multiplexer choice between
// +a, -a and 0, which replaces the 12-bit multiplier of a conventional MAC.
// This follows the original engine. The lane keeps two accumulators because
// the hidden-to-hidden product W_h*h and the input-to-hidden product W_x*x are
// batch-normalised with different parameters. The split into two
// accumulators, and the hold registers that free them for the next row
// group, are this design's choice.
//
// Interface and timing: when `en` is high, the selected term is added at the
// clock edge to acc_h (phase_x = 0) or acc_x (phase_x = 1). When `en` and
// `last` are both high, the two final sums, this cycle's term included, are
// copied to hold_h/hold_x and the accumulators restart from zero. The holds
// are valid from the cycle after that edge until the next `last`. Reset
// clears all four registers.
module bt_mac
  import btl_pkg::*;
#(
  parameter wmode_e WMODE = W_BINARY,
  localparam int    WB    = (WMODE == W_TERNARY) ? 2 : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          phase_x,
  input  logic          last,
  input  act_t          act,
  input  logic [WB-1:0] wcode,
  output acc_t          hold_h,
  output acc_t          hold_x
);

  acc_t acc_h, acc_x;
  acc_t term;

  // The multiplexer that stands in for the multiplier.
  if (WMODE == W_TERNARY) begin : g_ternary
    always_comb begin
      unique case (wcode)
        2'b01:   term = acc_t'(act);
        2'b11:   term = -acc_t'(act);
        default: term = '0;
      endcase
    end
  end else begin : g_binary
    assign term = wcode[0] ? acc_t'(act) : -acc_t'(act);
  end

  acc_t sum_h, sum_x;
  assign sum_h = phase_x ? acc_h : acc_h + term;
  assign sum_x = phase_x ? acc_x + term : acc_x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_h  <= '0;
      acc_x  <= '0;
      hold_h <= '0;
      hold_x <= '0;
    end else if (en) begin
      if (last) begin
        hold_h <= sum_h;
        hold_x <= sum_x;
        acc_h  <= '0;
        acc_x  <= '0;
      end else begin
        acc_h <= sum_h;
        acc_x <= sum_x;
      end
    end
  end

endmodule
