// lstm_ctrl: sequencer of one LSTM time step.
//
// The stacked gate matrix has 4*d_h rows and d_h + d_x columns. The
// controller cuts the rows into groups of N_MAC, one row per MAC lane. For
// each group it steps through the columns: first the d_h elements of h_{t-1},
// then the d_x elements of x_t. It accepts one weight word from the weight
// stream per column and broadcasts the matching activation. On the last
// column of a group it moves the sums to the hold registers and starts the
// post-processor on that group, while the next group begins. A time step
// therefore takes ceil(4*d_h/N_MAC) * (d_h + d_x) accepted weight words.
// With a weight stream that never stalls, the last group then needs a tail
// of at most N_MAC/4 + 6 cycles. This matches the original engine's latency
// of 4*d_h*(d_h+d_x)/N_MAC cycles per step, one accumulation per MAC unit per
// cycle. The group/column order is this design's choice.
//
// Stalls: the stream is handshaken (an accepted word is one with w_valid and
// w_ready both high). w_ready drops in two cases: outside a step, and on a
// group's last column while the post-processor is still reading the previous
// group's holds.
//
// Interface: `start` (in IDLE) latches cfg_dh (1..H_MAX) and cfg_dx
// (0..X_MAX). `done` pulses for one cycle when the step's last h_t and c_t
// are written. `swap` pulses on the edge that ends the step and tells the top
// to exchange the h ping-pong buffers. The perf_* counters cover the last
// step: its cycles from start to done (the start cycle counted, the done
// cycle not), its cycles with no valid weight word,
// and its cycles held back by the post-processor.
module lstm_ctrl
  import btl_pkg::*;
#(
  parameter int  N_MAC = 100,
  parameter int  H_MAX = 2048,
  parameter int  X_MAX = 2048,
  localparam int UPG   = N_MAC / NGATES,
  localparam int HW    = $clog2(H_MAX + 1),
  localparam int XW    = $clog2(X_MAX + 1),
  localparam int CW    = $clog2(H_MAX + X_MAX + 1),
  localparam int UW    = $clog2(H_MAX),
  localparam int NW    = $clog2(UPG + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [HW-1:0] cfg_dh,
  input  logic [XW-1:0] cfg_dx,
  input  logic          w_valid,
  output logic          w_ready,
  output logic          mac_en,
  output logic          mac_phase_x,
  output logic          mac_last,
  output logic [UW-1:0] h_addr,
  output logic [$clog2(X_MAX)-1:0] x_addr,
  output logic          grp_start,
  output logic [UW-1:0] grp_base,
  output logic [NW-1:0] grp_units,
  input  logic          post_rd_busy,
  input  logic          post_busy,
  output logic          busy,
  output logic          done,
  output logic          swap,
  output logic [31:0]   perf_cycles,
  output logic [31:0]   perf_wait_w,
  output logic [31:0]   perf_wait_post
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [HW-1:0] dh;
  logic [XW-1:0] dx;
  logic [CW-1:0] k;       // column within the group
  logic [HW-1:0] base;    // first unit of the current group
  logic          is_last, hold_back;
  logic [HW-1:0] left;    // units from base to d_h

  assign is_last     = (k == CW'(dh) + CW'(dx) - 1'b1);
  assign hold_back   = is_last && (post_rd_busy || grp_start);
  assign w_ready     = (state == S_RUN) && !hold_back;
  assign mac_en      = w_valid && w_ready;
  assign mac_phase_x = (k >= CW'(dh));
  assign mac_last    = is_last;
  assign h_addr      = UW'(k);
  assign x_addr      = $bits(x_addr)'(k - CW'(dh));
  assign left        = dh - base;
  assign busy        = (state != S_IDLE);
  assign swap        = (state == S_DRAIN) && !grp_start && !post_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      dh             <= '0;
      dx             <= '0;
      k              <= '0;
      base           <= '0;
      grp_start      <= 1'b0;
      grp_base       <= '0;
      grp_units      <= '0;
      done           <= 1'b0;
      perf_cycles    <= '0;
      perf_wait_w    <= '0;
      perf_wait_post <= '0;
    end else begin
      grp_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state          <= S_RUN;
            dh             <= cfg_dh;
            dx             <= cfg_dx;
            k              <= '0;
            base           <= '0;
            perf_cycles    <= 32'd1;
            perf_wait_w    <= '0;
            perf_wait_post <= '0;
          end
        end
        S_RUN: begin
          perf_cycles <= perf_cycles + 1'b1;
          if (!w_valid && !hold_back) perf_wait_w <= perf_wait_w + 1'b1;
          if (hold_back)              perf_wait_post <= perf_wait_post + 1'b1;
          if (mac_en) begin
            if (is_last) begin
              k         <= '0;
              grp_start <= 1'b1;
              grp_base  <= UW'(base);
              grp_units <= (left > HW'(UPG)) ? NW'(UPG) : NW'(left);
              base      <= base + HW'(UPG);
              if (left <= HW'(UPG)) state <= S_DRAIN;
            end else begin
              k <= k + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          perf_cycles <= perf_cycles + 1'b1;
          if (swap) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A step needs at least one hidden unit and sizes within the buffers.
  a_cfg_range: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_IDLE && start) |->
      (cfg_dh >= 1 && cfg_dh <= HW'(H_MAX) && cfg_dx <= XW'(X_MAX)))
    else $error("lstm_ctrl: d_h=%0d d_x=%0d out of range", cfg_dh, cfg_dx);

endmodule
