// bt_lstm_top: LSTM inference engine for recurrent binary/ternary weights.
//
// The engine computes one LSTM time step:
//   gates = BN(W_h h_{t-1}) + BN(W_x x_t) + b   (f, i, o with sigma, g with tanh)
//   c_t   = f*c_{t-1} + i*g,   h_t = o*tanh(BN(c_t))
// Every weight is +1/-1 (binary) or +1/0/-1 (ternary). The N_MAC lanes of the
// MAC array therefore use only adders and multiplexers. Weights are not
// stored on chip. They arrive as a stream from the external memory (DRAM in
// the original engine), one N_MAC*WB-bit word per cycle, where WB is 1 for
// binary and 2 for ternary. That is the 12x / 6x saving in weight bandwidth
// over 12-bit weights. The defaults (100 lanes, binary weights, 12-bit
// activations) are the original low-power engine. Its high-speed binary and
// ternary engines are N_MAC = 1000 and N_MAC = 500 with WMODE = W_TERNARY.
// H_MAX/X_MAX = 2048 size the on-chip vectors for the largest layer it was
// evaluated on (2000 units). Those two sizes are this design's choice.
//
// Blocks: lstm_ctrl (sequencer), mac_array (N_MAC x bt_mac), post_unit
// (bn_fold, nl_act, cell_update), and vec_buffer instances for h (ping-pong
// pair), c, x and the per-unit BN parameters.
//
// Host interface (use only while busy is low):
//   x_we/x_addr/x_data      write x_t
//   p_we/p_addr/p_data      write the BN parameters of one unit (bn_unit_t)
//   st_we/st_addr/st_h/st_c write the initial h and c of one unit
//   rd_addr -> rd_h, rd_c   read the current h and c (asynchronous)
//   start + cfg_dh/cfg_dx   run one step. done pulses when h_t and c_t are in
//                           place, and from then on rd_h returns h_t.
// Weight stream: w_valid/w_ready/w_data. Words are ordered by row group, then
// by column: h columns 0..d_h-1 first, then x columns 0..d_x-1. Lane i of
// group G holds row G*N_MAC + i, that is unit (G*N_MAC + i)/4 and gate
// (i % 4) in the order f, i, o, g. Lanes past row 4*d_h in the last group
// are ignored.
module bt_lstm_top
  import btl_pkg::*;
#(
  parameter int     N_MAC = 100,
  parameter wmode_e WMODE = W_BINARY,
  parameter int     H_MAX = 2048,
  parameter int     X_MAX = 2048,
  localparam int    WB    = (WMODE == W_TERNARY) ? 2 : 1,
  localparam int    HW    = $clog2(H_MAX + 1),
  localparam int    XW    = $clog2(X_MAX + 1),
  localparam int    UW    = $clog2(H_MAX),
  localparam int    XAW   = $clog2(X_MAX)
) (
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic                start,
  input  logic [HW-1:0]       cfg_dh,
  input  logic [XW-1:0]       cfg_dx,
  output logic                busy,
  output logic                done,
  // weight stream from external memory
  input  logic                w_valid,
  output logic                w_ready,
  input  logic [N_MAC*WB-1:0] w_data,
  // host access
  input  logic                x_we,
  input  logic [XAW-1:0]      x_addr,
  input  act_t                x_data,
  input  logic                p_we,
  input  logic [UW-1:0]       p_addr,
  input  bn_unit_t            p_data,
  input  logic                st_we,
  input  logic [UW-1:0]       st_addr,
  input  act_t                st_h,
  input  act_t                st_c,
  input  logic [UW-1:0]       rd_addr,
  output act_t                rd_h,
  output act_t                rd_c,
  // performance counters of the last step
  output logic [31:0]         perf_cycles,
  output logic [31:0]         perf_wait_w,
  output logic [31:0]         perf_wait_post
);

  localparam int UPG = N_MAC / NGATES;
  localparam int NW  = $clog2(UPG + 1);

  // ---------------- controller ----------------
  logic           mac_en, mac_phase_x, mac_last;
  logic [UW-1:0]  h_raddr;
  logic [XAW-1:0] x_raddr;
  logic           grp_start;
  logic [UW-1:0]  grp_base;
  logic [NW-1:0]  grp_units;
  logic           post_rd_busy, post_busy, swap;

  lstm_ctrl #(.N_MAC(N_MAC), .H_MAX(H_MAX), .X_MAX(X_MAX)) u_ctrl (
    .clk, .rst_n, .start, .cfg_dh, .cfg_dx, .w_valid, .w_ready,
    .mac_en, .mac_phase_x, .mac_last, .h_addr(h_raddr), .x_addr(x_raddr),
    .grp_start, .grp_base, .grp_units, .post_rd_busy, .post_busy,
    .busy, .done, .swap, .perf_cycles, .perf_wait_w, .perf_wait_post
  );

  // ---------------- buffers ----------------
  // hsel names the buffer that holds h_{t-1}. The step writes h_t into the
  // other one and swap exchanges them.
  logic hsel;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    hsel <= 1'b0;
    else if (swap) hsel <= ~hsel;
  end

  logic          post_wr;
  logic [UW-1:0] post_wunit, post_runit;
  act_t          post_c, post_h;

  act_t h_mac [2];
  act_t h_host[2];
  logic hb_we [2];
  logic [UW-1:0] hb_waddr [2];
  act_t hb_wdata [2];

  for (genvar b = 0; b < 2; b++) begin : g_hbuf
    always_comb begin
      if (busy) begin
        hb_we[b]    = post_wr && (hsel != 1'(b));
        hb_waddr[b] = post_wunit;
        hb_wdata[b] = post_h;
      end else begin
        hb_we[b]    = st_we && (hsel == 1'(b));
        hb_waddr[b] = st_addr;
        hb_wdata[b] = st_h;
      end
    end
    vec_buffer #(.DEPTH(H_MAX), .W(ACT_W)) u_h (
      .clk, .we(hb_we[b]), .waddr(hb_waddr[b]), .wdata(hb_wdata[b]),
      .raddr0(h_raddr), .rdata0(h_mac[b]), .raddr1(rd_addr), .rdata1(h_host[b])
    );
  end

  act_t c_post;
  vec_buffer #(.DEPTH(H_MAX), .W(ACT_W)) u_c (
    .clk,
    .we    (busy ? post_wr : st_we),
    .waddr (busy ? post_wunit : st_addr),
    .wdata (busy ? post_c : st_c),
    .raddr0(post_runit), .rdata0(c_post),
    .raddr1(rd_addr),    .rdata1(rd_c)
  );

  act_t x_mac, x_unused;
  vec_buffer #(.DEPTH(X_MAX), .W(ACT_W)) u_x (
    .clk, .we(x_we && !busy), .waddr(x_addr), .wdata(x_data),
    .raddr0(x_raddr), .rdata0(x_mac), .raddr1('0), .rdata1(x_unused)
  );

  bn_unit_t bnp, bnp_unused;
  vec_buffer #(.DEPTH(H_MAX), .W(BN_UNIT_W)) u_p (
    .clk, .we(p_we && !busy), .waddr(p_addr), .wdata(p_data),
    .raddr0(post_runit), .rdata0(bnp), .raddr1('0), .rdata1(bnp_unused)
  );

  assign rd_h = h_host[hsel];

  // ---------------- MAC array ----------------
  act_t act_bc;
  assign act_bc = mac_phase_x ? x_mac : h_mac[hsel];

  acc_t hold_h [N_MAC];
  acc_t hold_x [N_MAC];

  mac_array #(.N_MAC(N_MAC), .WMODE(WMODE)) u_mac (
    .clk, .rst_n, .en(mac_en), .phase_x(mac_phase_x), .last(mac_last),
    .act(act_bc), .wdata(w_data), .hold_h, .hold_x
  );

  // ---------------- post-processing ----------------
  post_unit #(.N_MAC(N_MAC), .H_MAX(H_MAX)) u_post (
    .clk, .rst_n,
    .start(grp_start), .start_base(grp_base), .start_units(grp_units),
    .hold_h, .hold_x,
    .rd_unit(post_runit), .bnp, .c_prev(c_post),
    .wr_en(post_wr), .wr_unit(post_wunit), .wr_c(post_c), .wr_h(post_h),
    .rd_busy(post_rd_busy), .busy(post_busy)
  );

  // Host writes are ignored during a step.
  a_no_host_write: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !(x_we || p_we || st_we))
    else $error("bt_lstm_top: host write during a step");

endmodule
