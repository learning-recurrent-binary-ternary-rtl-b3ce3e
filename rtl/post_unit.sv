// post_unit: post-processing pipeline, one LSTM unit per cycle.
//
// Once the MAC array has finished a row group, its hold registers contain,
// for every lane, the two dot products W_h h_{t-1} and W_x x_t of one gate
// row. Lanes 4u..4u+3 carry the f, i, o and g rows of the group's unit u.
// This unit walks the group one LSTM unit per cycle. For each unit it
// applies the folded batch normalisation and the nonlinearity to the four
// rows, giving f, i, o and g. It then updates the cell state and the hidden
// state. The equations are those of the method. The one-unit-per-cycle
// pipeline, and running it while the MAC array already works on the next
// group, are this design's choice.
//
// Interface and timing:
//   start/start_base/start_units  begin a group. Its first unit is read on
//                                 the next cycle. The holds must stay
//                                 stable while rd_busy is high.
//   rd_unit -> bnp, c_prev        asynchronous read of the unit's BN
//                                 parameters and c_{t-1}, in the same cycle.
//   wr_*                          c_t and h_t of unit wr_unit, two cycles
//                                 after its read.
//   rd_busy                       the holds are still being read.
//   busy                          a unit is still in the pipeline.
// A group of U units therefore takes U + 3 cycles from start to its last
// write.
module post_unit
  import btl_pkg::*;
#(
  parameter int  N_MAC = 100,
  parameter int  H_MAX = 2048,
  localparam int UPG   = N_MAC / NGATES,                     // units per group
  localparam int UW    = $clog2(H_MAX),                      // unit index width
  localparam int NW    = $clog2(UPG + 1)                     // unit count width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [UW-1:0] start_base,
  input  logic [NW-1:0] start_units,
  input  acc_t          hold_h [N_MAC],
  input  acc_t          hold_x [N_MAC],
  output logic [UW-1:0] rd_unit,
  input  bn_unit_t      bnp,
  input  act_t          c_prev,
  output logic          wr_en,
  output logic [UW-1:0] wr_unit,
  output act_t          wr_c,
  output act_t          wr_h,
  output logic          rd_busy,
  output logic          busy
);

  // ---- read stage: sequencing through the units of a group ----
  logic          active;
  logic [NW-1:0] u, units;
  logic [UW-1:0] base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      u      <= '0;
      units  <= '0;
      base   <= '0;
    end else if (start) begin
      active <= (start_units != '0);
      u      <= '0;
      units  <= start_units;
      base   <= start_base;
    end else if (active) begin
      if (u == units - 1'b1) active <= 1'b0;
      u <= u + 1'b1;
    end
  end

  assign rd_unit = base + UW'(u);
  assign rd_busy = active;

  // Gate rows of unit u: BN fold, then sigma or tanh.
  act_t pre  [NGATES];
  act_t gval [NGATES];

  for (genvar q = 0; q < NGATES; q++) begin : g_gate
    acc_t ah, ax;
    always_comb begin
      ah = '0;
      ax = '0;
      for (int l = 0; l < UPG; l++) begin
        if (NW'(l) == u) begin
          ah = hold_h[NGATES*l + q];
          ax = hold_x[NGATES*l + q];
        end
      end
    end
    bn_fold u_bn (.acc_h(ah), .acc_x(ax), .p(bnp.gate[q]), .pre(pre[q]));
    nl_act  u_nl (.x(pre[q]), .is_tanh(q == int'(G_G)), .y(gval[q]));
  end

  // ---- stage 1: gate values ----
  logic          s1_v;
  logic [UW-1:0] s1_unit;
  act_t          s1_f, s1_i, s1_o, s1_g, s1_c;
  scale_t        s1_ac;
  bias_t         s1_bc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v    <= 1'b0;
      s1_unit <= '0;
      s1_f    <= '0;
      s1_i    <= '0;
      s1_o    <= '0;
      s1_g    <= '0;
      s1_c    <= '0;
      s1_ac   <= '0;
      s1_bc   <= '0;
    end else begin
      s1_v <= active;
      if (active) begin
        s1_unit <= rd_unit;
        s1_f    <= gval[G_F];
        s1_i    <= gval[G_I];
        s1_o    <= gval[G_O];
        s1_g    <= gval[G_G];
        s1_c    <= c_prev;
        s1_ac   <= bnp.a_c;
        s1_bc   <= bnp.b_c;
      end
    end
  end

  // ---- stage 2: cell and hidden state ----
  act_t c_new, h_new;

  cell_update u_cell (
    .f(s1_f), .i(s1_i), .o(s1_o), .g(s1_g), .c_prev(s1_c),
    .a_c(s1_ac), .b_c(s1_bc), .c_new(c_new), .h_new(h_new)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en   <= 1'b0;
      wr_unit <= '0;
      wr_c    <= '0;
      wr_h    <= '0;
    end else begin
      wr_en <= s1_v;
      if (s1_v) begin
        wr_unit <= s1_unit;
        wr_c    <= c_new;
        wr_h    <= h_new;
      end
    end
  end

  assign busy = active | s1_v | wr_en;

  initial begin
    assert (N_MAC % NGATES == 0)
      else $fatal(1, "N_MAC must be a multiple of %0d", NGATES);
  end

endmodule
