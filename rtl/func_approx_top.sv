// func_approx_top: table-based approximation of y = f(x) with interval
// splitting, fully pipelined, latency 9 cycles, one evaluation per cycle.
//
// The interval [x_0, x_0 + a) is cut into N_INT sub-intervals by the
// partition BOUNDS = {p_0, ..., p_N} (found offline by an interval-splitting
// algorithm). Each sub-interval j has its own even breakpoint spacing delta_j,
// chosen as large as the error bound E_a allows; the values of f at all
// breakpoints of all sub-intervals are stored back to back in one dual-port
// table. For an input x the datapath
//   edge 0      registers x (input register),
//   edges 1-2   finds the sub-interval j and its constants (interval_selector),
//   edge 3      computes the address A_i of the breakpoint at or below x
//               (address_generator),
//   edge 4      reads y_i and y_i+1 at A_i and A_i + 1 (table_bram; the +1 is
//               an adder in front of the second port); x, p_j, base_j,
//               delta_j, 1/delta_j and A_i are carried alongside in
//               alignment registers,
//   edges 5-9   interpolates linearly (linear_interp); its last register is
//               the output register.
// An input presented with valid_i = 1 before clock edge k appears on y_o with
// valid_o = 1 after edge k + 9. There is no back-pressure: a new input may be
// given every cycle.
// Number formats: x is (S_X, W_X, F_X) and y is (S_Y, W_Y, F_Y), i.e. sign
// flag, total bits, fraction bits. Everything per sub-interval (spacings,
// reciprocals, base addresses, table contents) is derived from FUNC, E_a and
// BOUNDS at elaboration time. Defaults: log(x) on [0.625, 15.625),
// E_a = 9.5367e-7, formats (0,32,28) -> (1,32,29), n = 4 sub-intervals.
// Follows the paper: the block structure and the 3 + 1 + 5 cycle split of the
// datapath, BRAM-resident table, 1/delta and delta fed to the interpolator.
// This design's choice: the fixed-point arithmetic details, rounding of the
// spacing to whole input LSBs, clamping of inputs outside the interval, the
// valid signal and the asynchronous active-low reset of the valid chain.
module func_approx_top #(
  parameter fa_pkg::func_e    FUNC     = fa_pkg::DEF_FUNC,
  parameter real              EA       = fa_pkg::DEF_EA,
  parameter bit               S_X      = fa_pkg::DEF_S_X,
  parameter int               W_X      = fa_pkg::DEF_W_X,
  parameter int               F_X      = fa_pkg::DEF_F_X,
  parameter bit               S_Y      = fa_pkg::DEF_S_Y,
  parameter int               W_Y      = fa_pkg::DEF_W_Y,
  parameter int               F_Y      = fa_pkg::DEF_F_Y,
  parameter int               N_INT    = fa_pkg::DEF_N_INT,
  parameter fa_pkg::seg_arr_t BOUNDS   = fa_pkg::DEF_BOUNDS,
  parameter int               INV_FRAC = fa_pkg::DEF_INV_FRAC,
  parameter int               T_FRAC   = fa_pkg::DEF_T_FRAC
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           valid_i,
  input  logic [W_X-1:0] x_i,
  output logic           valid_o,
  output logic [W_Y-1:0] y_o
);

  // ---------------- constants derived from the partition ----------------
  localparam fa_pkg::seg_arr_t DELTA = fa_pkg::seg_spacing(FUNC, EA, BOUNDS, N_INT, F_X);
  localparam fa_pkg::seg_arr_t INV   = fa_pkg::seg_inv(DELTA, N_INT, INV_FRAC);
  localparam fa_pkg::seg_arr_t BASE  = fa_pkg::seg_base(BOUNDS, DELTA, N_INT);
  localparam fa_pkg::seg_arr_t LAST  = fa_pkg::seg_last(BOUNDS, DELTA, N_INT);
  localparam int DEPTH = int'(fa_pkg::total_entries(BOUNDS, DELTA, N_INT));   // M_F
  localparam int AW    = fa_pkg::clog2_min1(longint'(DEPTH));
  localparam int DW    = fa_pkg::bits_for(fa_pkg::arr_max(DELTA, N_INT));
  localparam int IW    = fa_pkg::bits_for(fa_pkg::arr_max(INV, N_INT));
  localparam int SW    = fa_pkg::clog2_min1(longint'(N_INT));
  localparam int XW    = W_X + 1;

  // ---------------- input register ----------------
  logic                 in_v;
  logic signed [XW-1:0] in_x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_v <= 1'b0;
    else        in_v <= valid_i;
  end

  always_ff @(posedge clk) in_x <= S_X ? $signed({x_i[W_X-1], x_i}) : $signed({1'b0, x_i});

  // ---------------- interval selector (2 cycles) ----------------
  logic                 sel_v;
  logic signed [XW-1:0] sel_x, sel_lo;
  // sub-interval index j: the datapath only needs j's constants, so j itself
  // drives no logic (a lint tool reports it unused); it is kept as a named
  // signal for observing which sub-interval each input fell into.
  logic [SW-1:0]        sel_j;
  logic [AW-1:0]        sel_base, sel_last;
  logic [DW-1:0]        sel_delta;
  logic [IW-1:0]        sel_inv;

  interval_selector #(
    .N_INT(N_INT), .XW(XW), .BOUNDS(BOUNDS), .DELTA(DELTA), .INV(INV), .BASE(BASE),
    .LAST(LAST), .AW(AW), .DW(DW), .IW(IW), .SW(SW)
  ) u_sel (
    .clk, .rst_n,
    .valid_i(in_v), .x_i(in_x),
    .valid_o(sel_v), .x_o(sel_x), .sel_o(sel_j), .lo_o(sel_lo), .base_o(sel_base),
    .delta_o(sel_delta), .inv_o(sel_inv), .last_o(sel_last)
  );

  // ---------------- address generator (1 cycle) ----------------
  logic          ag_v;
  logic [AW-1:0] ag_addr, ag_addr_p1;

  address_generator #(.XW(XW), .AW(AW), .IW(IW), .INV_FRAC(INV_FRAC)) u_ag (
    .clk, .rst_n,
    .valid_i(sel_v), .x_i(sel_x), .lo_i(sel_lo), .base_i(sel_base), .inv_i(sel_inv),
    .last_i(sel_last),
    .valid_o(ag_v), .addr_o(ag_addr)
  );

  // "+1" in front of the second BRAM port
  assign ag_addr_p1 = ag_addr + AW'(1);

  // ---------------- BRAM (1 cycle) ----------------
  logic [W_Y-1:0] y0, y1;

  table_bram #(
    .FUNC(FUNC), .EA(EA), .F_X(F_X), .S_Y(S_Y), .W_Y(W_Y), .F_Y(F_Y), .N_INT(N_INT),
    .BOUNDS(BOUNDS), .AW(AW)
  ) u_bram (
    .clk, .addr_a(ag_addr), .addr_b(ag_addr_p1), .q_a(y0), .q_b(y1)
  );

  // ---------------- alignment registers ----------------
  // Selector outputs skip the address generator and the BRAM: 2 stages.
  localparam int CW = 2 * XW + AW + DW + IW;
  logic [CW-1:0]        c_d, c_q;
  logic signed [XW-1:0] li_x, li_lo;
  logic [AW-1:0]        li_base, li_addr;
  logic [DW-1:0]        li_delta;
  logic [IW-1:0]        li_inv;
  logic                 li_v;

  assign c_d = {sel_x, sel_lo, sel_base, sel_delta, sel_inv};
  pipe_delay #(.W(CW), .N(2)) u_dly_c (.clk, .d(c_d), .q(c_q));
  assign {li_x, li_lo, li_base, li_delta, li_inv} = c_q;

  // A_i skips the BRAM: 1 stage.
  pipe_delay #(.W(AW), .N(1)) u_dly_a (.clk, .d(ag_addr), .q(li_addr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) li_v <= 1'b0;
    else        li_v <= ag_v;
  end

  // ---------------- linear interpolation (5 cycles) ----------------
  linear_interp #(
    .XW(XW), .AW(AW), .DW(DW), .IW(IW), .S_Y(S_Y), .W_Y(W_Y), .INV_FRAC(INV_FRAC),
    .T_FRAC(T_FRAC)
  ) u_li (
    .clk, .rst_n,
    .valid_i(li_v), .x_i(li_x), .lo_i(li_lo), .base_i(li_base), .addr_i(li_addr),
    .delta_i(li_delta), .inv_i(li_inv), .y0_i(y0), .y1_i(y1),
    .valid_o, .y_o
  );

endmodule
