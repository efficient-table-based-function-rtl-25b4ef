// interval_selector: finds the sub-interval [p_j, p_j+1) that holds the input
// and looks up that sub-interval's constants.
//
// The N_INT-1 inner bounds p_1..p_N-1 of the partition form a balanced binary
// search tree with one comparator per node (the tree is padded to 2^L - 1
// nodes with comparators that never fire, which is what keeps it balanced for
// any N_INT). Two pipeline stages:
//   stage 1: every node compares x >= p_k in parallel; the comparison bits are
//            registered together with x.
//   stage 2: the tree is walked from the root using the registered bits
//            (L = ceil(log2 N_INT) levels of 2:1 muxing), giving the index j;
//            the constants of sub-interval j are registered.
// Inputs below p_0 select sub-interval 0 and inputs at or above p_N select the
// last one; the interpolator clamps such inputs to the table ends.
// Outputs per sub-interval: lower bound p_j, BRAM base address, spacing delta_j
// and reciprocal 1/delta_j (both in input LSBs), and the largest usable local
// breakpoint index K_j - 2.
// Timing: x sampled at edge k is matched by the outputs after edge k+2; a new
// input may enter every cycle. valid follows the data and is the only
// register with a reset (asynchronous, active low).
// Follows the paper: comparator-per-node balanced tree, per-sub-interval
// spacing and 1/delta as outputs. This design's choice: splitting the tree
// into a compare stage and a walk stage, the clamping, and all widths.
// The constant arrays have room for 32 sub-intervals but are indexed with the
// SW-bit j on purpose: synthesis then builds a ROM of only the rows j can
// reach (lint tools note the index is narrower than the array).
module interval_selector #(
  parameter int               N_INT  = fa_pkg::DEF_N_INT,
  parameter int               XW     = fa_pkg::DEF_W_X + 1,
  parameter fa_pkg::seg_arr_t BOUNDS = fa_pkg::DEF_BOUNDS,
  parameter fa_pkg::seg_arr_t DELTA  = fa_pkg::seg_spacing(fa_pkg::DEF_FUNC, fa_pkg::DEF_EA,
                                                           BOUNDS, N_INT, fa_pkg::DEF_F_X),
  parameter fa_pkg::seg_arr_t INV    = fa_pkg::seg_inv(DELTA, N_INT, fa_pkg::DEF_INV_FRAC),
  parameter fa_pkg::seg_arr_t BASE   = fa_pkg::seg_base(BOUNDS, DELTA, N_INT),
  parameter fa_pkg::seg_arr_t LAST   = fa_pkg::seg_last(BOUNDS, DELTA, N_INT),
  parameter int               AW     = fa_pkg::clog2_min1(fa_pkg::total_entries(BOUNDS, DELTA, N_INT)),
  parameter int               DW     = fa_pkg::bits_for(fa_pkg::arr_max(DELTA, N_INT)),
  parameter int               IW     = fa_pkg::bits_for(fa_pkg::arr_max(INV, N_INT)),
  parameter int               SW     = fa_pkg::clog2_min1(longint'(N_INT))
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid_i,
  input  logic signed [XW-1:0] x_i,       // input, sign- or zero-extended by one bit
  output logic                 valid_o,
  output logic signed [XW-1:0] x_o,       // x delayed to match the outputs below
  output logic [SW-1:0]        sel_o,     // sub-interval index j
  output logic signed [XW-1:0] lo_o,      // p_j in input LSBs
  output logic [AW-1:0]        base_o,    // BRAM address of the first breakpoint of j
  output logic [DW-1:0]        delta_o,   // spacing delta_j in input LSBs
  output logic [IW-1:0]        inv_o,     // ceil(2^INV_FRAC / delta_j)
  output logic [AW-1:0]        last_o     // K_j - 2
);

  localparam int NPAD = 1 << SW;

  // ---------------- stage 1: one comparator per tree node ----------------
  logic [NPAD-2:0]      cmp_d, cmp_q;
  logic signed [XW-1:0] x_q;
  logic                 v_q;

  always_comb begin
    for (int k = 0; k < NPAD - 1; k++) begin
      if (k < N_INT - 1) cmp_d[k] = (x_i >= XW'(BOUNDS[k+1]));
      else               cmp_d[k] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= valid_i;
  end

  always_ff @(posedge clk) begin
    cmp_q <= cmp_d;
    x_q   <= x_i;
  end

  // ---------------- stage 2: walk the balanced tree ----------------
  logic [SW-1:0] j;

  always_comb begin
    j = '0;
    for (int b = SW - 1; b >= 0; b--) begin
      if (cmp_q[int'(j) + (1 << b) - 1]) j = j | SW'(1 << b);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= v_q;
  end

  always_ff @(posedge clk) begin
    x_o     <= x_q;
    sel_o   <= j;
    lo_o    <= XW'(BOUNDS[j]);
    base_o  <= AW'(BASE[j]);
    delta_o <= DW'(DELTA[j]);
    inv_o   <= IW'(INV[j]);
    last_o  <= AW'(LAST[j]);
  end

endmodule
