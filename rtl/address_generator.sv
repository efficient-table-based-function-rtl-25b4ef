// address_generator: turns the input and the constants of its sub-interval
// into the BRAM address A_i of the breakpoint x_i at or below the input.
//
// Within sub-interval j the breakpoints are evenly spaced, so the local index
// is i = floor((x - p_j) / delta_j) (Eq. 3 of the method, applied per
// sub-interval) and A_i = base_j + i. The division is done as a multiplication
// by the reciprocal 1/delta_j supplied by the interval selector, which is
// rounded up (ceil(2^INV_FRAC / delta_j)); with INV_FRAC well above the input
// width the index is exact except when x lies within a tiny fraction of
// delta below a breakpoint, where it may come out one higher; the
// interpolator then sees a weight just below zero and clamps it, so the
// result is still that breakpoint's value.
// The index is clamped to [0, K_j - 2] so that A_i + 1 stays inside the
// sub-interval's own table entries (covers inputs outside [x_0, x_0 + a)).
// Timing: one pipeline stage; inputs at edge k give addr_o after edge k+1.
// Follows the paper: base address per sub-interval plus offset, one address
// per cycle. This design's choice: multiply by a reciprocal, the rounding and
// the clamping.
module address_generator #(
  parameter int XW       = fa_pkg::DEF_W_X + 1,
  parameter int AW       = 11,
  parameter int IW       = 30,
  parameter int INV_FRAC = fa_pkg::DEF_INV_FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid_i,
  input  logic signed [XW-1:0] x_i,
  input  logic signed [XW-1:0] lo_i,     // p_j
  input  logic [AW-1:0]        base_i,   // first BRAM address of sub-interval j
  input  logic [IW-1:0]        inv_i,    // ceil(2^INV_FRAC / delta_j)
  input  logic [AW-1:0]        last_i,   // K_j - 2
  output logic                 valid_o,
  output logic [AW-1:0]        addr_o    // A_i
);

  localparam int PW = XW + IW;

  logic signed [XW:0] off;
  logic [PW-1:0]      prod;
  logic [PW-1:0]      idx_full;
  logic [AW-1:0]      idx;

  always_comb begin
    off      = $signed({x_i[XW-1], x_i}) - $signed({lo_i[XW-1], lo_i});
    prod     = PW'(off[XW-1:0]) * PW'(inv_i);
    idx_full = prod >> INV_FRAC;
    if (off < 0)                      idx = '0;
    else if (idx_full > PW'(last_i))  idx = last_i;
    else                              idx = AW'(idx_full);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

  always_ff @(posedge clk) addr_o <= base_i + idx;

endmodule
