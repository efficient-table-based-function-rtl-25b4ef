// linear_interp: five-stage pipelined linear interpolation between the two
// breakpoints read from the table,
//     y = y_i + (x - x_i) / delta_j * (y_i+1 - y_i),   x_i = p_j + i * delta_j,
// where i = A_i - base_j is the local breakpoint index.
// Stages (one register each):
//   1  i = A_i - base_j,  d = x - p_j,  dy = y_i+1 - y_i
//   2  x_i - p_j = i * delta_j                      (multiplier)
//   3  r = d - (x_i - p_j)   (distance of x past its left breakpoint)
//   4  t = r * (1/delta_j), scaled to T_FRAC fraction bits and clamped to
//      [0, 1]                                         (multiplier)
//   5  y = y_i + round(t * dy), saturated to the output format  (multiplier)
// Clamping t makes inputs outside [x_0, x_0 + a) return the nearest table
// end instead of extrapolating; inside the range it only removes the tiny
// negative weight the rounded-up reciprocal can produce right below a
// breakpoint.
// The output y is a (S_Y, W_Y, F_Y) fixed-point number in the same format as
// the table; x, p_j and delta_j are in input LSBs; 1/delta_j has INV_FRAC
// fraction bits.
// Timing: inputs at edge k give y_o after edge k+5; one input per cycle.
// Follows the paper: inputs x, delta, 1/delta, A_i, the selector's constants
// and y_i, y_i+1 of the block diagram, and five cycles. This design's choice: how the work
// is split over the five stages, T_FRAC, the rounding, clamping and
// saturation.
module linear_interp #(
  parameter int XW       = fa_pkg::DEF_W_X + 1,
  parameter int AW       = 11,
  parameter int DW       = 23,
  parameter int IW       = 30,
  parameter bit S_Y      = fa_pkg::DEF_S_Y,
  parameter int W_Y      = fa_pkg::DEF_W_Y,
  parameter int INV_FRAC = fa_pkg::DEF_INV_FRAC,
  parameter int T_FRAC   = fa_pkg::DEF_T_FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid_i,
  input  logic signed [XW-1:0] x_i,
  input  logic signed [XW-1:0] lo_i,     // p_j
  input  logic [AW-1:0]        base_i,   // base_j
  input  logic [AW-1:0]        addr_i,   // A_i
  input  logic [DW-1:0]        delta_i,  // delta_j in input LSBs
  input  logic [IW-1:0]        inv_i,    // ceil(2^INV_FRAC / delta_j)
  input  logic [W_Y-1:0]       y0_i,     // y_i
  input  logic [W_Y-1:0]       y1_i,     // y_i+1
  output logic                 valid_o,
  output logic [W_Y-1:0]       y_o
);

  localparam int YE  = W_Y + 1;                         // y as signed
  localparam int DYW = W_Y + 2;                         // y_i+1 - y_i
  localparam int OW  = ((XW + 1 > AW + DW) ? XW + 1 : AW + DW) + 1;  // r
  localparam int PW  = OW + IW + 1;                     // r * 1/delta
  localparam int TW  = T_FRAC + 2;                      // t in [0, 1], signed
  localparam int CW  = TW + DYW;                        // t * dy
  localparam int SH  = INV_FRAC - T_FRAC;

  localparam logic signed [YE-1:0] Y_MAX = S_Y ? YE'((longint'(1) <<< (W_Y - 1)) - 1)
                                               : YE'((longint'(1) <<< W_Y) - 1);
  localparam logic signed [YE-1:0] Y_MIN = S_Y ? -YE'(longint'(1) <<< (W_Y - 1)) : '0;

  function automatic logic signed [YE-1:0] y_ext(logic [W_Y-1:0] v);
    return S_Y ? $signed({v[W_Y-1], v}) : $signed({1'b0, v});
  endfunction

  logic [4:0] v;

  // stage 1
  logic [AW-1:0]          s1_idx;
  logic signed [OW-1:0]   s1_off;
  logic signed [DYW-1:0]  s1_dy;
  logic signed [YE-1:0]   s1_y0;
  logic [DW-1:0]          s1_delta;
  logic [IW-1:0]          s1_inv;
  // stage 2
  logic [AW+DW-1:0]       s2_xoff;
  logic signed [OW-1:0]   s2_off;
  logic signed [DYW-1:0]  s2_dy;
  logic signed [YE-1:0]   s2_y0;
  logic [IW-1:0]          s2_inv;
  // stage 3
  logic signed [OW-1:0]   s3_rem;
  logic signed [DYW-1:0]  s3_dy;
  logic signed [YE-1:0]   s3_y0;
  logic [IW-1:0]          s3_inv;
  // stage 4
  logic signed [TW-1:0]   s4_t;
  logic signed [DYW-1:0]  s4_dy;
  logic signed [YE-1:0]   s4_y0;

  logic signed [PW-1:0]   tprod, tshift;
  logic signed [TW-1:0]   t_sat;
  logic signed [CW-1:0]   cprod;
  logic signed [CW-1:0]   corr;
  logic signed [CW-1:0]   ysum;
  logic [W_Y-1:0]         y_sat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[3:0], valid_i};
  end
  assign valid_o = v[4];

  always_ff @(posedge clk) begin
    s1_idx   <= addr_i - base_i;
    s1_off   <= OW'($signed({x_i[XW-1], x_i}) - $signed({lo_i[XW-1], lo_i}));
    s1_dy    <= DYW'(y_ext(y1_i)) - DYW'(y_ext(y0_i));
    s1_y0    <= y_ext(y0_i);
    s1_delta <= delta_i;
    s1_inv   <= inv_i;

    s2_xoff  <= (AW+DW)'(s1_idx) * (AW+DW)'(s1_delta);
    s2_off   <= s1_off;
    s2_dy    <= s1_dy;
    s2_y0    <= s1_y0;
    s2_inv   <= s1_inv;

    s3_rem   <= s2_off - $signed(OW'(s2_xoff));
    s3_dy    <= s2_dy;
    s3_y0    <= s2_y0;
    s3_inv   <= s2_inv;

    s4_t     <= t_sat;
    s4_dy    <= s3_dy;
    s4_y0    <= s3_y0;

    y_o      <= y_sat;
  end

  // stage 4: weight t = r / delta
  always_comb begin
    tprod  = PW'(s3_rem) * $signed({1'b0, (PW-1)'(s3_inv)});
    tshift = tprod >>> SH;
    if (tshift < 0)                                  t_sat = '0;
    else if (tshift > PW'(longint'(1) <<< T_FRAC))   t_sat = TW'(longint'(1) <<< T_FRAC);
    else                                             t_sat = TW'(tshift);
  end

  // stage 5: y = y_i + t * dy
  always_comb begin
    cprod = CW'(s4_t) * CW'(s4_dy);
    corr  = (cprod + CW'(longint'(1) <<< (T_FRAC - 1))) >>> T_FRAC;
    ysum  = CW'(s4_y0) + corr;
    if (ysum > CW'(Y_MAX))      y_sat = W_Y'(Y_MAX);
    else if (ysum < CW'(Y_MIN)) y_sat = W_Y'(Y_MIN);
    else                        y_sat = W_Y'(ysum);
  end

endmodule
