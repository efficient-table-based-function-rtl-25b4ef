// table_bram: the function table. Holds the breakpoint values y of every
// sub-interval back to back (sub-interval j starts at address base_j) and
// reads two of them per cycle through two synchronous read ports, one for
// y_i at A_i and one for y_i+1 at A_i + 1.
//
// Contents: entry base_j + k holds f(p_j + k * delta_j), rounded to the
// output format (S_Y, W_Y, F_Y) with saturation. They are computed by an
// initial block from the function, the partition and the spacings (the usual
// way to give an inferred memory its initial contents), and the table is read
// through registered ports only, which FPGA synthesis maps onto dual-port
// block RAM (on a 7-series part, 1024
// words of 32 bits per BRAM36, i.e. 2^(ceil(log2 M_F) - 10) of them).
// Timing: address at edge k, data after edge k+1; both ports every cycle.
// Follows the paper: a single dual-port BRAM table of equal-width entries read
// at A_i and A_i + 1 in one cycle. This design's choice: inference from an
// array instead of instantiating the vendor primitive, and the rounding.
module table_bram #(
  parameter fa_pkg::func_e    FUNC   = fa_pkg::DEF_FUNC,
  parameter real              EA     = fa_pkg::DEF_EA,
  parameter int               F_X    = fa_pkg::DEF_F_X,
  parameter bit               S_Y    = fa_pkg::DEF_S_Y,
  parameter int               W_Y    = fa_pkg::DEF_W_Y,
  parameter int               F_Y    = fa_pkg::DEF_F_Y,
  parameter int               N_INT  = fa_pkg::DEF_N_INT,
  parameter fa_pkg::seg_arr_t BOUNDS = fa_pkg::DEF_BOUNDS,
  parameter int               AW     = 11
) (
  input  logic           clk,
  input  logic [AW-1:0]  addr_a,   // A_i
  input  logic [AW-1:0]  addr_b,   // A_i + 1
  output logic [W_Y-1:0] q_a,      // y_i
  output logic [W_Y-1:0] q_b       // y_i+1
);

  // spacing of each sub-interval and total number of entries (M_F)
  localparam fa_pkg::seg_arr_t DELTA = fa_pkg::seg_spacing(FUNC, EA, BOUNDS, N_INT, F_X);
  localparam int DEPTH = int'(fa_pkg::total_entries(BOUNDS, DELTA, N_INT));

  // Memory array; filled once at time zero with the breakpoint values
  // (synthesis tools turn this into the BRAM initial contents).
  logic [W_Y-1:0] mem [DEPTH];

  initial begin : fill
    int     a;
    real    x;
    a = 0;
    for (int j = 0; j < N_INT; j++) begin
      for (longint k = 0; k < fa_pkg::entries(BOUNDS[j], BOUNDS[j+1], DELTA[j]); k++) begin
        x = real'(BOUNDS[j] + k * DELTA[j]) / (2.0 ** F_X);
        mem[a] = W_Y'(fa_pkg::quantize(fa_pkg::fn_eval(FUNC, x), W_Y, F_Y, S_Y));
        a++;
      end
    end
  end

  // the address must reach every entry
  if (AW < fa_pkg::clog2_min1(longint'(DEPTH))) begin : g_aw_check
    $error("table_bram: AW=%0d too small for %0d entries", AW, DEPTH);
  end

  always_ff @(posedge clk) begin
    q_a <= mem[addr_a];
    q_b <= mem[addr_b];
  end

endmodule
