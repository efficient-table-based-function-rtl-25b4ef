// pipe_delay: N-stage register chain of W bits without reset, used for the
// alignment registers that carry x, delta, 1/delta, the selector's constants
// and A_i past the address generator and the BRAM. Output = input N edges
// later. N must be at least 1.
module pipe_delay #(
  parameter int W = 8,
  parameter int N = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] r [N];

  always_ff @(posedge clk) begin
    r[0] <= d;
    for (int i = 1; i < N; i++) r[i] <= r[i-1];
  end

  assign q = r[N-1];

endmodule
