// fa_wl_check: runs one benchmark configuration of func_approx_top. Streams
// NUM random inputs, uniform over [x_0, x_0 + a) on the input grid, one per
// cycle, and checks every result against the real-valued function: the error
// may not exceed E_a plus 3 output LSBs, and each result must come 9 cycles
// after its input is captured. Every sub-interval must be selected at least
// once. Reports its counts on checks/failures and raises done at the end.
module fa_wl_check #(
  parameter string            NAME   = "log",
  parameter fa_pkg::func_e    FUNC   = fa_pkg::FN_LOG,
  parameter real              EA     = 9.5367e-7,
  parameter bit               S_X    = 1'b0,
  parameter int               F_X    = 28,
  parameter bit               S_Y    = 1'b1,
  parameter int               F_Y    = 29,
  parameter int               N_INT  = 4,
  parameter fa_pkg::seg_arr_t BOUNDS = fa_pkg::DEF_BOUNDS,
  parameter int               NUM    = 4000
) (
  output int   checks,
  output int   failures,
  output logic done
);

  localparam int  LAT = 9;
  localparam real SX  = 2.0 ** F_X;
  localparam real SY  = 2.0 ** F_Y;
  localparam real TOL = EA + 3.0 / SY;

  logic        clk = 1'b0;
  logic        rst_n, valid_i, valid_o;
  logic [31:0] x_i, y_o;

  func_approx_top #(.FUNC(FUNC), .EA(EA), .S_X(S_X), .W_X(32), .F_X(F_X), .S_Y(S_Y), .W_Y(32),
                    .F_Y(F_Y), .N_INT(N_INT), .BOUNDS(BOUNDS)) dut (.*);

  always #5 clk = ~clk;

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [31:0] in_x   [NUM];
  longint      in_cyc [NUM];
  int          n_in = 0, n_out = 0;
  int          hits [N_INT];
  real         max_err = 0.0;

  always @(negedge clk) if (dut.sel_v) hits[dut.sel_j]++;

  function automatic real xval(logic [31:0] v);
    return S_X ? real'($signed(v)) / SX : real'(v) / SX;
  endfunction

  function automatic real yval(logic [31:0] v);
    return S_Y ? real'($signed(v)) / SY : real'(v) / SY;
  endfunction

  always @(negedge clk) begin
    if (rst_n && valid_o) begin
      real x, err;
      x   = xval(in_x[n_out]);
      err = yval(y_o) - fa_pkg::fn_eval(FUNC, x);
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
      checks += 2;
      if (cycle - in_cyc[n_out] != LAT) begin
        failures++;
        $display("FAIL %s: latency %0d", NAME, cycle - in_cyc[n_out]);
      end
      if (err > TOL) begin
        failures++;
        $display("FAIL %s: x=%.9f y=%.9f f=%.9f err=%g", NAME, x, yval(y_o), fa_pkg::fn_eval(FUNC, x), err);
      end
      n_out++;
    end
  end

  initial begin
    longint span, xr;
    checks = 0; failures = 0; done = 1'b0;
    rst_n = 1'b0; valid_i = 1'b0; x_i = '0;
    span = BOUNDS[N_INT] - BOUNDS[0];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < NUM; i++) begin
      xr = BOUNDS[0] + longint'({$urandom, $urandom} % 64'(span));
      @(negedge clk);
      valid_i = 1'b1;
      x_i = 32'(xr);
      in_x[i] = 32'(xr);
      in_cyc[i] = cycle + 1;
      n_in++;
    end
    @(negedge clk) valid_i = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (n_out != n_in) begin failures++; $display("FAIL %s: %0d results", NAME, n_out); end
    for (int j = 0; j < N_INT; j++) begin
      checks++;
      if (hits[j] == 0) begin failures++; $display("FAIL %s: sub-interval %0d unused", NAME, j); end
    end
    $display("%s: n=%0d, M_F=%0d entries, max |error| %g (E_a %g)", NAME, N_INT, dut.DEPTH, max_err, EA);
    done = 1'b1;
  end

endmodule
