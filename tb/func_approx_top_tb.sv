// func_approx_top_tb: end-to-end test of the approximator at its default
// configuration (log(x) on [0.625, 15.625), 32-bit formats, 4 sub-intervals).
//
// Streams inputs into the pipeline, mostly back to back with occasional idle
// cycles, and checks every result against the real-valued natural logarithm:
// |y - ln(x)| must not exceed E_a plus 3 output LSBs (table rounding, weight
// quantisation and output rounding). Also checked: every result arrives exactly
// 9 cycles after its input; results come out in order, one per cycle under a
// full input stream; inputs below x_0 give the value at x_0 and inputs at or
// beyond the last stored breakpoint (slightly above x_0 + a) give the value
// there.
// Counted mechanisms (each must occur): each of the 4 sub-intervals selected,
// exact breakpoint inputs, inputs below and above the interval, idle cycles in
// the stream, and a full-rate run of at least 64 results on consecutive cycles.
module func_approx_top_tb;

  localparam int    LAT   = 9;
  localparam real   EA    = 9.5367e-7;
  localparam real   SX    = 2.0 ** 28;   // input scale
  localparam real   SY    = 2.0 ** 29;   // output scale
  localparam real   TOL   = EA + 3.0 / SY;
  localparam real   X0    = 0.625;
  localparam real   X1    = 15.625;
  localparam int    NRAND = 20000;
  // last stored breakpoint: p_3 + (K_3 - 1) * delta_3, with the spacing rule
  // delta = sqrt(8 E_a / max|f''|), max|f''| = 1/p_3^2 for log, in whole LSBs
  localparam longint P3    = 64'd1838782874;
  localparam longint D3    = longint'($floor($sqrt(8.0 * EA) * 6.85 * SX));
  localparam longint K3    = (64'd4194304000 - P3 + D3 - 1) / D3 + 1;
  localparam real    XLAST = real'(P3 + (K3 - 1) * D3) / SX;
  localparam int    NMAX  = NRAND + 4096;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        valid_i;
  logic [31:0] x_i;
  logic        valid_o;
  logic [31:0] y_o;

  func_approx_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // issued inputs
  logic [31:0] in_x   [NMAX];
  longint      in_cyc [NMAX];
  int          n_in = 0, n_out = 0;

  // mechanism counters
  int hit_int [4];
  int hit_bp = 0, hit_below = 0, hit_above = 0, n_idle = 0, max_run = 0, run = 0;
  real max_err = 0.0;
  logic [31:0] y_at_x0, y_at_max;
  bit have_x0 = 0, have_max = 0;

  // sub-interval selection seen inside the selector
  always @(negedge clk) if (dut.sel_v) hit_int[dut.sel_j]++;

  task automatic fail(string msg);
    failures++;
    $display("FAIL: %s", msg);
  endtask

  // output checker
  always @(negedge clk) begin
    if (rst_n && valid_o) begin
      real x, y, err;
      run++;
      if (run > max_run) max_run = run;
      if (n_out >= n_in) fail("result without input");
      else begin
        x = real'(in_x[n_out]) / SX;
        y = real'($signed(y_o)) / SY;
        if (in_x[n_out] == 32'd167772160) begin y_at_x0 = y_o; have_x0 = 1; end
        if (in_x[n_out] == 32'hFFFF_FFFF) begin y_at_max = y_o; have_max = 1; end
        checks++;
        if (cycle - in_cyc[n_out] != LAT)
          fail($sformatf("latency %0d for input %0d", cycle - in_cyc[n_out], n_out));
        checks++;
        if (x < X0) begin
          hit_below++;
          if (!have_x0 || y_o != y_at_x0) fail($sformatf("below-range x=%f y=%f", x, y));
        end else if (x >= XLAST) begin
          hit_above++;
          if (!have_max || y_o != y_at_max) fail($sformatf("above-range x=%f y=%h ref=%h", x, y_o, y_at_max));
          err = y - $ln(XLAST);
          if (err < 0) err = -err;
          if (err > TOL) fail($sformatf("above-range x=%f y=%f ln(last)=%f", x, y, $ln(XLAST)));
        end else begin
          err = y - $ln(x);
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          if (err > TOL) fail($sformatf("x=%.9f y=%.9f ln=%.9f err=%g", x, y, $ln(x), err));
        end
      end
      n_out++;
    end else run = 0;
  end

  task automatic send(logic [31:0] x);
    @(negedge clk);
    valid_i = 1'b1;
    x_i     = x;
    in_x[n_in]   = x;
    in_cyc[n_in] = cycle + 1;   // captured at the next rising edge
    n_in++;
  endtask

  task automatic idle();
    @(negedge clk);
    valid_i = 1'b0;
    n_idle++;
  endtask

  // breakpoints of the table, from the spacing rule (independent of the DUT)
  function automatic longint bp_spacing(real lo, real hi);
    return longint'($floor($sqrt(8.0 * EA * lo * lo) * SX));  // max|f''| = 1/lo^2
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real P [5] = '{0.625, 1.405, 3.085, 6.85, 15.625};
    rst_n   = 1'b0;
    valid_i = 1'b0;
    x_i     = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // interval ends first, so that clamped inputs have a reference
    send(32'd167772160);
    send(32'hFFFF_FFFF);
    repeat (LAT + 2) idle();

    // exact breakpoints of every sub-interval
    for (int j = 0; j < 4; j++) begin
      longint lo, hi, d;
      lo = longint'(P[j] * SX);
      hi = longint'(P[j+1] * SX);
      d  = bp_spacing(P[j], P[j+1]);
      for (longint k = 0; lo + k * d < hi; k += 7) begin
        send(32'(lo + k * d));
        hit_bp++;
      end
      send(32'(hi - 1));
    end

    // out-of-range inputs
    send(32'd0);
    send(32'd100000000);
    send(32'd167772159);
    send(32'd4194304000);
    send(32'hFFFF_FF00);
    send(32'(longint'(XLAST * SX)));

    // random stream with occasional idle cycles
    for (int i = 0; i < NRAND; i++) begin
      longint xr;
      xr = 64'd167772160 + longint'({$urandom, $urandom} % 64'd4026531840);
      if (($urandom % 50) == 0) idle();
      // half of the samples near the steep left end
      if (i % 2 == 0) xr = 64'd167772160 + longint'($urandom % 32'd600000000);
      send(32'(xr));
    end
    idle();
    repeat (LAT + 5) @(posedge clk);

    checks++;
    if (n_out != n_in) fail($sformatf("%0d inputs, %0d outputs", n_in, n_out));
    for (int j = 0; j < 4; j++) begin
      checks++;
      if (hit_int[j] == 0) fail($sformatf("sub-interval %0d never selected", j));
    end
    checks++; if (hit_bp == 0)    fail("no breakpoint inputs");
    checks++; if (hit_below == 0) fail("no input below the interval");
    checks++; if (hit_above == 0) fail("no input above the interval");
    checks++; if (n_idle == 0)    fail("no idle cycles");
    checks++; if (max_run < 64)   fail($sformatf("longest back-to-back run only %0d", max_run));
    $display("sub-interval hits %0d %0d %0d %0d, breakpoints %0d, below %0d, above %0d, idle %0d, longest run %0d",
             hit_int[0], hit_int[1], hit_int[2], hit_int[3], hit_bp, hit_below, hit_above, n_idle, max_run);
    $display("max |error| = %g (E_a = %g)", max_err, EA);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
