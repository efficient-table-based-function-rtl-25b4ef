// linear_interp_tb: random breakpoint pairs and inputs at the default widths.
// For each case the expected output y_i + (x - x_i)/delta * (y_i+1 - y_i) is
// computed in real arithmetic; the result may differ by the weight
// quantisation (the step y_i+1 - y_i times 2^-24) plus 1.5 output LSBs.
// Cases include inputs exactly on the left breakpoint (result must equal
// y_i), inputs past the right breakpoint (weight clamped to 1, result y_i+1),
// rising and falling segments and signed values. Inputs are streamed one per
// cycle and each result must appear 5 cycles after the edge that produced the
// inputs (4 edges after the one that captures them).
module linear_interp_tb;

  localparam int XW = 33, AW = 11, DW = 23, IW = 30, W_Y = 32, INV_FRAC = 48, T_FRAC = 24;
  localparam int LAT = 5;
  localparam int N = 5000;

  logic clk = 1'b0, rst_n, valid_i, valid_o;
  logic signed [XW-1:0] x_i, lo_i;
  logic [AW-1:0] base_i, addr_i;
  logic [DW-1:0] delta_i;
  logic [IW-1:0] inv_i;
  logic [W_Y-1:0] y0_i, y1_i, y_o;

  linear_interp #(.XW(XW), .AW(AW), .DW(DW), .IW(IW), .S_Y(1'b1), .W_Y(W_Y),
                  .INV_FRAC(INV_FRAC), .T_FRAC(T_FRAC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_exact = 0, n_over = 0, n_fall = 0;
  real exp_y [N];
  real tol   [N];
  int  kind  [N];
  int  n_in = 0, n_out = 0;
  longint cycle = 0, in_cyc [N];
  always @(posedge clk) cycle <= cycle + 1;

  always @(negedge clk) begin
    if (rst_n && valid_o) begin
      real err;
      checks += 2;
      if (cycle - in_cyc[n_out] != LAT) begin
        failures++; $display("FAIL latency %0d", cycle - in_cyc[n_out]);
      end
      err = real'($signed(y_o)) - exp_y[n_out];
      if (err < 0) err = -err;
      if (err > tol[n_out] || (kind[n_out] != 0 && err != 0.0)) begin
        failures++;
        $display("FAIL case %0d kind %0d y=%0d exp=%f", n_out, kind[n_out], $signed(y_o), exp_y[n_out]);
      end
      n_out++;
    end
  end

  initial begin : watchdog
    repeat (N * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint delta, lo, idx, base, r, y0, y1;
    rst_n = 1'b0; valid_i = 1'b0;
    x_i = '0; lo_i = '0; base_i = '0; addr_i = '0; delta_i = '0; inv_i = '0; y0_i = '0; y1_i = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      delta = (longint'(1) << 18) + longint'($urandom % (1 << 22));  // 1/delta fits IW bits
      idx   = longint'($urandom % 400);   // keeps x inside the 33-bit signed input range
      base  = longint'($urandom % 1000);
      lo    = longint'($urandom % (1 << 28));
      y0    = longint'($signed($urandom)) >>> 2;
      y1    = y0 + (longint'($signed($urandom)) >>> 10);
      if (y1 < y0) n_fall++;
      kind[i] = 0;
      case (i % 8)
        0: begin r = 0; kind[i] = 1; n_exact++; end
        1: begin r = delta + longint'($urandom % delta); kind[i] = 2; n_over++; end
        default: r = longint'($urandom % delta);
      endcase
      // weight quantisation (2^-T_FRAC of the step) plus output rounding
      tol[i] = 1.0 + real'((y1 > y0) ? y1 - y0 : y0 - y1) / real'(1 << T_FRAC) + 0.5;
      if (kind[i] == 1)      exp_y[i] = real'(y0);
      else if (kind[i] == 2) exp_y[i] = real'(y1);
      else exp_y[i] = real'(y0) + real'(r) / real'(delta) * real'(y1 - y0);
      @(negedge clk);
      valid_i = 1'b1;
      x_i     = XW'(lo + idx * delta + r);
      lo_i    = XW'(lo);
      base_i  = AW'(base);
      addr_i  = AW'(base + idx);
      delta_i = DW'(delta);
      inv_i   = IW'(((longint'(1) <<< INV_FRAC) + delta - 1) / delta);
      y0_i    = W_Y'(y0);
      y1_i    = W_Y'(y1);
      in_cyc[i] = cycle;   // inputs as if produced by the last edge
    end
    @(negedge clk) valid_i = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (n_out != N) begin failures++; $display("FAIL %0d results", n_out); end
    $display("on-breakpoint %0d, clamped %0d, falling %0d", n_exact, n_over, n_fall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
