// address_generator_tb: random sub-interval constants (spacing 1000 .. 2^20
// input LSBs, 1/delta rounded up with 48 fraction bits as the selector
// supplies it) and inputs spread from one spacing below the sub-interval to
// past its end. The expected address is base + min(floor((x - p)/delta),
// K - 2) by exact integer division, 0 below p. Right below a breakpoint the
// rounded-up reciprocal may give one more; that case is accepted and counted.
// Checks the one-cycle latency through valid.
module address_generator_tb;

  localparam int XW = 33, AW = 16, IW = 40, INV_FRAC = 48;

  logic clk = 1'b0, rst_n, valid_i, valid_o;
  logic signed [XW-1:0] x_i, lo_i;
  logic [AW-1:0] base_i, last_i, addr_o;
  logic [IW-1:0] inv_i;

  address_generator #(.XW(XW), .AW(AW), .IW(IW), .INV_FRAC(INV_FRAC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_clamp_lo = 0, n_clamp_hi = 0, n_round = 0, n_exact = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint delta, lo, off, k, last, base, idx, exp_a;
    rst_n = 1'b0; valid_i = 1'b0; x_i = '0; lo_i = '0; base_i = '0; last_i = '0; inv_i = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      delta = 1000 + longint'($urandom % (1 << 20));
      k     = 2 + longint'($urandom % 2000);
      last  = k - 2;
      lo    = longint'($signed($urandom)) >>> 1;
      base  = longint'($urandom % 30000);
      case (i % 10)
        0:       off = -longint'($urandom % delta) - 1;                 // below p
        1:       off = (last + 1) * delta + longint'($urandom % delta);  // past the end
        2:       off = longint'($urandom % k) * delta;                   // on a breakpoint
        default: off = longint'({$urandom, $urandom} % 64'(k * delta));
      endcase
      @(negedge clk);
      valid_i = 1'b1;
      x_i     = XW'(lo + off);
      lo_i    = XW'(lo);
      base_i  = AW'(base);
      last_i  = AW'(last);
      inv_i   = IW'(((longint'(1) <<< INV_FRAC) + delta - 1) / delta);
      if (off < 0) begin idx = 0; n_clamp_lo++; end
      else begin
        idx = off / delta;
        if (idx > last) begin idx = last; n_clamp_hi++; end
      end
      exp_a = base + idx;
      @(negedge clk);
      valid_i = 1'b0;
      checks++;
      if (!valid_o) begin failures++; $display("FAIL valid missing"); end
      checks++;
      if (longint'(addr_o) == exp_a) n_exact++;
      else if (off >= 0 && idx < last && longint'(addr_o) == exp_a + 1 &&
               (off % delta) >= delta - 4) n_round++;
      else begin
        failures++;
        $display("FAIL off=%0d delta=%0d last=%0d addr=%0d exp=%0d", off, delta, last, addr_o, exp_a);
      end
      checks++;
      @(negedge clk);
      if (valid_o) begin failures++; $display("FAIL valid stuck"); end
    end
    checks++;
    if (n_clamp_lo == 0 || n_clamp_hi == 0) begin failures++; $display("FAIL clamp not exercised"); end
    $display("exact %0d, rounded up %0d, clamped low %0d, high %0d", n_exact, n_round, n_clamp_lo, n_clamp_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
