// table_bram_tb: builds a small table, e^x on [0, 2.5) split at 1.0, input
// (0,16,8), output (0,16,12), E_a = 1e-3, and reads it through both ports.
// The expected contents are worked out here from the spacing rule
// delta_j = floor(sqrt(8 E_a / max e^x) * 2^8) (max at the right end of the
// sub-interval), K_j = ceil(len / delta_j) + 1, entry = round(e^x * 2^12).
// Every address is read on port A while port B reads a random address; data
// must appear one cycle after the address.
module table_bram_tb;

  localparam real EA = 1.0e-3;
  localparam fa_pkg::seg_arr_t B = '{0: 0, 1: 256, 2: 640, default: 0};

  // independent reconstruction of the table
  localparam longint D0 = longint'($floor($sqrt(8.0 * EA / $exp(1.0)) * 256.0));
  localparam longint D1 = longint'($floor($sqrt(8.0 * EA / $exp(2.5)) * 256.0));
  localparam longint K0 = (256 + D0 - 1) / D0 + 1;
  localparam longint K1 = (384 + D1 - 1) / D1 + 1;
  localparam int     DEPTH = int'(K0 + K1);
  localparam int     AW = 7;

  logic clk = 1'b0;
  logic [AW-1:0] addr_a, addr_b;
  logic [15:0]   q_a, q_b;

  table_bram #(.FUNC(fa_pkg::FN_EXP), .EA(EA), .F_X(8), .S_Y(1'b0), .W_Y(16), .F_Y(12),
               .N_INT(2), .BOUNDS(B), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  function automatic logic [15:0] expect_at(int a);
    real x;
    if (a < K0) x = real'(a * D0) / 256.0;
    else        x = real'(256 + (a - K0) * D1) / 256.0;
    return 16'(longint'($floor($exp(x) * 4096.0 + 0.5)));
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ra, rb;
    $display("depth %0d (K0=%0d, K1=%0d, delta %0d/%0d LSB)", DEPTH, K0, K1, D0, D1);
    checks++;
    if (DEPTH > (1 << AW)) begin failures++; $display("FAIL depth"); end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      addr_a = AW'(a);
      addr_b = AW'($urandom % DEPTH);
      ra = a; rb = int'(addr_b);
      @(posedge clk);
      @(negedge clk);
      addr_a = '0; addr_b = '0;   // data must already be held
      checks += 2;
      if (q_a != expect_at(ra)) begin failures++; $display("FAIL A[%0d]=%h exp %h", ra, q_a, expect_at(ra)); end
      if (q_b != expect_at(rb)) begin failures++; $display("FAIL B[%0d]=%h exp %h", rb, q_b, expect_at(rb)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
