// interval_selector_tb: checks the comparator tree with 5 sub-intervals (the
// tree is padded from 4 to 7 nodes) on a 17-bit signed input.
// Random and boundary inputs are streamed one per cycle; every output set is
// compared, two cycles after its input, with a linear search over the bounds
// done here. Every sub-interval, and inputs below and above the partition,
// must occur.
module interval_selector_tb;

  localparam int N  = 5;
  localparam int XW = 17;
  localparam fa_pkg::seg_arr_t B  = '{0: -20000, 1: -5000, 2: 100, 3: 3000, 4: 9000, 5: 30000,
                                      default: 0};
  localparam fa_pkg::seg_arr_t D  = '{0: 11, 1: 22, 2: 33, 3: 44, 4: 55, default: 0};
  localparam fa_pkg::seg_arr_t IV = '{0: 1001, 1: 1002, 2: 1003, 3: 1004, 4: 1005, default: 0};
  localparam fa_pkg::seg_arr_t BA = '{0: 0, 1: 100, 2: 200, 3: 300, 4: 400, default: 0};
  localparam fa_pkg::seg_arr_t LA = '{0: 7, 1: 17, 2: 27, 3: 37, 4: 47, default: 0};

  logic clk = 1'b0, rst_n, valid_i, valid_o;
  logic signed [XW-1:0] x_i, x_o, lo_o;
  logic [2:0]  sel_o;
  logic [8:0]  base_o, last_o;
  logic [5:0]  delta_o;
  logic [9:0]  inv_o;

  interval_selector #(.N_INT(N), .XW(XW), .BOUNDS(B), .DELTA(D), .INV(IV), .BASE(BA),
                      .LAST(LA), .AW(9), .DW(6), .IW(10), .SW(3)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int hits [N];
  int below = 0, above = 0;
  logic signed [XW-1:0] q_x [$];

  function automatic int ref_j(logic signed [XW-1:0] x);
    int j = 0;
    for (int k = 1; k < N; k++) if (longint'(x) >= B[k]) j = k;
    return j;
  endfunction

  // in-flight inputs: 2-cycle pipeline
  logic signed [XW-1:0] p1, p2;
  logic v1, v2;
  always @(posedge clk) begin
    p1 <= x_i; v1 <= valid_i && rst_n;
    p2 <= p1;  v2 <= v1;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (valid_o !== v2) begin failures++; $display("FAIL valid %b exp %b", valid_o, v2); end
      if (v2) begin
        int j;
        j = ref_j(p2);
        hits[j]++;
        if (longint'(p2) < B[0]) below++;
        if (longint'(p2) >= B[N]) above++;
        checks++;
        if (sel_o != 3'(j) || x_o != p2 || longint'(lo_o) != B[j] || base_o != 9'(BA[j]) ||
            delta_o != 6'(D[j]) || inv_o != 10'(IV[j]) || last_o != 9'(LA[j])) begin
          failures++;
          $display("FAIL x=%0d j=%0d exp %0d lo=%0d base=%0d", p2, sel_o, j, lo_o, base_o);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; valid_i = 1'b0; x_i = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k <= N; k++) begin
      for (int d = -1; d <= 1; d++) begin
        @(negedge clk) valid_i = 1'b1; x_i = XW'(B[k] + d);
      end
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk) valid_i = ($urandom % 8) != 0; x_i = XW'($urandom);
    end
    @(negedge clk) valid_i = 1'b0;
    repeat (4) @(negedge clk);
    for (int j = 0; j < N; j++) begin
      checks++;
      if (hits[j] == 0) begin failures++; $display("FAIL sub-interval %0d never hit", j); end
    end
    checks++; if (below == 0) begin failures++; $display("FAIL nothing below"); end
    checks++; if (above == 0) begin failures++; $display("FAIL nothing above"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
