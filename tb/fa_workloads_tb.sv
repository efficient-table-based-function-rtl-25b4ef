// fa_workloads_tb: the benchmark functions of the evaluation, each on its own
// interval and fixed-point formats with E_a = 9.5367e-7, split into n
// sub-intervals by hierarchical segmentation:
//   exp(x)         [0, 5)       (0,32,29) -> (0,32,24)  n = 2
//   log(x)         [0.625,15.625) (0,32,28) -> (1,32,29) n = 8
//   tanh(x)        [-8, 8)      (1,32,27) -> (1,32,31)  n = 9
//   1/(1+e^-x)     [-10, 10)    (1,32,27) -> (0,32,32)  n = 9
//   e^(-x^2/2)     [-6, 6)      (1,32,28) -> (0,32,32)  n = 14
//   tan(x)         [-1.5, 1.5)  (1,32,30) -> (1,32,27)  n = 3
// (the Gaussian uses an unsigned output: a signed 32-bit value with 32
// fraction bits cannot hold results of 0.5 and above).
// Each configuration is an independent instance of the approximator checked
// by fa_wl_check.
module fa_workloads_tb;

  localparam real EA = 9.5367e-7;
  localparam int  NW = 6;

  int   c [NW], f [NW];
  logic d [NW];

  fa_wl_check #(.NAME("exp n=2"), .FUNC(fa_pkg::FN_EXP), .EA(EA), .S_X(1'b0), .F_X(29),
                .S_Y(1'b0), .F_Y(24), .N_INT(2),
                .BOUNDS('{0: 64'sd0, 1: 64'sd1669668536, 2: 64'sd2684354560, default: 0}))
    u_exp (.checks(c[0]), .failures(f[0]), .done(d[0]));

  fa_wl_check #(.NAME("log n=8"), .FUNC(fa_pkg::FN_LOG), .EA(EA), .S_X(1'b0), .F_X(28),
                .S_Y(1'b1), .F_Y(29), .N_INT(8),
                .BOUNDS('{0: 64'sd167772160, 1: 64'sd248302797, 2: 64'sd377151816,
                          3: 64'sd558345748, 4: 64'sd828123382, 5: 64'sd1182458184,
                          6: 64'sd1838782874, 7: 64'sd2716566815, 8: 64'sd4194304000,
                          default: 0}))
    u_log (.checks(c[1]), .failures(f[1]), .done(d[1]));

  fa_wl_check #(.NAME("tanh n=9"), .FUNC(fa_pkg::FN_TANH), .EA(EA), .S_X(1'b1), .F_X(27),
                .S_Y(1'b1), .F_Y(31), .N_INT(9),
                .BOUNDS('{0: -64'sd1073741824, 1: -64'sd811748819, 2: -64'sd618475291,
                          3: -64'sd502511174, 4: -64'sd399431959, 5: 64'sd399431959,
                          6: 64'sd463856468, 7: 64'sd592705487, 8: 64'sd743029342,
                          9: 64'sd1073741824, default: 0}))
    u_tanh (.checks(c[2]), .failures(f[2]), .done(d[2]));

  fa_wl_check #(.NAME("sigmoid n=9"), .FUNC(fa_pkg::FN_SIGMOID), .EA(EA), .S_X(1'b1),
                .F_X(27), .S_Y(1'b0), .F_Y(32), .N_INT(9),
                .BOUNDS('{0: -64'sd1342177280, 1: -64'sd1111322788, 2: -64'sd939524096,
                          3: -64'sd826781204, 4: -64'sd665719931, 5: 64'sd638876385,
                          6: 64'sd735513149, 7: 64'sd891205714, 8: 64'sd1041529569,
                          9: 64'sd1342177280, default: 0}))
    u_sig (.checks(c[3]), .failures(f[3]), .done(d[3]));

  fa_wl_check #(.NAME("gauss n=14"), .FUNC(fa_pkg::FN_GAUSS), .EA(EA), .S_X(1'b1), .F_X(28),
                .S_Y(1'b0), .F_Y(32), .N_INT(14),
                .BOUNDS('{0: -64'sd1610612736, 1: -64'sd1436666561, 2: -64'sd1314259993,
                          3: -64'sd1153198719, 4: -64'sd1011464798, 5: -64'sd940597838,
                          6: -64'sd876173328, 7: -64'sd180388626, 8: 64'sd180388626,
                          9: 64'sd869730877, 10: 64'sd979252543, 11: 64'sd1095216660,
                          12: 64'sd1249835483, 13: 64'sd1352914698, 14: 64'sd1610612736,
                          default: 0}))
    u_gauss (.checks(c[4]), .failures(f[4]), .done(d[4]));

  fa_wl_check #(.NAME("tan n=3"), .FUNC(fa_pkg::FN_TAN), .EA(EA), .S_X(1'b1), .F_X(30),
                .S_Y(1'b1), .F_Y(27), .N_INT(3),
                .BOUNDS('{0: -64'sd1610612736, 1: -64'sd1385126953, 2: 64'sd1385126953,
                          3: 64'sd1610612736, default: 0}))
    u_tan (.checks(c[5]), .failures(f[5]), .done(d[5]));

  int checks, failures;

  initial begin : watchdog
    #1ms;
    $display("FAIL: watchdog");
    checks = 0; failures = 1;
    foreach (c[i]) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    checks = 0; failures = 0;
    foreach (c[i]) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
