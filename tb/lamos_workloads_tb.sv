// lamos_workloads_tb -- the bit widths and macro counts of the evaluation.
//
// Each instance runs a few random modular multiplications at one width and
// checks the result and the cycle count reported for that configuration:
//   two macros : 256 -> 104, 512 -> 299, 1024 -> 977, 2048 -> 3485 cycles
//   one macro  : 256 -> 200, 512 -> 587, 1024 -> 1937 cycles
//   256 bits   : four macros -> 56, eight macros -> 32 cycles
// The two-macro widths run on 2048-bit hardware, as in the evaluation where
// one configuration serves every width.
module lamos_workloads_tb;
  localparam int NI = 9;
  logic [NI-1:0] f;
  int c [NI];
  int e [NI];

  lamos_tb_core #(.N(2048), .K(2), .NS_LO(1), .NS_HI(1), .EXP_LAT(104),  .MIN_OPS(4), .CHECK_MECH(1'b0), .SEED(19)) u0 (.finished(f[0]), .checks(c[0]), .failures(e[0]));
  lamos_tb_core #(.N(2048), .K(2), .NS_LO(2), .NS_HI(2), .EXP_LAT(299),  .MIN_OPS(4), .CHECK_MECH(1'b0), .SEED(18)) u1 (.finished(f[1]), .checks(c[1]), .failures(e[1]));
  lamos_tb_core #(.N(2048), .K(2), .NS_LO(4), .NS_HI(4), .EXP_LAT(977),  .MIN_OPS(3), .CHECK_MECH(1'b0), .SEED(11)) u2 (.finished(f[2]), .checks(c[2]), .failures(e[2]));
  lamos_tb_core #(.N(2048), .K(2), .NS_LO(8), .NS_HI(8), .EXP_LAT(3485), .MIN_OPS(2), .CHECK_MECH(1'b0), .SEED(12)) u3 (.finished(f[3]), .checks(c[3]), .failures(e[3]));
  lamos_tb_core #(.N(256),  .K(1), .EXP_LAT(200),  .MIN_OPS(4), .CHECK_MECH(1'b0), .SEED(13)) u4 (.finished(f[4]), .checks(c[4]), .failures(e[4]));
  lamos_tb_core #(.N(512),  .K(1), .EXP_LAT(587),  .MIN_OPS(4), .CHECK_MECH(1'b0), .SEED(14)) u5 (.finished(f[5]), .checks(c[5]), .failures(e[5]));
  lamos_tb_core #(.N(1024), .K(1), .EXP_LAT(1937), .MIN_OPS(3), .CHECK_MECH(1'b0), .SEED(15)) u6 (.finished(f[6]), .checks(c[6]), .failures(e[6]));
  lamos_tb_core #(.N(256),  .K(4), .EXP_LAT(56),   .MIN_OPS(4), .CHECK_MECH(1'b0), .SEED(16)) u7 (.finished(f[7]), .checks(c[7]), .failures(e[7]));
  lamos_tb_core #(.N(256),  .K(8), .EXP_LAT(32),   .MIN_OPS(4), .CHECK_MECH(1'b0), .SEED(17)) u8 (.finished(f[8]), .checks(c[8]), .failures(e[8]));

  function automatic int total(input int x [NI]);
    int s = 0;
    for (int i = 0; i < NI; i++) s += x[i];
    return s;
  endfunction

  initial begin
    wait (&f);
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(e));
    $finish;
  end

  initial begin
    #50_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(e) + 1);
    $finish;
  end
endmodule
