// lamos_top_tb -- end-to-end test of the modular multiplier.
//
// Three two-macro instances with random operands checked against
// (A*B) mod M and against the cycle count:
//   * 512-bit hardware running 512-bit operations (299 cycles),
//   * 256-bit hardware running 256-bit operations (104 cycles),
//   * 1024-bit hardware with the width chosen at random per operation
//     (256, 512, 768 or 1024 bits), which exercises width changes and the
//     clearing of the unused upper part of the product register.
module lamos_top_tb;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;

  lamos_tb_core #(.N(512),  .K(2), .EXP_LAT(299), .MIN_OPS(20), .SEED(7)) u_512 (.finished(f0), .checks(c0), .failures(e0));
  lamos_tb_core #(.N(256),  .K(2), .EXP_LAT(104), .MIN_OPS(20), .SEED(3)) u_256 (.finished(f1), .checks(c1), .failures(e1));
  lamos_tb_core #(.N(1024), .K(2), .NS_LO(1), .NS_HI(4), .MIN_OPS(16), .SEED(5)) u_mix (.finished(f2), .checks(c2), .failures(e2));

  initial begin
    wait (f0 && f1 && f2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
    $finish;
  end

  initial begin
    #50_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end
endmodule
