// tb_posit_mul: self-checking test of posit_mul (PMUL.S).
//
// Directed cases (signs, zero, NaR, saturation at maxpos and minpos) and random
// operands with 26-bit significands, whose product is exact as a double, are
// compared with the reference model. A time-based watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_mul;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [N-1:0] a, b, y;

  posit_mul #(.N(N)) dut (.a(a), .b(b), .result(y));

  task automatic run(real ra, real rb);
    a = from_real(ra); b = from_real(rb);
    #1;
    `CHECK_EQ(y, from_real(ra * rb), $sformatf("%g * %g", ra, rb))
  endtask

  initial begin
    run(3.0, 5.0);
    run(-1.5, 2.25);
    run(-0.125, -8.0);
    run(0.0, 3.0);
    run(1.0e30, 1.0e30);
    run(3.0e-40, 2.0e-40);
    a = nar(); b = '0; #1;
    `CHECK_EQ(y, nar(), "NaR * 0")
    a = maxpos(); b = maxpos(); #1;
    `CHECK_EQ(y, maxpos(), "maxpos^2 saturates")
    a = minpos(); b = minpos(); #1;
    `CHECK_EQ(y, minpos(), "minpos^2 does not underflow")
    for (int i = 0; i < 3000; i++) run(rand_real(26, 60), rand_real(26, 60));
    `TB_FINISH
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
