// tb_posit_add: self-checking test of posit_add (PADD.S / PSUB.S).
//
// Directed cases (small integers, cancellation, zero, NaR, saturation at
// maxpos) and random operands with 20-bit significands whose exact sum is a
// double, compared with the bit-list reference model of posit_ref_pkg. A
// time-based watchdog ends the run if it hangs.
`include "tb_check.svh"
module tb_posit_add;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [N-1:0] a, b, y;
  logic sub;

  posit_add #(.N(N)) dut (.a(a), .b(b), .sub(sub), .result(y));

  task automatic run(real ra, real rb, bit s);
    a = from_real(ra); b = from_real(rb); sub = s;
    #1;
    `CHECK_EQ(y, from_real(s ? ra - rb : ra + rb), $sformatf("%f %s %f", ra, s ? "-" : "+", rb))
  endtask

  initial begin
    run(1.0, 1.0, 0);
    run(3.0, 5.0, 1);
    run(-2.5, 0.75, 0);
    run(1.0e10, -3.0, 0);
    run(7.0, 7.0, 1);
    run(0.0, -4.0, 0);
    run(-6.0, 0.0, 1);
    run(0.0, 4.0, 1);
    run(1.0, pow2(-80), 0);              // far apart: only the sticky survives
    a = nar(); b = from_real(1.0); sub = 0; #1;
    `CHECK_EQ(y, nar(), "NaR + 1")
    a = maxpos(); b = maxpos(); sub = 0; #1;
    `CHECK_EQ(y, maxpos(), "maxpos + maxpos saturates")
    a = minpos(); b = minpos(); sub = 1; #1;
    `CHECK_EQ(y, '0, "minpos - minpos")
    for (int i = 0; i < 3000; i++) begin
      real ra, rb;
      ra = rand_real(20, 40);
      rb = ra * pow2(int'($urandom_range(40, 0)) - 20) * (1.0 + real'($urandom_range(1023, 0)) / 1024.0);
      if ($urandom_range(1, 0) == 1) rb = -rb;
      run(ra, rb, $urandom_range(1, 0) == 1);
    end
    `TB_FINISH
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
