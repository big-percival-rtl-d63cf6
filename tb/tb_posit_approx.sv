// tb_posit_approx: self-checking test of the logarithm-approximate units
// posit_mul_approx, posit_div_approx and posit_sqrt_approx.
//
// The reference applies Mitchell's approximation in double precision
// (mlog / mexp of posit_ref_pkg) to operands with 20-bit significands, where
// every step is exact, and rounds the result with the reference encoder.
// Special operands (zero, NaR, negative square root) are checked directly.
// A time-based watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_approx;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [N-1:0] a, b, ym, yd, ys;

  posit_mul_approx  #(.N(N)) u_mul  (.a(a), .b(b), .result(ym));
  posit_div_approx  #(.N(N)) u_div  (.a(a), .b(b), .result(yd));
  posit_sqrt_approx #(.N(N)) u_sqrt (.a(a), .result(ys));

  initial begin
    real ra, rb, sg;
    a = from_real(3.0); b = from_real(3.0); #1;
    `CHECK_EQ(ym, from_real(8.0), "3 x~ 3 = 8 (Mitchell)")
    `CHECK_EQ(yd, from_real(1.0), "3 /~ 3 = 1")
    `CHECK_EQ(ys, from_real(1.75), "sqrt~(3) = 1.75")
    a = from_real(4.0); #1;
    `CHECK_EQ(ys, from_real(2.0), "sqrt~(4) = 2")
    a = nar(); #1;
    `CHECK_EQ(ym, nar(), "NaR x~"); `CHECK_EQ(yd, nar(), "NaR /~"); `CHECK_EQ(ys, nar(), "sqrt~ NaR")
    a = from_real(2.0); b = '0; #1;
    `CHECK_EQ(ym, '0, "2 x~ 0"); `CHECK_EQ(yd, nar(), "2 /~ 0")
    a = from_real(-2.0); #1;
    `CHECK_EQ(ys, nar(), "sqrt~(-2)")
    for (int i = 0; i < 2000; i++) begin
      ra = rand_real(20, 40); rb = rand_real(20, 40);
      a = from_real(ra); b = from_real(rb); #1;
      sg = ((ra < 0.0) != (rb < 0.0)) ? -1.0 : 1.0;
      `CHECK_EQ(ym, from_real(sg * mexp(mlog(ra) + mlog(rb))), $sformatf("%g x~ %g", ra, rb))
      `CHECK_EQ(yd, from_real(sg * mexp(mlog(ra) - mlog(rb))), $sformatf("%g /~ %g", ra, rb))
      if (ra > 0.0) `CHECK_EQ(ys, from_real(mexp(mlog(ra) / 2.0)), $sformatf("sqrt~ %g", ra))
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
