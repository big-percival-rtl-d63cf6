// tb_posit_quire_mac: self-checking test of posit_quire_mac (QMADD / QMSUB).
//
// The quire image of a double is built independently (quire_of in
// posit_ref_pkg). Random products of 20-bit posits added to random starting
// quires must equal the exact image of the double sum. The extreme products
// maxpos^2 and minpos^2 must land on quire bits 992 and 0, and NaR handling
// and zero operands are checked. A time-based watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_quire_mac;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [QW-1:0] qi, qo;
  logic [N-1:0] a, b;
  logic sub;

  posit_quire_mac #(.N(N), .QW(QW)) dut (.q_in(qi), .a(a), .b(b), .sub(sub), .q_out(qo));

  initial begin
    real r0, ra, rb;
    qi = '0; a = maxpos(); b = maxpos(); sub = 0; #1;
    `CHECK_EQ(qo, QW'(1) << 992, "maxpos^2 at bit 992")
    a = minpos(); b = minpos(); #1;
    `CHECK_EQ(qo, QW'(1), "minpos^2 at bit 0")
    sub = 1; #1;
    `CHECK_EQ(qo, {QW{1'b1}}, "-minpos^2 = -1 LSB")
    qi = quire_of(5.0); a = '0; b = from_real(3.0); sub = 0; #1;
    `CHECK_EQ(qo, quire_of(5.0), "q + 0 * 3")
    a = nar(); #1;
    `CHECK_EQ(qo, {1'b1, {(QW-1){1'b0}}}, "NaR operand")
    qi = {1'b1, {(QW-1){1'b0}}}; a = from_real(1.0); b = from_real(1.0); #1;
    `CHECK_EQ(qo, {1'b1, {(QW-1){1'b0}}}, "NaR quire stays NaR")
    for (int i = 0; i < 2000; i++) begin
      ra = rand_real(14, 30); rb = rand_real(14, 30);
      r0 = ra * rb * pow2(int'($urandom_range(12, 0)) - 6) * (1.0 + real'($urandom_range(1023, 0)) / 1024.0);
      if ($urandom_range(1, 0) == 1) r0 = -r0;
      sub = $urandom_range(1, 0);
      qi = quire_of(r0); a = from_real(ra); b = from_real(rb); #1;
      `CHECK_EQ(qo, quire_of(sub ? r0 - ra * rb : r0 + ra * rb), $sformatf("%g %s %g*%g", r0, sub ? "-" : "+", ra, rb))
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
