// tb_posit_q2p: self-checking test of posit_q2p (QROUND.S).
//
// Quires that hold exact doubles over the whole quire range must round like
// the reference encoder. Bits far below the posit's last place must act as
// sticky bits (ties to even versus just above a tie), values beyond maxpos
// saturate, NaR and zero map through. A time-based watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_q2p;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [QW-1:0] q;
  logic [N-1:0]  y;

  posit_q2p #(.N(N), .QW(QW)) dut (.q(q), .result(y));

  initial begin
    real v;
    q = '0; #1;
    `CHECK_EQ(y, '0, "zero")
    q = {1'b1, {(QW-1){1'b0}}}; #1;
    `CHECK_EQ(y, nar(), "NaR")
    q = QW'(1); #1;
    `CHECK_EQ(y, minpos(), "2^-496 saturates to minpos")
    q = QW'(1) << 1000; #1;
    `CHECK_EQ(y, maxpos(), "2^504 saturates to maxpos")
    q = quire_of(1.0) | (QW'(1) << (QF - 60)); #1;
    `CHECK_EQ(y, from_real(1.0), "tie rounds to even")
    q = quire_of(1.0) | (QW'(1) << (QF - 60)) | QW'(1); #1;
    `CHECK_EQ(y, from_real(1.0) + 1, "sticky far below breaks the tie")
    q = -q; #1;
    `CHECK_EQ(y, -(from_real(1.0) + 1), "negative quire")
    for (int i = 0; i < 2000; i++) begin
      v = rand_real(53, 200);
      q = quire_of(v); #1;
      `CHECK_EQ(y, from_real(v), $sformatf("round(%g)", v))
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
