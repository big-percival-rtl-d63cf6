// tb_int_to_posit: self-checking test of int_to_posit in its four
// configurations (I2P, U2P, L2P, LU2P).
//
// Random integers with at most 53 significant bits are exact doubles, so the
// reference rounds their double value with the reference encoder; wider
// 64-bit integers are checked within one unit in the last place. A time-based
// watchdog ends a hung run.
`include "tb_check.svh"
module tb_int_to_posit;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [63:0] x;
  logic [N-1:0] pi, pu, pl, plu;

  int_to_posit #(.N(N), .IW(32), .SIGNED(1'b1)) u_i2p  (.x(x[31:0]), .result(pi));
  int_to_posit #(.N(N), .IW(32), .SIGNED(1'b0)) u_u2p  (.x(x[31:0]), .result(pu));
  int_to_posit #(.N(N), .IW(64), .SIGNED(1'b1)) u_l2p  (.x(x), .result(pl));
  int_to_posit #(.N(N), .IW(64), .SIGNED(1'b0)) u_lu2p (.x(x), .result(plu));

  initial begin
    x = 64'd0; #1;
    `CHECK_EQ(pl, '0, "0")
    x = 64'd1; #1;
    `CHECK_EQ(pl, from_real(1.0), "1")
    x = -64'sd5; #1;
    `CHECK_EQ(pl, from_real(-5.0), "L -5")
    `CHECK_EQ(pi, from_real(-5.0), "W -5")
    `CHECK_EQ(pu, from_real(4294967291.0), "WU 2^32-5")
    x = 64'h8000_0000_0000_0000; #1;
    `CHECK_EQ(pl, from_real(-pow2(63)), "L min")
    `CHECK_EQ(plu, from_real(pow2(63)), "LU 2^63")
    x = 64'hffff_ffff_ffff_ffff; #1;
    `CHECK_EQ(plu, from_real(pow2(64)), "LU 2^64-1 rounds up")
    for (int i = 0; i < 2000; i++) begin
      longint v;
      v = longint'({$urandom, $urandom}) >>> $urandom_range(62, 11);
      x = 64'(v); #1;
      `CHECK_EQ(pl, from_real(real'(v)), $sformatf("L2P %0d", v))
      `CHECK_EQ(pi, from_real(real'(int'(v))), $sformatf("I2P %0d", int'(v)))
      `CHECK_EQ(pu, from_real(real'(longint'({32'h0, v[31:0]}))), $sformatf("U2P %0d", v[31:0]))
      x = {$urandom, $urandom}; #1;
      `CHECK_TRUE(ulp_dist(plu, from_real(real'(x))) <= 1, "LU2P wide")
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
