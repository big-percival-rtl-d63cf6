// tb_posit_to_int: self-checking test of posit_to_int in its four
// configurations (P2I, P2U, P2L, P2LU).
//
// The reference rounds the double value of the posit to nearest even with
// $rtoi on the truncated part and an explicit tie test, then saturates as
// RISC-V FCVT does. Checked: ties, negative to unsigned, overflow, NaR, and
// random values. A time-based watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_to_int;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [N-1:0] a;
  logic [63:0] yi, yu, yl, ylu;

  posit_to_int #(.N(N), .IW(32), .SIGNED(1'b1)) u_p2i  (.a(a), .result(yi));
  posit_to_int #(.N(N), .IW(32), .SIGNED(1'b0)) u_p2u  (.a(a), .result(yu));
  posit_to_int #(.N(N), .IW(64), .SIGNED(1'b1)) u_p2l  (.a(a), .result(yl));
  posit_to_int #(.N(N), .IW(64), .SIGNED(1'b0)) u_p2lu (.a(a), .result(ylu));

  // round to nearest even, for |x| < 2^62
  function automatic longint rne(real x);
    real    t, fr;
    longint ti;
    t  = (x < 0.0) ? -x : x;
    ti = longint'($floor(t));
    fr = t - real'(ti);
    if (fr > 0.5 || (fr == 0.5 && ti[0])) ti++;
    return (x < 0.0) ? -ti : ti;
  endfunction

  task automatic check_val(real x);
    longint v;
    logic [63:0] ei, eu, el, elu;
    a = from_real(x); #1;
    v = rne(to_real(a));
    ei  = (v > 64'sd2147483647) ? 64'h7fffffff : (v < -64'sd2147483648) ? 64'hffffffff80000000 : 64'(v);
    eu  = (v < 0) ? 64'h0 : (v > 64'sd4294967295) ? 64'hffffffffffffffff : {{32{v[31]}}, v[31:0]};
    el  = 64'(v);
    elu = (v < 0) ? 64'h0 : 64'(v);
    `CHECK_EQ(yi, ei, $sformatf("P2I %g", x))
    `CHECK_EQ(yu, eu, $sformatf("P2U %g", x))
    `CHECK_EQ(yl, el, $sformatf("P2L %g", x))
    `CHECK_EQ(ylu, elu, $sformatf("P2LU %g", x))
  endtask

  initial begin
    check_val(2.5);      // tie to even: 2
    check_val(3.5);      // tie to even: 4
    check_val(-2.5);
    check_val(0.4);
    check_val(-0.6);
    check_val(1.0e9);
    check_val(3.0e9);    // overflows int32, fits uint32
    check_val(-3.0e9);
    check_val(5.0e9);
    check_val(123456789.75);
    a = from_real(1.0e30); #1;
    `CHECK_EQ(yl, 64'h7fffffffffffffff, "P2L saturates")
    `CHECK_EQ(ylu, 64'hffffffffffffffff, "P2LU saturates")
    a = from_real(-1.0e30); #1;
    `CHECK_EQ(yl, 64'h8000000000000000, "P2L saturates negative")
    a = nar(); #1;
    `CHECK_EQ(yl, 64'h8000000000000000, "P2L NaR")
    `CHECK_EQ(yi, 64'hffffffff80000000, "P2I NaR")
    a = '0; #1;
    `CHECK_EQ(yl, 64'h0, "P2L 0")
    for (int i = 0; i < 2000; i++) check_val(rand_real(40, 40));
    `TB_FINISH
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
