// posit_to_int: posit to integer conversion (P2I, P2U, P2L, P2LU).
//
// One module serves all four converters through IW (32 or 64) and SIGNED.
// The decoded significand is shifted left by scale+1 so that its integer part
// sits above bit SIGW; the bit below is the guard and the rest the sticky, and
// the magnitude is rounded to nearest, ties to even. Out-of-range values
// saturate to the most positive or most negative integer; negative values give
// 0 for unsigned targets, NaR gives the most negative signed integer or the
// largest unsigned one. The IW-bit result is sign-extended to XLEN as RV64
// does for 32-bit results. Combinational. The four converters are named in
// the paper; rounding and saturation rules follow RISC-V FCVT and are this
// design's choice.
module posit_to_int #(
  parameter int N      = 64,
  parameter int IW     = 64,
  parameter bit SIGNED = 1'b1,
  parameter int XLEN   = 64
) (
  input  logic [N-1:0]    a,
  output logic [XLEN-1:0] result
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;
  localparam int VW   = IW + SIGW + 2;

  logic za, na, sa;
  logic signed [SW-1:0] ea;
  logic [SIGW-1:0] ma;

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));

  logic [VW-1:0] v;
  logic [IW+1:0] mag;
  logic          guard, sticky, big, rup;
  logic [IW-1:0] res;

  always_comb begin
    v      = '0;
    big    = 1'b0;
    mag    = '0;
    guard  = 1'b0;
    sticky = 1'b0;
    if (ea > SW'(IW)) begin
      big = 1'b1;
    end else if (ea >= -SW'(1)) begin
      v      = VW'(ma) << (ea + SW'(1));
      mag    = v[VW-1:SIGW];
      guard  = v[SIGW-1];
      sticky = |v[SIGW-2:0];
    end else begin
      sticky = 1'b1;                    // |x| < 0.5 rounds to 0
    end
    rup = guard & (sticky | mag[0]);
    mag = mag + (IW+2)'(rup);

    if (na) begin
      res = SIGNED ? {1'b1, {(IW-1){1'b0}}} : {IW{1'b1}};
    end else if (za) begin
      res = '0;
    end else if (SIGNED) begin
      if (sa) res = (big || mag > (IW+2)'({1'b1, {(IW-1){1'b0}}})) ? {1'b1, {(IW-1){1'b0}}} : IW'(~mag + 1'b1);
      else    res = (big || mag > (IW+2)'({1'b0, {(IW-1){1'b1}}})) ? {1'b0, {(IW-1){1'b1}}} : IW'(mag);
    end else begin
      if (sa) res = '0;
      else    res = (big || mag > (IW+2)'({IW{1'b1}})) ? {IW{1'b1}} : IW'(mag);
    end
    result = XLEN'($signed(res));
  end

endmodule
