// posit_div_approx: logarithm-approximate posit division.
//
// Uses Mitchell's approximation log2(1+f) ~ f: the quotient's logarithm is
// the scale difference plus the fraction difference. A borrow from the
// fraction difference subtracts one from the scale and the 2's complement
// fraction bits (fa - fb + 1) become the result fraction. The result is rounded
// by posit_encode. NaR or a zero divisor gives NaR, 0 / x gives 0.
// Combinational. The paper offers logarithm-approximate division as an
// alternative to the exact unit but does not give its insides; Mitchell's
// method is the simplest unit of that kind.
module posit_div_approx #(
  parameter int N = 64
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] result
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;

  logic za, zb, na, nb, sa, sb;
  logic signed [SW-1:0] ea, eb, e_res;
  logic [SIGW-1:0] ma, mb;
  logic [SIGW-1:0] fdif;      // borrow + SIGW-1 fraction bits

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));
  posit_decode #(.N(N)) u_db (.p(b), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(eb), .sig(mb));

  always_comb begin
    fdif  = {1'b0, ma[SIGW-2:0]} - {1'b0, mb[SIGW-2:0]};
    e_res = ea - eb - SW'(fdif[SIGW-1]);
  end

  posit_encode #(.N(N), .FW(SIGW-1)) u_enc (
    .is_zero(za), .is_nar(na || nb || zb), .sign(sa ^ sb), .scale(e_res),
    .frac(fdif[SIGW-2:0]), .sticky(1'b0), .p(result)
  );

endmodule
