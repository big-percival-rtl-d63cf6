// posit_mul_approx: logarithm-approximate posit multiplication.
//
// Uses Mitchell's approximation log2(1+f) ~ f. The logarithm of each operand
// is its scale plus its fraction, so the product's logarithm is the sum of
// scales plus the sum of fractions; a carry out of the fraction sum adds one
// to the scale and the remaining fraction bits are used directly as the
// result fraction (antilog 2^(k+x) ~ 2^k (1+x)). No multiplier is needed. The
// result is rounded to nearest even by posit_encode. NaR x anything is NaR,
// 0 x finite is 0. Combinational. The paper offers logarithm-approximate
// units as a synthesis-time alternative to the exact ones but does not give
// their insides; Mitchell's method is the simplest unit of that kind.
module posit_mul_approx #(
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
  logic [SIGW-1:0] fsum;      // carry + SIGW-1 fraction bits

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));
  posit_decode #(.N(N)) u_db (.p(b), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(eb), .sig(mb));

  always_comb begin
    fsum  = {1'b0, ma[SIGW-2:0]} + {1'b0, mb[SIGW-2:0]};
    e_res = ea + eb + SW'(fsum[SIGW-1]);
  end

  posit_encode #(.N(N), .FW(SIGW-1)) u_enc (
    .is_zero(za || zb), .is_nar(na || nb), .sign(sa ^ sb), .scale(e_res),
    .frac(fsum[SIGW-2:0]), .sticky(1'b0), .p(result)
  );

endmodule
