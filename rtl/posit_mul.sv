// posit_mul: exact posit multiplication (PMUL.S), one rounding.
//
// Both operands are decoded; the two SIGW-bit significands (1.f) are
// multiplied into a 2*SIGW-bit product in [1,4). If the product is >= 2 the
// scale sum is incremented, otherwise the product is shifted left by one. All
// product bits below the hidden one go to posit_encode as the fraction, so the
// single rounding to nearest even sees the exact product. NaR x anything is
// NaR, 0 x finite is 0. Combinational; the PAU registers the result. The
// paper gives the unit's function (exact multiplier, alternative to the
// logarithm-approximate one); the structure is the usual one.
module posit_mul #(
  parameter int N = 64
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] result
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;
  localparam int PW   = 2 * SIGW;

  logic za, zb, na, nb, sa, sb;
  logic signed [SW-1:0] ea, eb, e_res;
  logic [SIGW-1:0] ma, mb;
  logic [PW-1:0]   prod;
  logic [PW-2:0]   frac;

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));
  posit_decode #(.N(N)) u_db (.p(b), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(eb), .sig(mb));

  always_comb begin
    prod = PW'(ma) * PW'(mb);
    if (prod[PW-1]) begin
      e_res = ea + eb + SW'(1);
      frac  = prod[PW-2:0];
    end else begin
      e_res = ea + eb;
      frac  = {prod[PW-3:0], 1'b0};
    end
  end

  posit_encode #(.N(N), .FW(PW-1)) u_enc (
    .is_zero(za || zb), .is_nar(na || nb), .sign(sa ^ sb), .scale(e_res),
    .frac(frac), .sticky(1'b0), .p(result)
  );

endmodule
