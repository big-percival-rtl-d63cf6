// posit_add: posit addition and subtraction (PADD.S / PSUB.S), one rounding.
//
// For subtraction B is negated first (posit negation is 2's complement). Both
// operands are decoded, the one with the smaller magnitude is shifted right by
// the scale difference into a field wide enough (2*SIGW+4 bits) that at least
// SIGW+4 guard bits survive; bits shifted further out are jammed into the LSB
// as a sticky bit. Magnitudes are added or subtracted, the sum is normalised
// with a leading-zero count and passed to posit_encode, which rounds to
// nearest even. NaR in gives NaR; x + 0 = x; exact cancellation gives 0.
// Combinational; the PAU registers the result. The paper names the ADD unit;
// its inside is the usual floating-point adder structure.
module posit_add #(
  parameter int N = 64
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         sub,
  output logic [N-1:0] result
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;
  localparam int W    = 2 * SIGW + 4;

  logic [N-1:0] b_eff;
  logic za, zb, na, nb, sa, sb;
  logic signed [SW-1:0] ea, eb;
  logic [SIGW-1:0] ma, mb;

  assign b_eff = sub ? (~b + 1'b1) : b;

  posit_decode #(.N(N)) u_da (.p(a),     .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));
  posit_decode #(.N(N)) u_db (.p(b_eff), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(eb), .sig(mb));

  logic                 swap;
  logic                 s_big, s_sml;
  logic signed [SW-1:0] e_big;
  logic [SW-1:0]        diff;
  logic [W-1:0]         x_big, x_sml, x_shf;
  logic                 stk;
  logic [W:0]           sum, norm;
  logic [$clog2(W+1):0] lz;
  logic signed [SW-1:0] e_res;
  logic                 res_zero, res_sign;
  logic [N-1:0]         enc_p;

  always_comb begin
    swap  = (eb > ea) || ((eb == ea) && (mb > ma));
    s_big = swap ? sb : sa;
    s_sml = swap ? sa : sb;
    e_big = swap ? eb : ea;
    diff  = swap ? SW'(eb - ea) : SW'(ea - eb);
    x_big = {swap ? mb : ma, {(W-SIGW){1'b0}}};
    x_sml = {swap ? ma : mb, {(W-SIGW){1'b0}}};
    if (diff >= SW'(W)) begin
      x_shf = '0;
      stk   = 1'b1;
    end else begin
      x_shf = x_sml >> diff;
      stk   = |(x_sml << (SW'(W) - diff));
    end
    x_shf[0] = x_shf[0] | stk;
    if (s_big == s_sml) sum = {1'b0, x_big} + {1'b0, x_shf};
    else                sum = {1'b0, x_big} - {1'b0, x_shf};
    lz = $bits(lz)'(W + 1);
    for (int i = 0; i <= W; i++) begin
      if (sum[i]) lz = $bits(lz)'(W - i);
    end
    norm     = sum << lz;
    e_res    = e_big + SW'(1) - SW'(lz);
    res_zero = (sum == '0);
    res_sign = s_big;
  end

  posit_encode #(.N(N), .FW(W)) u_enc (
    .is_zero(res_zero), .is_nar(1'b0), .sign(res_sign), .scale(e_res),
    .frac(norm[W-1:0]), .sticky(1'b0), .p(enc_p)
  );

  always_comb begin
    if (na || nb)  result = {1'b1, {(N-1){1'b0}}};
    else if (za)   result = b_eff;
    else if (zb)   result = a;
    else           result = enc_p;
  end

endmodule
