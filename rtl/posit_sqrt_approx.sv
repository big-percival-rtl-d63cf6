// posit_sqrt_approx: logarithm-approximate posit square root.
//
// Uses Mitchell's approximation log2(1+f) ~ f: the logarithm scale + f is
// halved. For an even scale the result is 2^(scale/2) (1 + f/2); for an odd
// scale it is 2^((scale-1)/2) (1 + (1+f)/2). The halved fraction is rounded by
// posit_encode. Negative inputs and NaR give NaR, 0 gives 0. Combinational.
// The paper offers a logarithm-approximate square root as an alternative to
// the exact unit without giving its insides; Mitchell's method is the simplest
// unit of that kind.
module posit_sqrt_approx #(
  parameter int N = 64
) (
  input  logic [N-1:0] a,
  output logic [N-1:0] result
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;

  logic za, na, sa;
  logic signed [SW-1:0] ea, e_res;
  logic [SIGW-1:0] ma;
  logic [SIGW-1:0] fh;        // (odd ? 1 : 0) . f, i.e. (odd + f) / 2

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));

  always_comb begin
    fh    = {ea[0], ma[SIGW-2:0]};
    e_res = (ea - $signed(SW'(ea[0]))) >>> 1;
  end

  posit_encode #(.N(N), .FW(SIGW)) u_enc (
    .is_zero(za), .is_nar(na || (sa && !za)), .sign(1'b0), .scale(e_res),
    .frac(fh), .sticky(1'b0), .p(result)
  );

endmodule
