// posit_decode: splits an n-bit posit (es = 2) into sign, scale and significand.
//
// The posit is first made positive (2's complement), then the regime run
// length k is found with a leading-bit count. The regime value is r = k-1 for
// a run of ones and r = -k for a run of zeros, and the scale is 4r + e. The
// significand is returned as 1.f with the hidden one at bit SIGW-1; exponent or
// fraction bits that fall off the end of the posit read as zero. Zero and NaR
// (1 followed by zeros) are flagged and their other outputs are don't-care.
// Purely combinational. The regime/exponent/fraction layout is the posit
// format; the sign-magnitude decoding (rather than the 2's complement decoding
// with hidden bit -2) is this design's choice, as it gives the same value.
module posit_decode #(
  parameter int N    = 64,
  parameter int SW   = $clog2(N) + 6,   // signed scale width
  parameter int SIGW = N - 4            // hidden bit + up to N-5 fraction bits
) (
  input  logic [N-1:0]         p,
  output logic                 is_zero,
  output logic                 is_nar,
  output logic                 sign,
  output logic signed [SW-1:0] scale,
  output logic [SIGW-1:0]      sig
);

  logic [N-1:0]  mag;
  logic [N-2:0]  body, inv, shifted;
  logic          r0;
  logic [$clog2(N):0] k;
  logic [1:0]    e;
  logic signed [SW-1:0] r;

  always_comb begin
    is_zero = (p == '0);
    is_nar  = (p == {1'b1, {(N-1){1'b0}}});
    sign    = p[N-1];
    mag     = sign ? (~p + 1'b1) : p;
    body    = mag[N-2:0];
    r0      = body[N-2];
    inv     = r0 ? ~body : body;
    // run length = leading zeros of inv
    k = $bits(k)'(N - 1);
    for (int i = 0; i < N - 1; i++) begin
      if (inv[i]) k = $bits(k)'(N - 2 - i);
    end
    // drop the regime and its terminating bit
    shifted = body << (k + 1);
    e       = shifted[N-2 -: 2];
    sig     = {1'b1, shifted[N-4 -: SIGW-1]};
    r       = r0 ? SW'($signed({1'b0, k})) - SW'(1) : -SW'($signed({1'b0, k}));
    scale   = (r <<< 2) + SW'($signed({1'b0, e}));
  end

endmodule
