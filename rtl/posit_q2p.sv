// posit_q2p: rounds the quire to a posit (QROUND.S).
//
// The quire's magnitude (2's complement) is normalised with a QW-bit
// leading-zero count. The scale is the position of the leading one minus the
// 8(n-2) fraction bits; every bit below the leading one goes to posit_encode,
// which rounds to nearest, ties to even, saturating at maxpos/minpos. A NaR
// quire gives NaR, a zero quire gives 0. Combinational. The unit is named in
// the paper; its structure is this design's choice.
module posit_q2p #(
  parameter int N  = 64,
  parameter int QW = 16 * N
) (
  input  logic [QW-1:0] q,
  output logic [N-1:0]  result
);

  localparam int SW = $clog2(N) + 6;
  localparam int QF = 8 * (N - 2);

  logic                 nar, zero, sign;
  logic [QW-1:0]        mag, norm;
  logic [$clog2(QW):0]  lz;
  logic signed [SW-1:0] scale;

  always_comb begin
    nar  = (q == {1'b1, {(QW-1){1'b0}}});
    zero = (q == '0);
    sign = q[QW-1];
    mag  = sign ? (~q + 1'b1) : q;
    lz   = '0;
    for (int i = 0; i < QW; i++) begin
      if (mag[i]) lz = $bits(lz)'(QW - 1 - i);
    end
    norm  = mag << lz;
    scale = SW'(QW - 1 - QF) - SW'(lz);
  end

  posit_encode #(.N(N), .FW(QW-1)) u_enc (
    .is_zero(zero), .is_nar(nar), .sign(sign), .scale(scale),
    .frac(norm[QW-2:0]), .sticky(1'b0), .p(result)
  );

endmodule
