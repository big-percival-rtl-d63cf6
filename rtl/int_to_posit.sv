// int_to_posit: integer to posit conversion (I2P, U2P, L2P, LU2P).
//
// One module serves all four converters through IW (32 or 64) and SIGNED. The
// magnitude of the integer (2's complement for signed inputs) is normalised
// with a leading-zero count; the scale is the position of its leading one and
// the bits below it form the fraction, which posit_encode rounds to nearest,
// ties to even. Only the low IW bits of the input are used. Combinational.
// The converters are named in the paper; their structure is the usual one.
module int_to_posit #(
  parameter int N      = 64,
  parameter int IW     = 64,
  parameter bit SIGNED = 1'b1
) (
  input  logic [IW-1:0] x,
  output logic [N-1:0]  result
);

  localparam int SW = $clog2(N) + 6;

  logic                 neg;
  logic [IW-1:0]        mag, norm;
  logic [$clog2(IW):0]  lz;
  logic signed [SW-1:0] scale;

  always_comb begin
    neg = SIGNED && x[IW-1];
    mag = neg ? (~x + 1'b1) : x;
    lz  = '0;
    for (int i = 0; i < IW; i++) begin
      if (mag[i]) lz = $bits(lz)'(IW - 1 - i);
    end
    norm  = mag << lz;
    scale = SW'(IW - 1) - SW'(lz);
  end

  posit_encode #(.N(N), .FW(IW-1)) u_enc (
    .is_zero(x == '0), .is_nar(1'b0), .sign(neg), .scale(scale),
    .frac(norm[IW-2:0]), .sticky(1'b0), .p(result)
  );

endmodule
