// posit_encode: rounds sign x 1.frac x 2^scale (+ sticky) to an n-bit posit.
//
// The scale is clamped to [-4(n-2), 4(n-2)], so results never round to zero
// or NaR but saturate at minpos/maxpos. The regime is built by an arithmetic
// right shift of "10" (r >= 0) or "01" (r < 0) by the run length minus one, so
// the fill bit repeats the first regime bit. The exponent and fraction follow;
// the first n-1 bits form the posit body, the next bit is the guard and all
// lower bits together with the incoming sticky bit form the sticky. Rounding
// is to nearest, ties to even. A negative result is the 2's complement of the
// body. Purely combinational. Round-to-nearest-even with saturation is the
// posit standard's rule; the shift-based construction is this design's own.
module posit_encode #(
  parameter int N  = 64,
  parameter int SW = $clog2(N) + 6,
  parameter int FW = N                  // fraction bits below the hidden one
) (
  input  logic                 is_zero,
  input  logic                 is_nar,
  input  logic                 sign,
  input  logic signed [SW-1:0] scale,
  input  logic [FW-1:0]        frac,
  input  logic                 sticky,
  output logic [N-1:0]         p
);

  localparam int MAXS = 4 * (N - 2);
  localparam int EW   = 4 + FW + N;      // regime pair, exponent, fraction, pad

  logic signed [SW-1:0] sc;
  logic [FW-1:0]        fr;
  logic signed [SW-1:0] r;
  logic [SW-1:0]        shamt;
  logic [EW-1:0]        ext, sh;
  logic [N-2:0]         body;
  logic                 guard, stk, rup;

  always_comb begin
    sc = scale;
    fr = frac;
    if (scale > SW'(MAXS)) begin
      sc = SW'(MAXS);
      fr = '0;
    end else if (scale < -SW'(MAXS)) begin
      sc = -SW'(MAXS);
      fr = '0;
    end
    r     = sc >>> 2;
    shamt = (r >= 0) ? r : (-r - SW'(1));
    ext   = {(r >= 0) ? 2'b10 : 2'b01, sc[1:0], fr, {N{1'b0}}};
    sh    = EW'($signed(ext) >>> shamt);
    body  = sh[EW-1 -: N-1];
    guard = sh[EW-N];
    stk   = (|sh[EW-N-1:0]) | (sticky & (scale >= -SW'(MAXS)) & (scale <= SW'(MAXS)));
    rup   = guard & (stk | body[0]);
    body  = body + (N-1)'(rup);
    if (is_nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (is_zero) p = '0;
    else              p = sign ? (~{1'b0, body} + 1'b1) : {1'b0, body};
  end

endmodule
