// posit_quire_mac: fused multiply-accumulate into the quire (QMADD / QMSUB).
//
// The quire is a QW = 16n-bit 2's complement fixed-point number whose LSB
// weighs minpos^2 = 2^-(8(n-2)); for n = 64 this is 1 sign bit, 31 carry
// bits, 496 integer bits and 496 fraction bits, which allows 2^31 - 1
// accumulations of maxpos^2 without overflow. The exact product of the two
// significands (2*SIGW bits, binary point below bit 2*SIGW-2) is shifted to
// its place in the quire by scale_a + scale_b + 8(n-2), negated when the
// product is negative (or for QMSUB when positive) and added to the quire.
// No rounding takes place. A NaR operand or a NaR quire (1 followed by zeros)
// gives a NaR quire; a zero operand leaves the quire unchanged.
// Combinational: posit_quire registers the result. The quire size and the
// exact accumulation follow the paper and the posit standard; the shifter
// structure is this design's choice.
module posit_quire_mac #(
  parameter int N  = 64,
  parameter int QW = 16 * N
) (
  input  logic [QW-1:0] q_in,
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  input  logic          sub,
  output logic [QW-1:0] q_out
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;
  localparam int PW   = 2 * SIGW;
  localparam int QF   = 8 * (N - 2);
  localparam int FB   = PW - 2;              // fraction bits of the product
  localparam int XW   = QW + FB;

  logic za, zb, na, nb, sa, sb;
  logic signed [SW-1:0] ea, eb;
  logic [SIGW-1:0] ma, mb;

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));
  posit_decode #(.N(N)) u_db (.p(b), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(eb), .sig(mb));

  localparam logic [QW-1:0] QNAR = {1'b1, {(QW-1){1'b0}}};

  logic [PW-1:0]   prod;
  logic [SW-1:0]   sh;
  logic [XW-1:0]   wide;
  logic [QW-1:0]   term;
  logic            neg;

  always_comb begin
    prod = PW'(ma) * PW'(mb);
    sh   = SW'(ea + eb + SW'(QF));           // >= 0 for every pair of posits
    wide = XW'(prod) << sh;
    term = wide[XW-1:FB];
    neg  = sa ^ sb ^ sub;
    if (na || nb || (q_in == QNAR)) q_out = QNAR;
    else if (za || zb)               q_out = q_in;
    else if (neg)                    q_out = q_in - term;
    else                             q_out = q_in + term;
  end

endmodule
