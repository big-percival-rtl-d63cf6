// posit_sqrt: exact posit square root (PSQRT.S) with a non-restoring
// digit-by-digit recurrence, one root bit per clock cycle.
//
// The radicand is decoded; an odd scale is made even by doubling the
// significand, so the significand lies in [1,4) and the result scale is half
// the input scale. The significand is widened to a 2*QB-bit integer and the
// integer square root is taken two radicand bits per cycle: with a signed
// remainder R and partial root Q, R becomes 4R+d-(4Q+1) when R >= 0 and
// 4R+d+(4Q+3) when R < 0, and the new root bit is the inverted sign of R.
// The final remainder (corrected when negative) gives the sticky bit, so the
// rounding to nearest even in posit_encode is exact.
// Timing: start sampled on a clock edge; done pulses one cycle after the
// QB = N-2 iterations, i.e. N-1 cycles after start. Negative radicands and NaR
// give NaR and 0 gives 0 after one cycle. The paper says the exact square root
// uses a non-restoring algorithm; the rest is this design's choice.
module posit_sqrt #(
  parameter int N = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] a,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] result
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;
  localparam int QB   = SIGW + 2;       // root bits: 1 integer + SIGW+1 fraction
  localparam int MW   = 2 * QB;         // radicand bits
  localparam int RW   = QB + 4;         // signed remainder width

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;

  logic za, na, sa;
  logic signed [SW-1:0] ea;
  logic [SIGW-1:0] ma;

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));

  logic [MW-1:0]        m;
  logic signed [RW-1:0] rem, rem_n;
  logic [QB-1:0]        q;
  logic [$clog2(QB):0]  cnt;
  logic                 r_zero, r_nar;
  logic signed [SW-1:0] r_scale;
  logic [SIGW:0]        s_in;

  always_comb begin
    // odd scale: take one factor of two into the significand
    s_in = ea[0] ? {ma, 1'b0} : {1'b0, ma};
    if (!rem[RW-1])
      rem_n = (rem <<< 2) + $signed(RW'(m[MW-1 -: 2])) - $signed(RW'({q, 2'b01}));
    else
      rem_n = (rem <<< 2) + $signed(RW'(m[MW-1 -: 2])) + $signed(RW'({q, 2'b11}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      m       <= '0;
      rem     <= '0;
      q       <= '0;
      cnt     <= '0;
      r_zero  <= 1'b0;
      r_nar   <= 1'b0;
      r_scale <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          r_nar   <= na || (sa && !za);
          r_zero  <= za;
          r_scale <= (ea - $signed(SW'(ea[0]))) >>> 1;
          m       <= MW'(s_in) << (SIGW + 3);
          rem     <= '0;
          q       <= '0;
          cnt     <= '0;
          state   <= (na || za || sa) ? S_DONE : S_RUN;
        end
        S_RUN: begin
          rem <= rem_n;
          q   <= {q[QB-2:0], ~rem_n[RW-1]};
          m   <= m << 2;
          cnt <= cnt + 1'b1;
          if (cnt == ($bits(cnt))'(QB - 1)) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Final remainder, restored when negative, decides the sticky bit.
  logic sticky;
  always_comb begin
    if (rem[RW-1]) sticky = (rem + $signed(RW'({q, 1'b1}))) != '0;
    else           sticky = (rem != '0);
  end

  posit_encode #(.N(N), .FW(QB-1)) u_enc (
    .is_zero(r_zero), .is_nar(r_nar), .sign(1'b0), .scale(r_scale),
    .frac(q[QB-2:0]), .sticky(sticky), .p(result)
  );

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

endmodule
