// posit_div: exact posit division (PDIV.S) with a radix-2 non-restoring
// recurrence, one quotient bit per clock cycle.
//
// On start the operands are decoded and the partial remainder is set to
// R = Ma - Mb (significands 1.f). Each cycle the quotient bit is the inverted
// sign of R, and R becomes 2R - Mb when R >= 0 or 2R + Mb when R < 0; no
// restoring step is needed. After QB = N-1 bits the quotient lies in (0.5, 2)
// and the final remainder (R, or R + Mb if negative) gives the sticky bit, so
// posit_encode performs one correct rounding to nearest even.
// Timing: start is sampled on a clock edge; done pulses for one cycle N
// cycles later (N-1 iterations + 1 result cycle), with result valid in that
// cycle. NaR or a zero divisor gives NaR and 0 / x gives 0; these finish
// after one cycle. busy is high from start to done; start is ignored while
// busy. The paper states that the exact divider is non-restoring; latency,
// handshake and recurrence details are this design's choices.
module posit_div #(
  parameter int N = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] result
);

  localparam int SW   = $clog2(N) + 6;
  localparam int SIGW = N - 4;
  localparam int QB   = N - 1;          // quotient bits: 1 integer + N-2 fraction
  localparam int RW   = SIGW + 3;       // signed partial remainder width

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;

  logic za, zb, na, nb, sa, sb;
  logic signed [SW-1:0] ea, eb;
  logic [SIGW-1:0] ma, mb;

  posit_decode #(.N(N)) u_da (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ea), .sig(ma));
  posit_decode #(.N(N)) u_db (.p(b), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(eb), .sig(mb));

  logic signed [RW-1:0] rem, dvs;
  logic [QB-1:0]        q;
  logic [$clog2(QB):0]  cnt;
  logic                 sticky, r_sign, r_zero, r_nar;
  logic signed [SW-1:0] r_scale;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rem     <= '0;
      dvs     <= '0;
      q       <= '0;
      cnt     <= '0;
      sticky  <= 1'b0;
      r_sign  <= 1'b0;
      r_zero  <= 1'b0;
      r_nar   <= 1'b0;
      r_scale <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          r_sign  <= sa ^ sb;
          r_nar   <= na || nb || zb;
          r_zero  <= za;
          r_scale <= ea - eb;
          rem     <= $signed(RW'(ma)) - $signed(RW'(mb));
          dvs     <= $signed(RW'(mb));
          q       <= '0;
          cnt     <= '0;
          sticky  <= 1'b0;
          state   <= (na || nb || za || zb) ? S_DONE : S_RUN;
        end
        S_RUN: begin
          q   <= {q[QB-2:0], ~rem[RW-1]};
          rem <= rem[RW-1] ? ((rem <<< 1) + dvs) : ((rem <<< 1) - dvs);
          cnt <= cnt + 1'b1;
          if (cnt == ($bits(cnt))'(QB - 1)) begin
            sticky <= rem[RW-1] ? ((rem + dvs) != '0) : (rem != '0);
            state  <= S_DONE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Normalise the quotient: q in (0.5, 2) with its binary point after bit QB-1.
  logic signed [SW-1:0] e_res;
  logic [QB-2:0]        frac;
  always_comb begin
    if (q[QB-1]) begin
      e_res = r_scale;
      frac  = q[QB-2:0];
    end else begin
      e_res = r_scale - SW'(1);
      frac  = {q[QB-3:0], 1'b0};
    end
  end

  posit_encode #(.N(N), .FW(QB-1)) u_enc (
    .is_zero(r_zero), .is_nar(r_nar), .sign(r_sign), .scale(e_res),
    .frac(frac), .sticky(sticky), .p(result)
  );

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

endmodule
