// posit_pau: the Posit Arithmetic Unit (PAU) of Big-PERCIVAL.
//
// The PAU takes one operation at a time (valid/ready) with two XLEN-bit
// operands: posits in the low N bits, or an integer in operand_a for the
// integer-to-posit conversions and PMV.W.X. All units see the operands in
// parallel and a multiplexer picks the result selected by op:
//   - ADD (PADD/PSUB), MUL, DIV, SQRT; MUL and DIV/SQRT are exact or
//     logarithm-approximate according to APPROX_MUL / APPROX_DIVSQRT;
//   - conversions P2I, P2U, P2L, P2LU, I2P, U2P, L2P, LU2P;
//   - PMIN/PMAX/PEQ/PLT/PLE, which compare posits as 2's complement
//     integers, sign injection (PSGNJ/PSGNJN/PSGNJX: rs1 or its negation, so
//     that its sign becomes rs2's, not rs2's, or the xor of both), moves;
//   - when QUIRE_EN, the QW-bit quire with MAC (QMADD/QMSUB), QCLR, QNEG and
//     Q2P (QROUND). Quire updates produce a result of 0 that is not written.
// Timing: in_ready is high when idle. Every operation except the exact
// division and square root finishes in one cycle: out_valid pulses in the
// cycle after the operation is accepted, with result held until the next
// operation. Exact DIV takes N+1 cycles and exact SQRT N cycles from accept to
// out_valid. There is no output back-pressure. Posit results are
// zero-extended to XLEN, 32-bit integer results sign-extended.
// The unit list, the options and the 64-bit output follow the paper; the
// handshake, latencies and the sign-injection and move semantics for posits
// are this design's choices.
module posit_pau
  import posit_pkg::*;
#(
  parameter int N              = 64,
  parameter int QW             = 16 * N,
  parameter int XLEN           = 64,
  parameter bit QUIRE_EN       = 1'b1,
  parameter bit APPROX_MUL     = 1'b0,
  parameter bit APPROX_DIVSQRT = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  posit_op_e       op,
  input  logic [XLEN-1:0] operand_a,
  input  logic [XLEN-1:0] operand_b,
  output logic            out_valid,
  output logic [XLEN-1:0] result
);

  logic [N-1:0] pa, pb;
  assign pa = operand_a[N-1:0];
  assign pb = operand_b[N-1:0];

  // ---------------------------------------------------------------- units
  logic [N-1:0] r_add, r_mul, r_div, r_sqrt, r_q2p;
  logic [N-1:0] r_i2p, r_u2p, r_l2p, r_lu2p;
  logic [XLEN-1:0] r_p2i, r_p2u, r_p2l, r_p2lu;
  logic div_busy, div_done, sqrt_busy, sqrt_done, start_div, start_sqrt;

  posit_add #(.N(N)) u_add (.a(pa), .b(pb), .sub(op == OP_PSUB), .result(r_add));

  if (APPROX_MUL) begin : g_mul_approx
    posit_mul_approx #(.N(N)) u_mul (.a(pa), .b(pb), .result(r_mul));
  end else begin : g_mul_exact
    posit_mul #(.N(N)) u_mul (.a(pa), .b(pb), .result(r_mul));
  end

  if (APPROX_DIVSQRT) begin : g_divsqrt_approx
    posit_div_approx  #(.N(N)) u_div  (.a(pa), .b(pb), .result(r_div));
    posit_sqrt_approx #(.N(N)) u_sqrt (.a(pa), .result(r_sqrt));
    assign div_busy  = 1'b0;
    assign div_done  = 1'b0;
    assign sqrt_busy = 1'b0;
    assign sqrt_done = 1'b0;
  end else begin : g_divsqrt_exact
    posit_div  #(.N(N)) u_div  (.clk(clk), .rst_n(rst_n), .start(start_div), .a(pa), .b(pb),
                                .busy(div_busy), .done(div_done), .result(r_div));
    posit_sqrt #(.N(N)) u_sqrt (.clk(clk), .rst_n(rst_n), .start(start_sqrt), .a(pa),
                                .busy(sqrt_busy), .done(sqrt_done), .result(r_sqrt));
  end

  posit_to_int #(.N(N), .IW(32), .SIGNED(1'b1), .XLEN(XLEN)) u_p2i  (.a(pa), .result(r_p2i));
  posit_to_int #(.N(N), .IW(32), .SIGNED(1'b0), .XLEN(XLEN)) u_p2u  (.a(pa), .result(r_p2u));
  posit_to_int #(.N(N), .IW(64), .SIGNED(1'b1), .XLEN(XLEN)) u_p2l  (.a(pa), .result(r_p2l));
  posit_to_int #(.N(N), .IW(64), .SIGNED(1'b0), .XLEN(XLEN)) u_p2lu (.a(pa), .result(r_p2lu));
  int_to_posit #(.N(N), .IW(32), .SIGNED(1'b1)) u_i2p  (.x(operand_a[31:0]), .result(r_i2p));
  int_to_posit #(.N(N), .IW(32), .SIGNED(1'b0)) u_u2p  (.x(operand_a[31:0]), .result(r_u2p));
  int_to_posit #(.N(N), .IW(64), .SIGNED(1'b1)) u_l2p  (.x(operand_a[63:0]), .result(r_l2p));
  int_to_posit #(.N(N), .IW(64), .SIGNED(1'b0)) u_lu2p (.x(operand_a[63:0]), .result(r_lu2p));

  // ---------------------------------------------------------------- quire
  logic accept;
  assign accept = in_valid && in_ready;

  if (QUIRE_EN) begin : g_quire
    logic [QW-1:0] q, q_mac;
    posit_quire_mac #(.N(N), .QW(QW)) u_mac (.q_in(q), .a(pa), .b(pb), .sub(op == OP_QMSUB), .q_out(q_mac));
    posit_quire #(.QW(QW)) u_quire (
      .clk(clk), .rst_n(rst_n),
      .clr(accept && op == OP_QCLR),
      .neg(accept && op == OP_QNEG),
      .acc_we(accept && (op == OP_QMADD || op == OP_QMSUB)),
      .acc_in(q_mac), .q(q)
    );
    posit_q2p #(.N(N), .QW(QW)) u_q2p (.q(q), .result(r_q2p));
  end else begin : g_no_quire
    assign r_q2p = '0;
  end

  // ------------------------------------------------- simple posit operations
  logic         lt, eq, want_neg;
  logic [N-1:0] neg_a;
  always_comb begin
    lt    = $signed(pa) < $signed(pb);
    eq    = (pa == pb);
    neg_a = ~pa + 1'b1;
    unique case (op)
      OP_PSGNJN: want_neg = ~pb[N-1];
      OP_PSGNJX: want_neg = pa[N-1] ^ pb[N-1];
      default:   want_neg = pb[N-1];
    endcase
  end

  // ------------------------------------------------------- result selection
  logic [XLEN-1:0] comb_res;
  always_comb begin
    comb_res = '0;
    unique case (op)
      OP_PADD, OP_PSUB: comb_res = XLEN'(r_add);
      OP_PMUL:          comb_res = XLEN'(r_mul);
      OP_PDIV:          comb_res = XLEN'(r_div);
      OP_PSQRT:         comb_res = XLEN'(r_sqrt);
      OP_PMIN:          comb_res = XLEN'(lt ? pa : pb);
      OP_PMAX:          comb_res = XLEN'(lt ? pb : pa);
      OP_QROUND:        comb_res = XLEN'(r_q2p);
      OP_P2I:           comb_res = r_p2i;
      OP_P2U:           comb_res = r_p2u;
      OP_P2L:           comb_res = r_p2l;
      OP_P2LU:          comb_res = r_p2lu;
      OP_I2P:           comb_res = XLEN'(r_i2p);
      OP_U2P:           comb_res = XLEN'(r_u2p);
      OP_L2P:           comb_res = XLEN'(r_l2p);
      OP_LU2P:          comb_res = XLEN'(r_lu2p);
      OP_PSGNJ, OP_PSGNJN, OP_PSGNJX:
                        comb_res = XLEN'((pa[N-1] != want_neg) ? neg_a : pa);
      OP_PMV_X_W:       comb_res = XLEN'($signed(pa));
      OP_PMV_W_X:       comb_res = XLEN'(pa);
      OP_PEQ:           comb_res = XLEN'(eq);
      OP_PLT:           comb_res = XLEN'(lt);
      OP_PLE:           comb_res = XLEN'(lt || eq);
      default:          comb_res = '0;
    endcase
  end

  // ------------------------------------------------------------- sequencing
  typedef enum logic {P_IDLE, P_ITER} pstate_e;
  pstate_e   state;
  posit_op_e op_q;
  logic      iterative;

  assign iterative  = !APPROX_DIVSQRT && (op == OP_PDIV || op == OP_PSQRT);
  assign start_div  = accept && !APPROX_DIVSQRT && op == OP_PDIV;
  assign start_sqrt = accept && !APPROX_DIVSQRT && op == OP_PSQRT;
  assign in_ready   = (state == P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= P_IDLE;
      op_q      <= OP_PADD;
      out_valid <= 1'b0;
      result    <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        P_IDLE: if (accept) begin
          op_q <= op;
          if (iterative) begin
            state <= P_ITER;
          end else begin
            result    <= comb_res;
            out_valid <= 1'b1;
          end
        end
        P_ITER: if ((op_q == OP_PDIV && div_done) || (op_q == OP_PSQRT && sqrt_done)) begin
          result    <= XLEN'((op_q == OP_PDIV) ? r_div : r_sqrt);
          out_valid <= 1'b1;
          state     <= P_IDLE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  // An iterative unit is only started from the idle state.
  assert property (@(posedge clk) disable iff (!rst_n) start_div |-> !div_busy);
  assert property (@(posedge clk) disable iff (!rst_n) start_sqrt |-> !sqrt_busy);

endmodule
