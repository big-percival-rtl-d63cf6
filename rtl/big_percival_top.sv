// big_percival_top: the posit datapath of the Big-PERCIVAL RISC-V core.
//
// Big-PERCIVAL adds posit arithmetic (posit64 by default, with a 1024-bit
// quire) to an RV64 application core. This module holds the parts the posit
// extension adds: the Xposit decoder, the 32-entry posit register file, the
// Posit Arithmetic Unit (PAU) and the posit part of the load/store unit. The
// rest of the core (fetch, issue, scoreboard, integer register file, caches
// and MMU) is outside: the issue stage hands over one 32-bit instruction at a
// time together with the value of integer register rs1, and integer results
// come back on the int_wb_* port. Memory accesses leave on the mem_* port.
//
// Sequencing, one instruction at a time:
//   IDLE  instr_ready = 1; an instruction is accepted, decoded, and its posit
//         source registers and the integer rs1 value are captured. A word
//         that is not Xposit raises illegal for one cycle and is dropped.
//   ISSUE the PAU (arithmetic) or the posit LSU (loads/stores) is started.
//   WAIT  until the PAU's out_valid or the LSU's done; in that cycle the
//         result is written to the posit register file (rd_posit), or sent on
//         int_wb_* (rd_int), and the sequencer returns to IDLE.
// A one-cycle PAU operation therefore takes 3 cycles from acceptance to
// write-back, exact division N+3 and exact square root N+2.
// The block structure follows the paper's core diagram; the in-order
// one-at-a-time sequencing and the ports to the rest of the core are this
// design's choices (in the paper the base core's scoreboard issues to the PAU).
module big_percival_top
  import posit_pkg::*;
#(
  parameter int N              = 64,
  parameter int QW             = 16 * N,
  parameter int XLEN           = 64,
  parameter int NREGS          = 32,
  parameter bit QUIRE_EN       = 1'b1,
  parameter bit APPROX_MUL     = 1'b0,
  parameter bit APPROX_DIVSQRT = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  // instruction hand-over from the issue stage
  input  logic            instr_valid,
  output logic            instr_ready,
  input  logic [31:0]     instr,
  input  logic [XLEN-1:0] int_rs1,
  output logic            illegal,
  output logic            busy,
  // integer write-back
  output logic            int_wb_valid,
  output logic [4:0]      int_wb_rd,
  output logic [XLEN-1:0] int_wb_data,
  // memory port (to the data cache)
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output logic [XLEN-1:0] mem_addr,
  output logic            mem_we,
  output logic [1:0]      mem_size,
  output logic [63:0]     mem_wdata,
  input  logic            mem_rsp_valid,
  input  logic [63:0]     mem_rdata
);

  typedef enum logic [1:0] {T_IDLE, T_ISSUE, T_WAIT} tstate_e;
  tstate_e state;

  xposit_dec_t     dec, dec_q;
  logic [N-1:0]    rf_a, rf_b, src_a_q, src_b_q;
  logic [XLEN-1:0] int_rs1_q;

  xposit_decoder u_dec (.instr(instr), .dec(dec));

  // ------------------------------------------------------------ register file
  logic         rf_we;
  logic [N-1:0] rf_wdata;

  posit_regfile #(.N(N), .NREGS(NREGS)) u_rf (
    .clk(clk), .rst_n(rst_n),
    .raddr_a(dec.rs1[$clog2(NREGS)-1:0]), .raddr_b(dec.rs2[$clog2(NREGS)-1:0]),
    .rdata_a(rf_a), .rdata_b(rf_b),
    .we(rf_we), .waddr(dec_q.rd[$clog2(NREGS)-1:0]), .wdata(rf_wdata)
  );

  // ------------------------------------------------------------------- PAU
  logic            pau_in_valid, pau_in_ready, pau_out_valid;
  logic [XLEN-1:0] pau_a, pau_res;

  assign pau_a = dec_q.rs1_int ? int_rs1_q : XLEN'(src_a_q);

  posit_pau #(
    .N(N), .QW(QW), .XLEN(XLEN), .QUIRE_EN(QUIRE_EN),
    .APPROX_MUL(APPROX_MUL), .APPROX_DIVSQRT(APPROX_DIVSQRT)
  ) u_pau (
    .clk(clk), .rst_n(rst_n),
    .in_valid(pau_in_valid), .in_ready(pau_in_ready), .op(dec_q.op),
    .operand_a(pau_a), .operand_b(XLEN'(src_b_q)),
    .out_valid(pau_out_valid), .result(pau_res)
  );

  // ------------------------------------------------------------- posit LSU
  logic         lsu_req, lsu_done;
  logic [N-1:0] lsu_data;

  posit_lsu #(.XLEN(XLEN), .N(N)) u_lsu (
    .clk(clk), .rst_n(rst_n),
    .req_valid(lsu_req), .is_store(dec_q.cls == CLS_STORE), .dword(dec_q.dword),
    .base(int_rs1_q), .imm(dec_q.imm), .store_data(src_b_q),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_addr(mem_addr),
    .mem_we(mem_we), .mem_size(mem_size), .mem_wdata(mem_wdata),
    .mem_rsp_valid(mem_rsp_valid), .mem_rdata(mem_rdata),
    .done(lsu_done), .load_data(lsu_data)
  );

  // ------------------------------------------------------------- sequencer
  logic finish;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      dec_q     <= '0;
      src_a_q   <= '0;
      src_b_q   <= '0;
      int_rs1_q <= '0;
      illegal   <= 1'b0;
    end else begin
      illegal <= 1'b0;
      unique case (state)
        T_IDLE: if (instr_valid) begin
          if (dec.valid) begin
            dec_q     <= dec;
            src_a_q   <= rf_a;
            src_b_q   <= rf_b;
            int_rs1_q <= int_rs1;
            state     <= T_ISSUE;
          end else begin
            illegal <= 1'b1;
          end
        end
        T_ISSUE: state <= T_WAIT;
        T_WAIT:  if (finish) state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

  assign instr_ready  = (state == T_IDLE);
  assign busy         = (state != T_IDLE);
  assign pau_in_valid = (state == T_ISSUE) && (dec_q.cls == CLS_ARITH);
  assign lsu_req      = (state == T_ISSUE) && (dec_q.cls != CLS_ARITH);
  assign finish       = (state == T_WAIT) && ((dec_q.cls == CLS_ARITH) ? pau_out_valid : lsu_done);

  assign rf_we        = finish && dec_q.rd_posit;
  assign rf_wdata     = (dec_q.cls == CLS_LOAD) ? lsu_data : pau_res[N-1:0];
  assign int_wb_valid = finish && dec_q.rd_int;
  assign int_wb_rd    = dec_q.rd;
  assign int_wb_data  = pau_res;

  // The PAU is idle whenever the sequencer issues to it.
  assert property (@(posedge clk) disable iff (!rst_n) pau_in_valid |-> pau_in_ready);

endmodule
