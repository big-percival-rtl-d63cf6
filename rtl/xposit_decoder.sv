// xposit_decoder: decoder for the Xposit custom RISC-V extension.
//
// Recognises major opcode 0x0B (custom-0). funct3 selects PLW (0x1), PLD
// (0x5), PSW (0x3), PSD (0x6) or the arithmetic group (0x0); arithmetic
// instructions carry fmt = 2'b10 in bits 26:25 and the operation in funct5
// (bits 31:27, values 0x00 to 0x1B), which is passed on unchanged as the PAU
// operation. Load offsets are bits 31:20, store offsets bits 31:25 and 11:7.
// The decoder also says whether rs1 comes from the integer register file
// (conversions from integers, PMV.W.X, load/store base) and whether the result
// goes to the integer register file (conversions to integers, PMV.X.W,
// comparisons), to the posit register file, or nowhere (quire updates,
// stores). Register fields that the instruction table fixes at zero (rs2 of
// one-operand instructions, rs1 of QCLR/QNEG/QROUND, rd of QMADD/QMSUB/QCLR/
// QNEG) must be zero. Anything else has valid = 0. Combinational. The
// encodings are the extension's; the register-file routing follows the
// instruction semantics, and rejecting nonzero fixed fields is this design's
// reading of the table.
module xposit_decoder
  import posit_pkg::*;
(
  input  logic [31:0]  instr,
  output xposit_dec_t  dec
);

  logic [4:0] f5;
  assign f5 = instr[31:27];

  // Fields the instruction table fixes at 0x0: rs2 of the one-operand
  // instructions, rs1 of QCLR/QNEG/QROUND, rd of the quire updates.
  logic rs2_fixed, rs1_fixed, rd_fixed, fixed_zero_ok;
  always_comb begin
    rs2_fixed = (f5 == OP_PSQRT) || (f5 >= OP_QCLR && f5 <= OP_LU2P) ||
                (f5 == OP_PMV_X_W) || (f5 == OP_PMV_W_X);
    rs1_fixed = (f5 >= OP_QCLR && f5 <= OP_QROUND);
    rd_fixed  = (f5 >= OP_QMADD && f5 <= OP_QNEG);
    fixed_zero_ok = !(rs2_fixed && instr[24:20] != 5'd0) &&
                    !(rs1_fixed && instr[19:15] != 5'd0) &&
                    !(rd_fixed  && instr[11:7]  != 5'd0);
  end

  always_comb begin
    dec          = '0;
    dec.op       = posit_op_e'(f5);
    dec.rs1      = instr[19:15];
    dec.rs2      = instr[24:20];
    dec.rd       = instr[11:7];
    if (instr[6:0] == XPOSIT_OPCODE) begin
      unique case (instr[14:12])
        F3_PLW, F3_PLD: begin
          dec.valid    = 1'b1;
          dec.cls      = CLS_LOAD;
          dec.imm      = instr[31:20];
          dec.dword    = (instr[14:12] == F3_PLD);
          dec.rs1_int  = 1'b1;
          dec.rd_posit = 1'b1;
        end
        F3_PSW, F3_PSD: begin
          dec.valid    = 1'b1;
          dec.cls      = CLS_STORE;
          dec.imm      = {instr[31:25], instr[11:7]};
          dec.dword    = (instr[14:12] == F3_PSD);
          dec.rs1_int  = 1'b1;
        end
        F3_ARITH: begin
          if (instr[26:25] == XPOSIT_FMT && f5 <= OP_PLE && fixed_zero_ok) begin
            dec.valid = 1'b1;
            dec.cls   = CLS_ARITH;
            unique case (posit_op_e'(f5))
              OP_I2P, OP_U2P, OP_L2P, OP_LU2P, OP_PMV_W_X: begin
                dec.rs1_int  = 1'b1;
                dec.rd_posit = 1'b1;
              end
              OP_P2I, OP_P2U, OP_P2L, OP_P2LU, OP_PMV_X_W, OP_PEQ, OP_PLT, OP_PLE:
                dec.rd_int = 1'b1;
              OP_QMADD, OP_QMSUB, OP_QCLR, OP_QNEG: ;
              default: dec.rd_posit = 1'b1;
            endcase
          end
        end
        default: ;
      endcase
    end
  end

endmodule
