// tb_xposit_decoder: self-checking test of xposit_decoder.
//
// Every arithmetic instruction of the Xposit table (funct5 0x00-0x1B, fmt
// 0x2, funct3 0x0, opcode 0x0B) with random register fields, the four
// loads/stores with random offsets, and words that must be rejected (other
// opcodes, other fmt, funct5 above 0x1B, unused funct3). The expected
// register-file routing and the fields fixed at zero are written out per
// instruction below; words with a nonzero fixed field must be rejected. A time-based
// watchdog ends a hung run.
`include "tb_check.svh"
module tb_xposit_decoder;
  import posit_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  xposit_dec_t dec;

  xposit_decoder dut (.instr(instr), .dec(dec));

  // routing per funct5: "P" posit rd, "I" integer rd, "-" no rd; "i" = integer rs1
  string route [28] = '{"P", "P", "P", "P", "P", "P", "P", "-", "-", "-", "-", "P",
                        "I", "I", "I", "I", "Pi", "Pi", "Pi", "Pi", "P", "P", "P",
                        "I", "Pi", "I", "I", "I"};

  // fields the instruction table prints as 0x0: "2" rs2, "1" rs1, "d" rd
  string fixed [28] = '{"", "", "", "", "", "", "2", "d", "d", "21d", "21d", "21",
                        "2", "2", "2", "2", "2", "2", "2", "2", "", "", "",
                        "2", "2", "", "", ""};

  function automatic bit has(string s, byte c);
    for (int i = 0; i < s.len(); i++) if (s[i] == c) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    int n_rejected = 0;
    for (int f = 0; f < 28; f++) begin
      for (int k = 0; k < 40; k++) begin
        logic [4:0] rs1, rs2, rd;
        bit ok;
        rs1 = 5'($urandom); rs2 = 5'($urandom); rd = 5'($urandom);
        // in half of the trials the fixed fields hold their required zeros
        if (k % 2 == 0) begin
          if (has(fixed[f], "2")) rs2 = 0;
          if (has(fixed[f], "1")) rs1 = 0;
          if (has(fixed[f], "d")) rd = 0;
        end
        ok = !(has(fixed[f], "2") && rs2 != 0) && !(has(fixed[f], "1") && rs1 != 0) &&
             !(has(fixed[f], "d") && rd != 0);
        instr = {5'(f), 2'b10, rs2, rs1, 3'b000, rd, 7'h0B}; #1;
        `CHECK_EQ(dec.valid, ok, $sformatf("f5 %h valid with rs1 %0d rs2 %0d rd %0d", f, rs1, rs2, rd))
        if (!ok) begin
          n_rejected++;
          continue;
        end
        `CHECK_EQ(dec.cls, CLS_ARITH, "class")
        `CHECK_EQ(dec.op, posit_op_e'(f), "op")
        `CHECK_EQ({dec.rs1, dec.rs2, dec.rd}, {rs1, rs2, rd}, "fields")
        `CHECK_EQ(dec.rd_posit, route[f][0] == "P", $sformatf("f5 %h rd_posit", f))
        `CHECK_EQ(dec.rd_int, route[f][0] == "I", $sformatf("f5 %h rd_int", f))
        `CHECK_EQ(dec.rs1_int, route[f].len() == 2, $sformatf("f5 %h rs1_int", f))
      end
    end
    for (int k = 0; k < 200; k++) begin
      logic [11:0] imm;
      logic [4:0] rs1, rs2, rd;
      logic [2:0] f3;
      imm = 12'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom); rd = 5'($urandom);
      f3 = (k % 2) ? 3'h5 : 3'h1;
      instr = {imm, rs1, f3, rd, 7'h0B}; #1;
      `CHECK_EQ({dec.valid, dec.cls, dec.imm, dec.rs1, dec.rd}, {1'b1, CLS_LOAD, imm, rs1, rd}, "load")
      `CHECK_EQ({dec.dword, dec.rs1_int, dec.rd_posit, dec.rd_int}, {f3 == 3'h5, 1'b1, 1'b1, 1'b0}, "load flags")
      f3 = (k % 2) ? 3'h6 : 3'h3;
      instr = {imm[11:5], rs2, rs1, f3, imm[4:0], 7'h0B}; #1;
      `CHECK_EQ({dec.valid, dec.cls, dec.imm, dec.rs1, dec.rs2}, {1'b1, CLS_STORE, imm, rs1, rs2}, "store")
      `CHECK_EQ({dec.dword, dec.rs1_int, dec.rd_posit, dec.rd_int}, {f3 == 3'h6, 1'b1, 1'b0, 1'b0}, "store flags")
    end
    instr = {5'h00, 2'b10, 5'd1, 5'd2, 3'b000, 5'd3, 7'h33}; #1;
    `CHECK_EQ(dec.valid, 1'b0, "other opcode")
    instr = {5'h00, 2'b00, 5'd1, 5'd2, 3'b000, 5'd3, 7'h0B}; #1;
    `CHECK_EQ(dec.valid, 1'b0, "fmt 0")
    instr = {5'h1C, 2'b10, 5'd1, 5'd2, 3'b000, 5'd3, 7'h0B}; #1;
    `CHECK_EQ(dec.valid, 1'b0, "funct5 0x1C")
    instr = {12'h0, 5'd2, 3'h2, 5'd3, 7'h0B}; #1;
    `CHECK_EQ(dec.valid, 1'b0, "funct3 2")
    `CHECK_TRUE(n_rejected > 0, "words with a nonzero fixed field were tried")
    `TB_FINISH
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
