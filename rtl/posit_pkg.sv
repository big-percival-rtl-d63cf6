// posit_pkg: types and constants shared by the Big-PERCIVAL posit datapath.
//
// The operation codes are the funct5 field (instruction bits 31:27) of the
// Xposit arithmetic instructions, so the decoder can pass that field straight
// to the Posit Arithmetic Unit (PAU). The load/store codes are internal and
// never reach the PAU. The encodings of the instruction fields (opcode 0x0B,
// funct3 values, fmt = 2'b10 in bits 26:25) are those of the Xposit extension.
// The quire geometry (16n bits, LSB weighing minpos^2) follows the posit
// standard; the PAU operation timing is this design's own choice.
package posit_pkg;

  // Xposit major opcode (custom-0) and funct3 values.
  localparam logic [6:0] XPOSIT_OPCODE = 7'h0B;
  localparam logic [2:0] F3_ARITH = 3'h0;
  localparam logic [2:0] F3_PLW   = 3'h1;
  localparam logic [2:0] F3_PSW   = 3'h3;
  localparam logic [2:0] F3_PLD   = 3'h5;
  localparam logic [2:0] F3_PSD   = 3'h6;
  localparam logic [1:0] XPOSIT_FMT = 2'h2;

  // PAU operations = funct5 of the arithmetic instructions.
  typedef enum logic [4:0] {
    OP_PADD    = 5'h00,
    OP_PSUB    = 5'h01,
    OP_PMUL    = 5'h02,
    OP_PDIV    = 5'h03,
    OP_PMIN    = 5'h04,
    OP_PMAX    = 5'h05,
    OP_PSQRT   = 5'h06,
    OP_QMADD   = 5'h07,
    OP_QMSUB   = 5'h08,
    OP_QCLR    = 5'h09,
    OP_QNEG    = 5'h0A,
    OP_QROUND  = 5'h0B,
    OP_P2I     = 5'h0C,  // PCVT.W.S
    OP_P2U     = 5'h0D,  // PCVT.WU.S
    OP_P2L     = 5'h0E,  // PCVT.L.S
    OP_P2LU    = 5'h0F,  // PCVT.LU.S
    OP_I2P     = 5'h10,  // PCVT.S.W
    OP_U2P     = 5'h11,  // PCVT.S.WU
    OP_L2P     = 5'h12,  // PCVT.S.L
    OP_LU2P    = 5'h13,  // PCVT.S.LU
    OP_PSGNJ   = 5'h14,
    OP_PSGNJN  = 5'h15,
    OP_PSGNJX  = 5'h16,
    OP_PMV_X_W = 5'h17,  // posit register -> integer register
    OP_PMV_W_X = 5'h18,  // integer register -> posit register
    OP_PEQ     = 5'h19,
    OP_PLT     = 5'h1A,
    OP_PLE     = 5'h1B
  } posit_op_e;

  typedef enum logic [1:0] {
    CLS_ARITH = 2'd0,
    CLS_LOAD  = 2'd1,
    CLS_STORE = 2'd2
  } xposit_class_e;

  // Decoded Xposit instruction.
  typedef struct packed {
    logic               valid;      // an Xposit instruction
    xposit_class_e      cls;
    posit_op_e          op;
    logic [4:0]         rs1;
    logic [4:0]         rs2;
    logic [4:0]         rd;
    logic [11:0]        imm;        // load/store offset
    logic               dword;      // PLD/PSD (64-bit access)
    logic               rs1_int;    // rs1 read from the integer register file
    logic               rd_int;     // result written to the integer register file
    logic               rd_posit;   // result written to the posit register file
  } xposit_dec_t;

  // Largest |scale| of an n-bit posit with es = 2: maxpos = 2^(4(n-2)).
  function automatic int max_scale(int n);
    return 4 * (n - 2);
  endfunction

  // Quire fraction bits: its LSB weighs minpos^2 = 2^-(8(n-2)).
  function automatic int quire_frac_bits(int n);
    return 8 * (n - 2);
  endfunction

endpackage
