// tb_big_percival_top: end-to-end test of big_percival_top at its default
// parameters (posit64, 1024-bit quire, exact units).
//
// The testbench plays the rest of the core: it hands over Xposit instruction
// words with the integer rs1 value, collects integer write-backs, and models
// the data memory with random ready and response delays. The program:
//   1. builds constants with PCVT.S.L and checks them with PCVT.L.S;
//   2. runs the quire GEMM kernel C = alpha*A*B + beta*C on NI x NJ x NK
//      matrices stored as posit64 doubles in memory (PLD/PSD): per element
//      C *= beta, quire = C (QCLR, QMADD C*1), quire += (alpha*A[i][k])*B[k][j],
//      C = QROUND; the results are compared with a double-precision reference
//      in which every value is exact;
//   3. exercises PDIV, PSQRT, PLW/PSW, PLT, QNEG and an illegal word.
// Counted mechanisms (each must occur): loads, stores, quire MACs, quire
// rounding, integer write-backs, iterative-division stall cycles, square
// roots, illegal instructions, memory back-pressure cycles. A cycle watchdog
// ends a hung run.
`include "tb_check.svh"
module tb_big_percival_top;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NI = 4, NJ = 5, NK = 6;
  localparam logic [63:0] A_BASE = 64'h1000, B_BASE = 64'h2000, C_BASE = 64'h3000, S_BASE = 64'h100;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, illegal, busy;
  logic [31:0] instr;
  logic [63:0] int_rs1;
  logic int_wb_valid;
  logic [4:0] int_wb_rd;
  logic [63:0] int_wb_data;
  logic mem_req_valid, mem_req_ready = 0, mem_we, mem_rsp_valid = 0;
  logic [63:0] mem_addr, mem_wdata, mem_rdata;
  logic [1:0] mem_size;
  int cyc = 0;

  big_percival_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // ------------------------------------------------------------ counters
  int n_load = 0, n_store = 0, n_mac = 0, n_round = 0, n_intwb = 0, n_stall = 0;
  int n_sqrt = 0, n_illegal = 0, n_backpressure = 0;
  logic [63:0] int_regs [32];

  always @(posedge clk) begin
    if (int_wb_valid) begin
      int_regs[int_wb_rd] <= int_wb_data;
      n_intwb++;
    end
    if (illegal) n_illegal++;
    if (mem_req_valid && !mem_req_ready) n_backpressure++;
  end

  // ------------------------------------------------------------ memory model
  logic [63:0] mem [logic [60:0]];

  function automatic logic [63:0] rd_word(logic [63:0] addr);
    return mem.exists(addr[63:3]) ? mem[addr[63:3]] : 64'h0;
  endfunction

  initial begin
    mem_rdata = 0;
    forever begin
      @(negedge clk);
      if (mem_req_valid) begin
        repeat ($urandom_range(2, 0)) @(negedge clk);
        mem_req_ready = 1;
        @(negedge clk);
        mem_req_ready = 0;
        if (mem_we) begin
          logic [63:0] w;
          w = rd_word(mem_addr);
          if (mem_size == 2'd3) w = mem_wdata;
          else if (mem_addr[2]) w[63:32] = mem_wdata[31:0];
          else w[31:0] = mem_wdata[31:0];
          mem[mem_addr[63:3]] = w;
          n_store++;
        end else begin
          logic [63:0] w;
          repeat ($urandom_range(2, 0)) @(negedge clk);
          w = rd_word(mem_addr);
          mem_rdata = (mem_size == 2'd3) ? w : (mem_addr[2] ? {32'h0, w[63:32]} : {32'h0, w[31:0]});
          mem_rsp_valid = 1;
          @(negedge clk);
          mem_rsp_valid = 0;
          n_load++;
        end
      end
    end
  end

  // ------------------------------------------------------------ encodings
  function automatic logic [31:0] ar(logic [4:0] f5, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {f5, 2'b10, rs2, rs1, 3'h0, rd, 7'h0B};
  endfunction
  function automatic logic [31:0] pld(logic [4:0] rd, logic [4:0] rs1, logic [11:0] imm);
    return {imm, rs1, 3'h5, rd, 7'h0B};
  endfunction
  function automatic logic [31:0] plw(logic [4:0] rd, logic [4:0] rs1, logic [11:0] imm);
    return {imm, rs1, 3'h1, rd, 7'h0B};
  endfunction
  function automatic logic [31:0] psd(logic [4:0] rs2, logic [4:0] rs1, logic [11:0] imm);
    return {imm[11:5], rs2, rs1, 3'h6, imm[4:0], 7'h0B};
  endfunction
  function automatic logic [31:0] psw(logic [4:0] rs2, logic [4:0] rs1, logic [11:0] imm);
    return {imm[11:5], rs2, rs1, 3'h3, imm[4:0], 7'h0B};
  endfunction

  // hand one instruction over and wait until the datapath is idle again
  task automatic exec(logic [31:0] w, logic [63:0] rs1v = 0);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = w; int_rs1 = rs1v; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  // ------------------------------------------------------------ program
  real A [NI][NK], B [NK][NJ], C [NI][NJ], alpha, beta;

  initial begin
    int t0, tdiv;
    instr = 0; int_rs1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. constants through the integer conversions
    exec(ar(5'h12, 0, 0, 5'd3), 64'd1);              // p3 = 1.0   (PCVT.S.L)
    exec(ar(5'h12, 0, 0, 5'd8), -64'sd81);           // p8 = -81.0
    exec(ar(5'h0E, 0, 5'd8, 5'd10));                 // x10 = (long) p8
    @(negedge clk);
    `CHECK_EQ(int_regs[10], -64'sd81, "PCVT.L.S of PCVT.S.L(-81)")

    // 2. GEMM with the quire
    alpha = 1.5; beta = -0.75;
    mem[S_BASE[63:3]]     = from_real(alpha);
    mem[S_BASE[63:3] + 1] = from_real(beta);
    for (int i = 0; i < NI; i++) for (int k = 0; k < NK; k++) begin
      A[i][k] = real'(int'($urandom_range(40, 0)) - 20) / 4.0;
      mem[(A_BASE + 8 * (i * NK + k)) >> 3] = from_real(A[i][k]);
    end
    for (int k = 0; k < NK; k++) for (int j = 0; j < NJ; j++) begin
      B[k][j] = real'(int'($urandom_range(60, 0)) - 30) / 8.0;
      mem[(B_BASE + 8 * (k * NJ + j)) >> 3] = from_real(B[k][j]);
    end
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) begin
      C[i][j] = real'(int'($urandom_range(100, 0)) - 50) / 2.0;
      mem[(C_BASE + 8 * (i * NJ + j)) >> 3] = from_real(C[i][j]);
    end
    exec(pld(5'd1, 5'd0, 12'd0), S_BASE);            // p1 = alpha
    exec(pld(5'd2, 5'd0, 12'd8), S_BASE);            // p2 = beta
    for (int i = 0; i < NI; i++) begin
      for (int j = 0; j < NJ; j++) begin
        logic [63:0] ca;
        ca = C_BASE + 8 * (i * NJ + j);
        exec(pld(5'd7, 5'd0, 12'd0), ca);            // p7 = C[i][j]
        exec(ar(5'h02, 5'd2, 5'd7, 5'd7));           // p7 = p7 * beta
        exec(ar(5'h09, 0, 0, 0));                    // QCLR
        exec(ar(5'h07, 5'd3, 5'd7, 0));              // quire = C[i][j] * 1
        n_mac++;
        for (int k = 0; k < NK; k++) begin
          exec(pld(5'd4, 5'd0, 12'd0), A_BASE + 8 * (i * NK + k));
          exec(pld(5'd5, 5'd0, 12'd0), B_BASE + 8 * (k * NJ + j));
          exec(ar(5'h02, 5'd4, 5'd1, 5'd6));         // p6 = alpha * A[i][k]
          exec(ar(5'h07, 5'd5, 5'd6, 0));            // quire += p6 * B[k][j]
          n_mac++;
        end
        exec(ar(5'h0B, 0, 0, 5'd7));                 // p7 = QROUND
        n_round++;
        exec(psd(5'd7, 5'd0, 12'd0), ca);
      end
    end
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) begin
      real ref_c;
      ref_c = beta * C[i][j];
      for (int k = 0; k < NK; k++) ref_c += (alpha * A[i][k]) * B[k][j];
      `CHECK_EQ(rd_word(C_BASE + 8 * (i * NJ + j)), from_real(ref_c), $sformatf("GEMM C[%0d][%0d]", i, j))
    end

    // 3. division (stall), square root, word access, compare, QNEG
    exec(ar(5'h12, 0, 0, 5'd9), 64'd144);            // p9 = 144
    exec(ar(5'h12, 0, 0, 5'd11), 64'd7);             // p11 = 7
    t0 = cyc;
    exec(ar(5'h03, 5'd11, 5'd9, 5'd12));             // p12 = 144 / 7
    tdiv = cyc - t0;
    n_stall = tdiv - 4;
    `CHECK_TRUE(tdiv > 60, "division stalls the sequencer")
    exec(ar(5'h06, 0, 5'd9, 5'd13));                 // p13 = sqrt(144)
    n_sqrt++;
    exec(psd(5'd12, 5'd0, 12'd16), S_BASE);
    exec(psd(5'd13, 5'd0, 12'd24), S_BASE);
    `CHECK_TRUE(ulp_dist(rd_word(S_BASE + 16), from_real(144.0 / 7.0)) <= 64, "144/7 near the double value")
    `CHECK_EQ(rd_word(S_BASE + 24), from_real(12.0), "sqrt(144)")
    exec(psw(5'd8, 5'd0, 12'd36), S_BASE);           // high word of S+32
    exec(plw(5'd14, 5'd0, 12'd36), S_BASE);
    exec(ar(5'h17, 0, 5'd14, 5'd15));                // x15 = PMV.X.W p14
    @(negedge clk);
    `CHECK_EQ(int_regs[15], {{32{from_real(-81.0) >> 31 & 1'b1}}, from_real(-81.0) & 64'hffff_ffff} , "PSW/PLW low word, sign-extended")
    exec(ar(5'h1A, 5'd9, 5'd8, 5'd16));              // x16 = (-81 < 144)
    @(negedge clk);
    `CHECK_EQ(int_regs[16], 64'd1, "PLT")
    exec(ar(5'h0A, 0, 0, 0));                        // QNEG (quire holds the last C)
    exec(ar(5'h0B, 0, 0, 5'd17));
    exec(psd(5'd17, 5'd0, 12'd40), S_BASE);
    `CHECK_EQ(rd_word(S_BASE + 40), -rd_word(C_BASE + 8 * (NI * NJ - 1)), "QNEG")
    exec(32'h0000_0033);                             // not Xposit
    @(negedge clk);

    `CHECK_TRUE(n_load > 0, "loads happened")
    `CHECK_TRUE(n_store > 0, "stores happened")
    `CHECK_TRUE(n_mac > 0, "quire MACs happened")
    `CHECK_TRUE(n_round > 0, "quire rounding happened")
    `CHECK_TRUE(n_intwb > 0, "integer write-backs happened")
    `CHECK_TRUE(n_stall > 0, "division stall happened")
    `CHECK_TRUE(n_sqrt > 0, "square root happened")
    `CHECK_TRUE(n_illegal == 1, "one illegal instruction flagged")
    `CHECK_TRUE(n_backpressure > 0, "memory back-pressure happened")
    $display("loads=%0d stores=%0d macs=%0d rounds=%0d intwb=%0d stall_cycles=%0d sqrt=%0d illegal=%0d backpressure=%0d cycles=%0d",
             n_load, n_store, n_mac, n_round, n_intwb, n_stall, n_sqrt, n_illegal, n_backpressure, cyc);
    `TB_FINISH
  end

  initial begin
    wait (cyc == 200000);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
