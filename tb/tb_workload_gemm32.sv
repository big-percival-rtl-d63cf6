// tb_workload_gemm32: the PolyBench GEMM kernel C = alpha*A*B + beta*C on the
// posit32 build of the design: big_percival_top with N = 32, so a 32-entry
// posit32 register file, posit32 units and a 512-bit quire. Matrices are
// stored as 32-bit posit words, 4 bytes apart, and moved with PLW and PSW.
// Two variants of the kernel run, each on its own copy of C:
//   variant 0, with the quire: per C[i][j], C *= beta, quire = C, then
//     quire += (alpha*A[i][k]) * B[k][j] for all k (PMUL, QMADD), one QROUND;
//   variant 1, without the quire: PMUL and PADD, rounding every operation.
// The testbench plays the rest of the core and models a memory with 32-bit
// accesses. The data have short significands, so all intermediate values are
// exact posit32 numbers and both variants must give the reference exactly;
// the posit32 reference rounds the exact posit64 image of a value on its
// upper half (appending zeros to a posit keeps its value). Counted mechanisms
// (each must occur): quire MACs, quire roundings, PADD accumulations.
// NI x NJ x NK = 20 x 25 x 30 is the PolyBench MINI size of GEMM (a size from
// the benchmark suite; the original work also runs posit32 from MINI to LARGE).
`include "tb_check.svh"
module tb_workload_gemm32;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NI = 20, NJ = 25, NK = 30;
  localparam int NV = 2;                   // variants: quire, no quire
  localparam logic [63:0] A_BASE = 64'h10000, B_BASE = 64'h20000, C_BASE = 64'h30000,
                          S_BASE = 64'h100;

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

  big_percival_top #(.N(32)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  logic [63:0] int_regs [32];
  always @(posedge clk) if (int_wb_valid) int_regs[int_wb_rd] <= int_wb_data;

  // ------------------------------------------------------------ memory model
  logic [63:0] mem [logic [60:0]];

  function automatic logic [63:0] rd_word(logic [63:0] addr);
    return mem.exists(addr[63:3]) ? mem[addr[63:3]] : 64'h0;
  endfunction

  function automatic logic [31:0] rd32(logic [63:0] addr);
    logic [63:0] w;
    w = rd_word(addr);
    return addr[2] ? w[63:32] : w[31:0];
  endfunction

  function automatic void wr32(logic [63:0] addr, logic [31:0] v);
    logic [63:0] w;
    w = rd_word(addr);
    if (addr[2]) w[63:32] = v; else w[31:0] = v;
    mem[addr[63:3]] = w;
  endfunction

  // single-cycle ready, response one cycle later; 32-bit accesses
  initial begin
    mem_rdata = 0;
    forever begin
      @(negedge clk);
      if (mem_req_valid) begin
        mem_req_ready = 1;
        @(negedge clk);
        mem_req_ready = 0;
        if (mem_we) wr32(mem_addr, mem_wdata[31:0]);
        else begin
          mem_rdata = {32'h0, rd32(mem_addr)};
          mem_rsp_valid = 1;
          @(negedge clk);
          mem_rsp_valid = 0;
        end
      end
    end
  end

  // value rounded to posit32: round the exact posit64 image on its upper half
  function automatic logic [31:0] p32(real x);
    logic [63:0] p, m;
    logic [32:0] r;
    p = from_real(x);
    if (p == 64'h0 || p == nar()) return p[63:32];
    m = p[63] ? -p : p;
    r = {1'b0, m[63:32]} + 33'(m[31] && (m[30:0] != 0 || m[32]));
    if (r[31:0] == 32'h0) r = 33'd1;
    if (r[31]) r = 33'h7fff_ffff;
    return p[63] ? -r[31:0] : r[31:0];
  endfunction

  // ------------------------------------------------------------ encodings
  localparam logic [4:0] F_PADD = 5'h00, F_PMUL = 5'h02, F_QMADD = 5'h07,
                         F_QCLR = 5'h09, F_QROUND = 5'h0B, F_CVT_S_L = 5'h12;

  function automatic logic [31:0] ar(logic [4:0] f5, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {f5, 2'b10, rs2, rs1, 3'h0, rd, 7'h0B};
  endfunction
  function automatic logic [31:0] plw(logic [4:0] rd);
    return {12'd0, 5'd1, 3'h1, rd, 7'h0B};
  endfunction
  function automatic logic [31:0] psw(logic [4:0] rs2);
    return {7'd0, rs2, 5'd1, 3'h3, 5'd0, 7'h0B};
  endfunction

  task automatic exec(logic [31:0] w, logic [63:0] rs1v = 0);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = w; int_rs1 = rs1v; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
  endtask

  // posit register use: p1 = alpha, p2 = beta, p3 = 1.0, p4/p5 operands,
  // p6 = alpha*A[i][k] and products, p7 = C[i][j]
  int n_mac = 0, n_round = 0, n_padd = 0;

  function automatic logic [63:0] aa(int i, int k); return A_BASE + 4 * (i * NK + k); endfunction
  function automatic logic [63:0] ba(int k, int j); return B_BASE + 4 * (k * NJ + j); endfunction
  function automatic logic [63:0] ca(int v, int i, int j); return C_BASE + 64'h2000 * v + 4 * (i * NJ + j); endfunction

  // C[i][j] = round(C[i][j] + sum_{k0 <= k < k1} alpha*A[i][k]*B[k][j])
  task automatic quire_elem(int v, int i, int j, int k0, int k1);
    exec(plw(5'd7), ca(v, i, j));
    exec(ar(F_QCLR, 0, 0, 0));
    exec(ar(F_QMADD, 5'd3, 5'd7, 0));                 // quire = C[i][j]
    for (int k = k0; k < k1; k++) begin
      exec(plw(5'd4), aa(i, k));
      exec(plw(5'd5), ba(k, j));
      exec(ar(F_PMUL, 5'd4, 5'd1, 5'd6));             // p6 = alpha * A[i][k]
      exec(ar(F_QMADD, 5'd5, 5'd6, 0));               // quire += p6 * B[k][j]
      n_mac++;
    end
    exec(ar(F_QROUND, 0, 0, 5'd7));
    n_round++;
    exec(psw(5'd7), ca(v, i, j));
  endtask

  task automatic scale_beta(int v, int i, int j);
    exec(plw(5'd7), ca(v, i, j));
    exec(ar(F_PMUL, 5'd2, 5'd7, 5'd7));               // C[i][j] *= beta
    exec(psw(5'd7), ca(v, i, j));
  endtask

  real A [NI][NK], B [NK][NJ], C [NI][NJ], alpha, beta;

  initial begin
    instr = 0; int_rs1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    alpha = 1.5; beta = -0.75;
    wr32(S_BASE, p32(alpha));
    wr32(S_BASE + 4, p32(beta));
    for (int i = 0; i < NI; i++) for (int k = 0; k < NK; k++) begin
      A[i][k] = real'(int'($urandom_range(40, 0)) - 20) / 4.0;
      wr32(aa(i, k), p32(A[i][k]));
    end
    for (int k = 0; k < NK; k++) for (int j = 0; j < NJ; j++) begin
      B[k][j] = real'(int'($urandom_range(60, 0)) - 30) / 8.0;
      wr32(ba(k, j), p32(B[k][j]));
    end
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) begin
      C[i][j] = real'(int'($urandom_range(100, 0)) - 50) / 2.0;
      for (int v = 0; v < NV; v++) wr32(ca(v, i, j), p32(C[i][j]));
    end

    exec(plw(5'd1), S_BASE);                          // p1 = alpha
    exec(plw(5'd2), S_BASE + 4);                      // p2 = beta
    exec(ar(F_CVT_S_L, 0, 0, 5'd3), 64'd1);           // p3 = 1.0

    // variant 0: quire, one rounding per element
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) begin
      scale_beta(0, i, j);
      quire_elem(0, i, j, 0, NK);
    end

    // variant 1: no quire
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) begin
      exec(plw(5'd7), ca(1, i, j));
      exec(ar(F_PMUL, 5'd2, 5'd7, 5'd7));
      for (int k = 0; k < NK; k++) begin
        exec(plw(5'd4), aa(i, k));
        exec(plw(5'd5), ba(k, j));
        exec(ar(F_PMUL, 5'd4, 5'd1, 5'd6));
        exec(ar(F_PMUL, 5'd5, 5'd6, 5'd6));
        exec(ar(F_PADD, 5'd6, 5'd7, 5'd7));
        n_padd++;
      end
      exec(psw(5'd7), ca(1, i, j));
    end

    for (int v = 0; v < NV; v++)
      for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) begin
        real ref_c;
        ref_c = beta * C[i][j];
        for (int k = 0; k < NK; k++) ref_c += (alpha * A[i][k]) * B[k][j];
        `CHECK_EQ(rd32(ca(v, i, j)), p32(ref_c), $sformatf("variant %0d C[%0d][%0d]", v, i, j))
      end
    `CHECK_TRUE(n_mac > 0, "quire MACs happened")
    `CHECK_TRUE(n_round > 0, "quire roundings happened")
    `CHECK_TRUE(n_padd > 0, "PADD accumulations happened")
    $display("NI=%0d NJ=%0d NK=%0d macs=%0d rounds=%0d padds=%0d cycles=%0d",
             NI, NJ, NK, n_mac, n_round, n_padd, cyc);
    `TB_FINISH
  end

  initial begin
    wait (cyc == 30000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
