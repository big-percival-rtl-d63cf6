// tb_workload_cholesky: the PolyBench Cholesky kernel run as a posit64
// instruction program on big_percival_top at its default parameters.
//
// The testbench plays the rest of the core, as tb_big_percival_top does, and
// models the data memory. The NS x NS symmetric positive definite matrix
// A = M^T M + NS*I (small integer entries of M) is factored in place, row by
// row, into its lower Cholesky factor L, as the PolyBench kernel does:
//   for j < i:  A[i][j] = (A[i][j] - sum_{k<j} A[i][k] A[j][k]) / A[j][j]
//               (QCLR, QMADD A[i][j]*1, QMSUB per k, QROUND, PDIV, PSD)
//   A[i][i] = sqrt(A[i][i] - sum_{k<i} A[i][k]^2)    (quire, QROUND, PSQRT)
// Each sum is accumulated exactly in the quire and rounded once.
// Checks: L[0][0] = sqrt(A[0][0]) to double precision, and L L^T, formed in
// double precision from the posit results, equal to A within 1e-12 of the
// largest entry of A. Counted mechanisms (each must occur): square roots,
// divisions, quire MACs.
// NS = 40 is the PolyBench MINI size of this kernel (a size from the
// benchmark suite, not stated in the original work, which runs MINI to LARGE).
`include "tb_check.svh"
module tb_workload_cholesky;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NS = 40;
  localparam logic [63:0] A_BASE = 64'h10000;

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

  logic [63:0] int_regs [32];
  always @(posedge clk) if (int_wb_valid) int_regs[int_wb_rd] <= int_wb_data;

  // ------------------------------------------------------------ memory model
  logic [63:0] mem [logic [60:0]];

  function automatic logic [63:0] rd_word(logic [63:0] addr);
    return mem.exists(addr[63:3]) ? mem[addr[63:3]] : 64'h0;
  endfunction

  // single-cycle ready, response one cycle later (64-bit accesses only)
  initial begin
    mem_rdata = 0;
    forever begin
      @(negedge clk);
      if (mem_req_valid) begin
        mem_req_ready = 1;
        @(negedge clk);
        mem_req_ready = 0;
        if (mem_we) mem[mem_addr[63:3]] = mem_wdata;
        else begin
          mem_rdata = rd_word(mem_addr);
          mem_rsp_valid = 1;
          @(negedge clk);
          mem_rsp_valid = 0;
        end
      end
    end
  end

  // ------------------------------------------------------------ encodings
  localparam logic [4:0] F_PDIV = 5'h03, F_PSQRT = 5'h06, F_QMADD = 5'h07, F_QMSUB = 5'h08,
                         F_QCLR = 5'h09, F_QROUND = 5'h0B, F_CVT_S_L = 5'h12;

  function automatic logic [31:0] ar(logic [4:0] f5, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {f5, 2'b10, rs2, rs1, 3'h0, rd, 7'h0B};
  endfunction
  function automatic logic [31:0] pld(logic [4:0] rd);
    return {12'd0, 5'd1, 3'h5, rd, 7'h0B};
  endfunction
  function automatic logic [31:0] psd(logic [4:0] rs2);
    return {7'd0, rs2, 5'd1, 3'h6, 5'd0, 7'h0B};
  endfunction

  task automatic exec(logic [31:0] w, logic [63:0] rs1v = 0);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = w; int_rs1 = rs1v; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
  endtask

  int n_sqrt = 0, n_div = 0, n_mac = 0;

  // posit register use: p3 = 1.0, p4/p5 operands, p6 result, p7 = A[j][j]
  real A [NS][NS], M [NS][NS];

  initial begin
    real amax, err, lltij;
    instr = 0; int_rs1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < NS; i++) for (int j = 0; j < NS; j++)
      M[i][j] = real'(int'($urandom_range(6, 0)) - 3);
    amax = 0.0;
    for (int i = 0; i < NS; i++) for (int j = 0; j < NS; j++) begin
      A[i][j] = (i == j) ? real'(NS) : 0.0;
      for (int k = 0; k < NS; k++) A[i][j] += M[k][i] * M[k][j];
      if (A[i][j] > amax) amax = A[i][j];
      mem[(A_BASE + 8 * (i * NS + j)) >> 3] = from_real(A[i][j]);
    end

    exec(ar(F_CVT_S_L, 0, 0, 5'd3), 64'd1);           // p3 = 1.0
    for (int i = 0; i < NS; i++) begin
      for (int j = 0; j <= i; j++) begin
        exec(ar(F_QCLR, 0, 0, 0));
        exec(pld(5'd4), A_BASE + 8 * (i * NS + j));
        exec(ar(F_QMADD, 5'd3, 5'd4, 0));
        for (int k = 0; k < j; k++) begin
          exec(pld(5'd4), A_BASE + 8 * (i * NS + k));
          exec(pld(5'd5), A_BASE + 8 * (j * NS + k));
          exec(ar(F_QMSUB, 5'd5, 5'd4, 0));
          n_mac++;
        end
        exec(ar(F_QROUND, 0, 0, 5'd6));
        if (j < i) begin
          exec(pld(5'd7), A_BASE + 8 * (j * NS + j));
          exec(ar(F_PDIV, 5'd7, 5'd6, 5'd6));
          n_div++;
        end else begin
          exec(ar(F_PSQRT, 0, 5'd6, 5'd6));
          n_sqrt++;
        end
        exec(psd(5'd6), A_BASE + 8 * (i * NS + j));
      end
    end

    `CHECK_TRUE(close(rd_word(A_BASE), $sqrt(A[0][0])), "L[0][0] = sqrt(A[0][0])")
    for (int i = 0; i < NS; i++) for (int j = 0; j <= i; j++) begin
      lltij = 0.0;
      for (int k = 0; k <= j; k++)
        lltij += to_real(rd_word(A_BASE + 8 * (i * NS + k))) * to_real(rd_word(A_BASE + 8 * (j * NS + k)));
      err = lltij - A[i][j];
      if (err < 0.0) err = -err;
      `CHECK_TRUE(err <= 1.0e-12 * amax, $sformatf("(L L^T)[%0d][%0d] = %g, A = %g", i, j, lltij, A[i][j]))
    end
    `CHECK_TRUE(n_sqrt == NS, "square roots happened")
    `CHECK_TRUE(n_div > 0, "divisions happened")
    `CHECK_TRUE(n_mac > 0, "quire MACs happened")
    $display("NS=%0d sqrt=%0d divisions=%0d macs=%0d cycles=%0d", NS, n_sqrt, n_div, n_mac, cyc);
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
