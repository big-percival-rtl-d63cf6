// tb_workload_cg: the conjugate gradient (CG) solver run as a posit64
// instruction program on big_percival_top at its default parameters.
//
// The testbench plays the rest of the core, as tb_big_percival_top does: it
// hands over Xposit instruction words with the integer rs1 value (here always
// the address), collects integer write-backs and models the data memory. The
// linear system A x = b has a dense symmetric positive definite matrix
// A = M^T M + NS*I with small integer entries of M and an integer solution
// x_true, so b is exact. All vectors live in memory as posit64 words. Per CG
// iteration the program computes, with one quire accumulation per value:
//   Ap = A p                 (QCLR, PLD, QMADD, QROUND, PSD per element)
//   alpha = (r.r) / (p.Ap)   (two quire dot products, PDIV)
//   x += alpha p, r -= alpha Ap, p = r + beta p   (QMADD/QMSUB, QROUND)
//   stop when r.r < TOL      (PLT, answered on the integer write-back port)
// Checks: the first A p (= A b, exact) element by element, convergence within
// 2*NS iterations, and every x[i] within a relative 1e-9 of x_true. Counted
// mechanisms (each must occur): iterations, divisions, QMSUB, loop-exit tests.
// NS = 48 is the size of the smallest structural-engineering system the CG
// runs of the original work use (bcsstk01, 48x48; the others have 132, 420 and
// 1074 unknowns); its matrix is replaced by a generated one of the same size.
// The tolerance 1e-12 is the original work's; applying it to the residual norm
// (r.r < 1e-24) is this testbench's reading. Runs in about 1.9 million cycles.
`include "tb_check.svh"
module tb_workload_cg;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NS = 48;
  localparam logic [63:0] A_BASE = 64'h10000, B_BASE = 64'h20000, X_BASE = 64'h21000,
                          R_BASE = 64'h22000, P_BASE = 64'h23000, Q_BASE = 64'h24000,
                          K_BASE = 64'h100;

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
  localparam logic [4:0] F_PDIV = 5'h03, F_QMADD = 5'h07, F_QMSUB = 5'h08,
                         F_QCLR = 5'h09, F_QROUND = 5'h0B, F_CVT_S_L = 5'h12, F_PLT = 5'h1A;

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

  // posit register use: p3 = 1.0, p4/p5 operands, p6 result, p10 = r.r,
  // p11 = p.Ap or new r.r, p12 = alpha / beta, p13 = TOL
  int n_iter = 0, n_div = 0, n_qmsub = 0, n_exit_tests = 0;

  // rd = u . v, one rounding
  task automatic dot(logic [63:0] u, logic [63:0] v, logic [4:0] rd);
    exec(ar(F_QCLR, 0, 0, 0));
    for (int i = 0; i < NS; i++) begin
      exec(pld(5'd4), u + 8 * i);
      exec(pld(5'd5), v + 8 * i);
      exec(ar(F_QMADD, 5'd5, 5'd4, 0));
    end
    exec(ar(F_QROUND, 0, 0, rd));
  endtask

  // out[i] = y[i] +/- s * v[i], one rounding per element
  task automatic axpy(logic [63:0] y, logic [4:0] s, logic [63:0] v, bit sub, logic [63:0] out);
    for (int i = 0; i < NS; i++) begin
      exec(ar(F_QCLR, 0, 0, 0));
      exec(pld(5'd4), y + 8 * i);
      exec(ar(F_QMADD, 5'd3, 5'd4, 0));
      exec(pld(5'd5), v + 8 * i);
      exec(ar(sub ? F_QMSUB : F_QMADD, 5'd5, s, 0));
      if (sub) n_qmsub++;
      exec(ar(F_QROUND, 0, 0, 5'd6));
      exec(psd(5'd6), out + 8 * i);
    end
  endtask

  // Q = A p
  task automatic matvec();
    for (int i = 0; i < NS; i++) begin
      exec(ar(F_QCLR, 0, 0, 0));
      for (int j = 0; j < NS; j++) begin
        exec(pld(5'd4), A_BASE + 8 * (i * NS + j));
        exec(pld(5'd5), P_BASE + 8 * j);
        exec(ar(F_QMADD, 5'd5, 5'd4, 0));
      end
      exec(ar(F_QROUND, 0, 0, 5'd6));
      exec(psd(5'd6), Q_BASE + 8 * i);
    end
  endtask

  real A [NS][NS], M [NS][NS], xt [NS], b [NS];

  initial begin
    bit done_flag;
    instr = 0; int_rs1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // the system
    for (int i = 0; i < NS; i++) for (int j = 0; j < NS; j++)
      M[i][j] = real'(int'($urandom_range(6, 0)) - 3);
    for (int i = 0; i < NS; i++) for (int j = 0; j < NS; j++) begin
      A[i][j] = (i == j) ? real'(NS) : 0.0;
      for (int k = 0; k < NS; k++) A[i][j] += M[k][i] * M[k][j];
      mem[(A_BASE + 8 * (i * NS + j)) >> 3] = from_real(A[i][j]);
    end
    for (int i = 0; i < NS; i++) xt[i] = real'(int'($urandom_range(10, 0)) - 5);
    for (int i = 0; i < NS; i++) begin
      b[i] = 0.0;
      for (int j = 0; j < NS; j++) b[i] += A[i][j] * xt[j];
      mem[(B_BASE + 8 * i) >> 3] = from_real(b[i]);
      mem[(X_BASE + 8 * i) >> 3] = 64'h0;              // x0 = 0
      mem[(R_BASE + 8 * i) >> 3] = from_real(b[i]);   // r0 = b
      mem[(P_BASE + 8 * i) >> 3] = from_real(b[i]);   // p0 = b
    end
    mem[K_BASE >> 3] = from_real(1.0e-24);            // TOL on r.r

    exec(ar(F_CVT_S_L, 0, 0, 5'd3), 64'd1);           // p3 = 1.0
    exec(pld(5'd13), K_BASE);                         // p13 = TOL
    dot(R_BASE, R_BASE, 5'd10);                       // p10 = r.r

    done_flag = 0;
    while (!done_flag && n_iter < 2 * NS) begin
      matvec();
      if (n_iter == 0)
        for (int i = 0; i < NS; i++) begin
          real ab;
          ab = 0.0;
          for (int j = 0; j < NS; j++) ab += A[i][j] * b[j];
          `CHECK_EQ(rd_word(Q_BASE + 8 * i), from_real(ab), $sformatf("first A p, element %0d", i))
        end
      dot(P_BASE, Q_BASE, 5'd11);                     // p11 = p.Ap
      exec(ar(F_PDIV, 5'd11, 5'd10, 5'd12));          // alpha = r.r / p.Ap
      n_div++;
      axpy(X_BASE, 5'd12, P_BASE, 1'b0, X_BASE);      // x += alpha p
      axpy(R_BASE, 5'd12, Q_BASE, 1'b1, R_BASE);      // r -= alpha Ap
      dot(R_BASE, R_BASE, 5'd11);                     // p11 = new r.r
      n_iter++;
      exec(ar(F_PLT, 5'd13, 5'd11, 5'd20));           // x20 = (r.r < TOL)
      @(negedge clk);
      n_exit_tests++;
      if (int_regs[20] == 64'd1) done_flag = 1;
      else begin
        exec(ar(F_PDIV, 5'd10, 5'd11, 5'd12));        // beta = new r.r / r.r
        n_div++;
        exec(ar(F_QCLR, 0, 0, 0));                    // p10 = new r.r
        exec(ar(F_QMADD, 5'd3, 5'd11, 0));
        exec(ar(F_QROUND, 0, 0, 5'd10));
        axpy(R_BASE, 5'd12, P_BASE, 1'b0, P_BASE);    // p = r + beta p
      end
    end

    `CHECK_TRUE(done_flag, "CG converged within 2*NS iterations")
    for (int i = 0; i < NS; i++) begin
      real xi, err;
      xi = to_real(rd_word(X_BASE + 8 * i));
      err = xi - xt[i];
      if (err < 0.0) err = -err;
      `CHECK_TRUE(err <= 1.0e-9 * ((xt[i] < 0.0 ? -xt[i] : xt[i]) + 1.0),
                  $sformatf("x[%0d] = %g, expected %g", i, xi, xt[i]))
    end
    `CHECK_TRUE(n_iter > 0, "iterations happened")
    `CHECK_TRUE(n_div > 0, "divisions happened")
    `CHECK_TRUE(n_qmsub > 0, "QMSUB happened")
    `CHECK_TRUE(n_exit_tests > 0, "loop-exit comparisons happened")
    $display("NS=%0d iterations=%0d divisions=%0d qmsub=%0d exit_tests=%0d cycles=%0d",
             NS, n_iter, n_div, n_qmsub, n_exit_tests, cyc);
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
