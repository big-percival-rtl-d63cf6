// tb_workload_polybench: six PolyBench kernels run as posit64 instruction
// programs on big_percival_top at its default parameters: 3mm, Durbin,
// ludcmp, covariance, fdtd-2d and seidel-2d (GEMM and Cholesky have their own
// testbenches). The testbench plays the rest of the core and models the data
// memory, as tb_big_percival_top does; every array lives in memory as posit64
// words and is moved with PLD/PSD. As in the original work's posit ports, the
// multiply-accumulate loops of 3mm, Durbin, ludcmp and covariance accumulate
// in the quire (QCLR, QMADD/QMSUB, one QROUND per result), while fdtd-2d and
// seidel-2d, which have no such loops, use PADD/PSUB/PMUL/PDIV.
// Each kernel is also computed in double precision in the testbench with the
// same algorithm. 3mm uses short-significand data, so its result must match
// exactly; the others must agree within 1e-9 of the largest reference value
// (the posit64 results round at most as coarsely as doubles do here).
// Counted mechanisms (each must occur): per kernel, the quire roundings or
// arithmetic instructions it issued.
// Sizes are the PolyBench MINI sizes (from the benchmark suite, not stated in
// the original work, which runs MINI to LARGE; larger sizes differ only in the
// size constants). Durbin's input r[i] = 1/(i+2) and ludcmp's diagonally
// dominant matrix are this testbench's choice, for well-conditioned problems.
`include "tb_check.svh"
module tb_workload_polybench;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;

  // PolyBench MINI sizes
  localparam int NI = 16, NJ = 18, NK = 20, NL = 22, NM = 24;   // 3mm
  localparam int ND = 40;                                     // durbin, ludcmp
  localparam int CM = 28, CN = 32;                            // covariance
  localparam int TMAX = 20, NX = 20, NY = 30;                 // fdtd-2d
  localparam int TS = 20, NSD = 40;                           // seidel-2d

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
  localparam logic [4:0] F_PADD = 5'h00, F_PSUB = 5'h01, F_PMUL = 5'h02, F_PDIV = 5'h03,
                         F_QMADD = 5'h07, F_QMSUB = 5'h08, F_QCLR = 5'h09, F_QROUND = 5'h0B,
                         F_CVT_S_L = 5'h12;

  task automatic exec(logic [31:0] w, logic [63:0] rs1v = 0);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = w; int_rs1 = rs1v; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
  endtask

  int n_ops = 0, n_round = 0;

  task automatic ld(logic [4:0] rd, logic [63:0] a);
    exec({12'd0, 5'd1, 3'h5, rd, 7'h0B}, a);
  endtask
  task automatic st(logic [4:0] rs2, logic [63:0] a);
    exec({7'd0, rs2, 5'd1, 3'h6, 5'd0, 7'h0B}, a);
  endtask
  task automatic op(logic [4:0] f5, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    exec({f5, 2'b10, rs2, rs1, 3'h0, rd, 7'h0B});
    n_ops++;
  endtask
  task automatic qclr();
    exec({5'h09, 2'b10, 5'd0, 5'd0, 3'h0, 5'd0, 7'h0B});
  endtask
  task automatic qmac(bit sub, logic [4:0] rs1, logic [4:0] rs2);
    exec({sub ? F_QMSUB : F_QMADD, 2'b10, rs2, rs1, 3'h0, 5'd0, 7'h0B});
  endtask
  task automatic qround(logic [4:0] rd);
    exec({F_QROUND, 2'b10, 5'd0, 5'd0, 3'h0, rd, 7'h0B});
    n_round++;
  endtask
  task automatic cvt(logic [4:0] rd, longint v);
    exec({F_CVT_S_L, 2'b10, 5'd0, 5'd0, 3'h0, rd, 7'h0B}, v);
  endtask

  // array k, element (i, j) of a row length w
  function automatic logic [63:0] at(int k, int i, int j, int w);
    return 64'h10_0000 * k + 8 * (i * w + j);
  endfunction
  function automatic void setr(logic [63:0] a, real v);
    mem[a[63:3]] = from_real(v);
  endfunction
  function automatic real getr(logic [63:0] a);
    return to_real(rd_word(a));
  endfunction
  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  // compare an array in memory with its reference, within tol of its largest entry
  real refm [64][64];
  task automatic compare(string what, int k, int r, int c, real tol);
    real mx, e;
    int bad;
    mx = 0.0; bad = 0;
    for (int i = 0; i < r; i++) for (int j = 0; j < c; j++) if (absr(refm[i][j]) > mx) mx = absr(refm[i][j]);
    for (int i = 0; i < r; i++) for (int j = 0; j < c; j++) begin
      e = absr(getr(at(k, i, j, c)) - refm[i][j]);
      if (tol == 0.0 ? rd_word(at(k, i, j, c)) != from_real(refm[i][j]) : e > tol * mx) begin
        if (bad < 5) $display("FAIL %s [%0d][%0d]: got %g expected %g", what, i, j, getr(at(k, i, j, c)), refm[i][j]);
        bad++;
      end
    end
    checks++;
    if (bad != 0) failures++;
  endtask

  // register use: p0 = 0.0, p3 = 1.0, p4/p5 loaded operands, p6-p12 values

  // out(k3, r x c) = in1(k1, r x n) * in2(k2, n x c), one rounding per element
  task automatic matmul(int k1, int k2, int k3, int r, int n, int c);
    for (int i = 0; i < r; i++) for (int j = 0; j < c; j++) begin
      qclr();
      for (int t = 0; t < n; t++) begin
        ld(5'd4, at(k1, i, t, n));
        ld(5'd5, at(k2, t, j, c));
        qmac(1'b0, 5'd4, 5'd5);
      end
      qround(5'd6);
      st(5'd6, at(k3, i, j, c));
    end
  endtask

  real ra [64][64], rb [64][64], rc [64][64], rd2 [64][64], re [64][64], rf [64][64];
  real rv [64], ry [64], rz [64], rw [64], rx [64];

  initial begin
    int cnt0;
    instr = 0; int_rs1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cvt(5'd0, 0);                                     // p0 = 0.0
    cvt(5'd3, 1);                                     // p3 = 1.0

    // ---------------------------------------------------------------- 3mm
    for (int i = 0; i < NI; i++) for (int j = 0; j < NK; j++) begin ra[i][j] = real'(int'($urandom_range(16, 0)) - 8) / 4.0; setr(at(1, i, j, NK), ra[i][j]); end
    for (int i = 0; i < NK; i++) for (int j = 0; j < NJ; j++) begin rb[i][j] = real'(int'($urandom_range(16, 0)) - 8) / 8.0; setr(at(2, i, j, NJ), rb[i][j]); end
    for (int i = 0; i < NJ; i++) for (int j = 0; j < NM; j++) begin rc[i][j] = real'(int'($urandom_range(16, 0)) - 8) / 2.0; setr(at(3, i, j, NM), rc[i][j]); end
    for (int i = 0; i < NM; i++) for (int j = 0; j < NL; j++) begin rd2[i][j] = real'(int'($urandom_range(16, 0)) - 8) / 4.0; setr(at(4, i, j, NL), rd2[i][j]); end
    cnt0 = n_round;
    matmul(1, 2, 5, NI, NK, NJ);                      // E = A B
    matmul(3, 4, 6, NJ, NM, NL);                      // F = C D
    matmul(5, 6, 7, NI, NJ, NL);                      // G = E F
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) begin re[i][j] = 0.0; for (int t = 0; t < NK; t++) re[i][j] += ra[i][t] * rb[t][j]; end
    for (int i = 0; i < NJ; i++) for (int j = 0; j < NL; j++) begin rf[i][j] = 0.0; for (int t = 0; t < NM; t++) rf[i][j] += rc[i][t] * rd2[t][j]; end
    for (int i = 0; i < NI; i++) for (int j = 0; j < NL; j++) begin refm[i][j] = 0.0; for (int t = 0; t < NJ; t++) refm[i][j] += re[i][t] * rf[t][j]; end
    compare("3mm G", 7, NI, NL, 0.0);
    `CHECK_TRUE(n_round - cnt0 == NI * NJ + NJ * NL + NI * NL, "3mm quire roundings")

    // ------------------------------------------------------------- durbin
    for (int i = 0; i < ND; i++) begin rv[i] = 1.0 / real'(i + 2); setr(at(1, 0, i, ND), rv[i]); end
    begin
      real alpha, beta, sum;
      ry[0] = -rv[0]; beta = 1.0; alpha = -rv[0];
      for (int k = 1; k < ND; k++) begin
        beta = (1.0 - alpha * alpha) * beta;
        sum = 0.0;
        for (int i = 0; i < k; i++) sum += rv[k - i - 1] * ry[i];
        alpha = -(rv[k] + sum) / beta;
        for (int i = 0; i < k; i++) rz[i] = ry[i] + alpha * ry[k - i - 1];
        for (int i = 0; i < k; i++) ry[i] = rz[i];
        ry[k] = alpha;
      end
    end
    // p7 = alpha, p8 = beta, y in array 2, z in array 3
    cnt0 = n_round;
    ld(5'd4, at(1, 0, 0, ND));
    op(F_PSUB, 5'd7, 5'd0, 5'd4);                     // alpha = -r[0]
    st(5'd7, at(2, 0, 0, ND));                        // y[0] = -r[0]
    op(F_PADD, 5'd8, 5'd3, 5'd0);                     // beta = 1
    for (int k = 1; k < ND; k++) begin
      op(F_PMUL, 5'd9, 5'd7, 5'd7);
      op(F_PSUB, 5'd9, 5'd3, 5'd9);
      op(F_PMUL, 5'd8, 5'd9, 5'd8);                   // beta = (1 - alpha^2) beta
      qclr();
      ld(5'd4, at(1, 0, k, ND));
      qmac(1'b0, 5'd4, 5'd3);                         // quire = r[k]
      for (int i = 0; i < k; i++) begin
        ld(5'd4, at(1, 0, k - i - 1, ND));
        ld(5'd5, at(2, 0, i, ND));
        qmac(1'b0, 5'd4, 5'd5);                       // quire += r[k-i-1] y[i]
      end
      qround(5'd10);
      op(F_PDIV, 5'd10, 5'd10, 5'd8);
      op(F_PSUB, 5'd7, 5'd0, 5'd10);                  // alpha = -(r[k] + sum) / beta
      for (int i = 0; i < k; i++) begin
        qclr();
        ld(5'd4, at(2, 0, i, ND));
        qmac(1'b0, 5'd4, 5'd3);
        ld(5'd5, at(2, 0, k - i - 1, ND));
        qmac(1'b0, 5'd7, 5'd5);
        qround(5'd6);
        st(5'd6, at(3, 0, i, ND));                    // z[i] = y[i] + alpha y[k-i-1]
      end
      for (int i = 0; i < k; i++) begin
        ld(5'd4, at(3, 0, i, ND));
        st(5'd4, at(2, 0, i, ND));
      end
      st(5'd7, at(2, 0, k, ND));
    end
    for (int i = 0; i < ND; i++) refm[0][i] = ry[i];
    compare("durbin y", 2, 1, ND, 1.0e-9);
    `CHECK_TRUE(n_round > cnt0, "durbin quire roundings")

    // ------------------------------------------------------------- ludcmp
    for (int i = 0; i < ND; i++) for (int j = 0; j < ND; j++) begin
      ra[i][j] = real'(int'($urandom_range(8, 0)) - 4) + ((i == j) ? real'(4 * ND) : 0.0);
      setr(at(1, i, j, ND), ra[i][j]);
    end
    for (int i = 0; i < ND; i++) rx[i] = real'(int'($urandom_range(10, 0)) - 5);
    for (int i = 0; i < ND; i++) begin
      rv[i] = 0.0;
      for (int j = 0; j < ND; j++) rv[i] += ra[i][j] * rx[j];
      setr(at(2, 0, i, ND), rv[i]);
    end
    cnt0 = n_round;
    for (int i = 0; i < ND; i++) begin
      for (int j = 0; j < ND; j++) begin
        qclr();
        ld(5'd4, at(1, i, j, ND));
        qmac(1'b0, 5'd4, 5'd3);
        for (int k = 0; k < ((j < i) ? j : i); k++) begin
          ld(5'd4, at(1, i, k, ND));
          ld(5'd5, at(1, k, j, ND));
          qmac(1'b1, 5'd4, 5'd5);
        end
        qround(5'd6);
        if (j < i) begin
          ld(5'd5, at(1, j, j, ND));
          op(F_PDIV, 5'd6, 5'd6, 5'd5);
        end
        st(5'd6, at(1, i, j, ND));
      end
    end
    for (int i = 0; i < ND; i++) begin                // forward: y (array 3)
      qclr();
      ld(5'd4, at(2, 0, i, ND));
      qmac(1'b0, 5'd4, 5'd3);
      for (int j = 0; j < i; j++) begin
        ld(5'd4, at(1, i, j, ND));
        ld(5'd5, at(3, 0, j, ND));
        qmac(1'b1, 5'd4, 5'd5);
      end
      qround(5'd6);
      st(5'd6, at(3, 0, i, ND));
    end
    for (int i = ND - 1; i >= 0; i--) begin           // backward: x (array 4)
      qclr();
      ld(5'd4, at(3, 0, i, ND));
      qmac(1'b0, 5'd4, 5'd3);
      for (int j = i + 1; j < ND; j++) begin
        ld(5'd4, at(1, i, j, ND));
        ld(5'd5, at(4, 0, j, ND));
        qmac(1'b1, 5'd4, 5'd5);
      end
      qround(5'd6);
      ld(5'd5, at(1, i, i, ND));
      op(F_PDIV, 5'd6, 5'd6, 5'd5);
      st(5'd6, at(4, 0, i, ND));
    end
    for (int i = 0; i < ND; i++) refm[0][i] = rx[i];
    compare("ludcmp x", 4, 1, ND, 1.0e-9);
    `CHECK_TRUE(n_round > cnt0, "ludcmp quire roundings")

    // --------------------------------------------------------- covariance
    for (int i = 0; i < CN; i++) for (int j = 0; j < CM; j++) begin
      ra[i][j] = real'(i * j) / real'(CM);            // PolyBench initialisation
      setr(at(1, i, j, CM), ra[i][j]);
    end
    cvt(5'd11, CN);                                   // p11 = float_n
    cvt(5'd12, CN - 1);                               // p12 = float_n - 1
    cnt0 = n_round;
    for (int j = 0; j < CM; j++) begin                // mean (array 2)
      qclr();
      for (int i = 0; i < CN; i++) begin
        ld(5'd4, at(1, i, j, CM));
        qmac(1'b0, 5'd4, 5'd3);
      end
      qround(5'd6);
      op(F_PDIV, 5'd6, 5'd6, 5'd11);
      st(5'd6, at(2, 0, j, CM));
    end
    for (int i = 0; i < CN; i++) for (int j = 0; j < CM; j++) begin
      ld(5'd4, at(1, i, j, CM));
      ld(5'd5, at(2, 0, j, CM));
      op(F_PSUB, 5'd4, 5'd4, 5'd5);
      st(5'd4, at(1, i, j, CM));
    end
    for (int i = 0; i < CM; i++) for (int j = i; j < CM; j++) begin   // cov (array 3)
      qclr();
      for (int k = 0; k < CN; k++) begin
        ld(5'd4, at(1, k, i, CM));
        ld(5'd5, at(1, k, j, CM));
        qmac(1'b0, 5'd4, 5'd5);
      end
      qround(5'd6);
      op(F_PDIV, 5'd6, 5'd6, 5'd12);
      st(5'd6, at(3, i, j, CM));
      st(5'd6, at(3, j, i, CM));
    end
    for (int j = 0; j < CM; j++) begin
      real m;
      m = 0.0;
      for (int i = 0; i < CN; i++) m += ra[i][j];
      rv[j] = m / real'(CN);
    end
    for (int i = 0; i < CM; i++) for (int j = 0; j < CM; j++) begin
      refm[i][j] = 0.0;
      for (int k = 0; k < CN; k++) refm[i][j] += (ra[k][i] - rv[i]) * (ra[k][j] - rv[j]);
      refm[i][j] = refm[i][j] / real'(CN - 1);
    end
    compare("covariance", 3, CM, CM, 1.0e-9);
    `CHECK_TRUE(n_round > cnt0, "covariance quire roundings")

    // ------------------------------------------------------------ fdtd-2d
    // arrays: ex 1, ey 2, hz 3, fict 4; p9 = 0.5, p10 = 0.7
    for (int i = 0; i < NX; i++) for (int j = 0; j < NY; j++) begin
      ra[i][j] = real'(i * (j + 1)) / real'(NX);
      rb[i][j] = real'(i * (j + 2)) / real'(NY);
      rc[i][j] = real'(i * (j + 3)) / real'(NX);
      setr(at(1, i, j, NY), ra[i][j]);
      setr(at(2, i, j, NY), rb[i][j]);
      setr(at(3, i, j, NY), rc[i][j]);
    end
    for (int t = 0; t < TMAX; t++) setr(at(4, 0, t, TMAX), real'(t));
    setr(64'h100, 0.5);
    setr(64'h108, 0.7);
    ld(5'd9, 64'h100);
    ld(5'd10, 64'h108);
    cnt0 = n_ops;
    for (int t = 0; t < TMAX; t++) begin
      ld(5'd4, at(4, 0, t, TMAX));
      for (int j = 0; j < NY; j++) st(5'd4, at(2, 0, j, NY));
      for (int i = 1; i < NX; i++) for (int j = 0; j < NY; j++) begin
        ld(5'd4, at(3, i, j, NY));
        ld(5'd5, at(3, i - 1, j, NY));
        op(F_PSUB, 5'd6, 5'd4, 5'd5);
        op(F_PMUL, 5'd6, 5'd9, 5'd6);
        ld(5'd4, at(2, i, j, NY));
        op(F_PSUB, 5'd4, 5'd4, 5'd6);
        st(5'd4, at(2, i, j, NY));
      end
      for (int i = 0; i < NX; i++) for (int j = 1; j < NY; j++) begin
        ld(5'd4, at(3, i, j, NY));
        ld(5'd5, at(3, i, j - 1, NY));
        op(F_PSUB, 5'd6, 5'd4, 5'd5);
        op(F_PMUL, 5'd6, 5'd9, 5'd6);
        ld(5'd4, at(1, i, j, NY));
        op(F_PSUB, 5'd4, 5'd4, 5'd6);
        st(5'd4, at(1, i, j, NY));
      end
      for (int i = 0; i < NX - 1; i++) for (int j = 0; j < NY - 1; j++) begin
        ld(5'd4, at(1, i, j + 1, NY));
        ld(5'd5, at(1, i, j, NY));
        op(F_PSUB, 5'd6, 5'd4, 5'd5);
        ld(5'd4, at(2, i + 1, j, NY));
        op(F_PADD, 5'd6, 5'd6, 5'd4);
        ld(5'd5, at(2, i, j, NY));
        op(F_PSUB, 5'd6, 5'd6, 5'd5);
        op(F_PMUL, 5'd6, 5'd10, 5'd6);
        ld(5'd4, at(3, i, j, NY));
        op(F_PSUB, 5'd4, 5'd4, 5'd6);
        st(5'd4, at(3, i, j, NY));
      end
    end
    for (int t = 0; t < TMAX; t++) begin
      for (int j = 0; j < NY; j++) rb[0][j] = real'(t);
      for (int i = 1; i < NX; i++) for (int j = 0; j < NY; j++) rb[i][j] = rb[i][j] - 0.5 * (rc[i][j] - rc[i - 1][j]);
      for (int i = 0; i < NX; i++) for (int j = 1; j < NY; j++) ra[i][j] = ra[i][j] - 0.5 * (rc[i][j] - rc[i][j - 1]);
      for (int i = 0; i < NX - 1; i++) for (int j = 0; j < NY - 1; j++)
        rc[i][j] = rc[i][j] - 0.7 * (ra[i][j + 1] - ra[i][j] + rb[i + 1][j] - rb[i][j]);
    end
    for (int i = 0; i < NX; i++) for (int j = 0; j < NY; j++) refm[i][j] = rc[i][j];
    compare("fdtd-2d hz", 3, NX, NY, 1.0e-9);
    `CHECK_TRUE(n_ops > cnt0, "fdtd-2d arithmetic")

    // ---------------------------------------------------------- seidel-2d
    for (int i = 0; i < NSD; i++) for (int j = 0; j < NSD; j++) begin
      ra[i][j] = (real'(i) * real'(j + 2) + 2.0) / real'(NSD);
      setr(at(1, i, j, NSD), ra[i][j]);
    end
    cvt(5'd11, 9);                                    // p11 = 9.0
    cnt0 = n_ops;
    for (int t = 0; t < TS; t++)
      for (int i = 1; i < NSD - 1; i++) for (int j = 1; j < NSD - 1; j++) begin
        ld(5'd6, at(1, i - 1, j - 1, NSD));
        for (int d = 1; d < 9; d++) begin
          ld(5'd4, at(1, i - 1 + d / 3, j - 1 + d % 3, NSD));
          op(F_PADD, 5'd6, 5'd6, 5'd4);
        end
        op(F_PDIV, 5'd6, 5'd6, 5'd11);
        st(5'd6, at(1, i, j, NSD));
      end
    for (int t = 0; t < TS; t++)
      for (int i = 1; i < NSD - 1; i++) for (int j = 1; j < NSD - 1; j++)
        ra[i][j] = (ra[i - 1][j - 1] + ra[i - 1][j] + ra[i - 1][j + 1] + ra[i][j - 1] + ra[i][j]
                    + ra[i][j + 1] + ra[i + 1][j - 1] + ra[i + 1][j] + ra[i + 1][j + 1]) / 9.0;
    for (int i = 0; i < NSD; i++) for (int j = 0; j < NSD; j++) refm[i][j] = ra[i][j];
    compare("seidel-2d A", 1, NSD, NSD, 1.0e-9);
    `CHECK_TRUE(n_ops > cnt0, "seidel-2d arithmetic")

    $display("ops=%0d quire_rounds=%0d cycles=%0d", n_ops, n_round, cyc);
    `TB_FINISH
  end

  initial begin
    wait (cyc == 60000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
