// tb_posit_pau_configs: the PAU in its other synthesis-time configurations.
//
// Six posit_pau instances run side by side, one per configuration besides the
// default (64-bit, quire, exact division and square root, tested elsewhere):
//   c0 posit32, no quire, approximate div/sqrt   c1 posit32, no quire, exact
//   c2 posit32, quire, approximate div/sqrt      c3 posit32, quire, exact
//   c4 posit64, no quire, approximate div/sqrt   c5 posit64, no quire, exact
// Every operation is handed to all six at once with each instance's own
// operands, and each result is captured on its out_valid pulse. The reference
// for posit32 uses the fact that appending zeros to a posit keeps its value:
// a posit32 word w is the posit64 word {w, 32'h0}, and a value is rounded to
// posit32 by rounding its exact posit64 image to nearest even on the upper
// half, saturating at minpos and maxpos. Operands have 20-bit significands and
// small scales, so sums, products and integer conversions are exact doubles
// and compared bit for bit; exact quotients and roots are allowed one unit in
// the last place, approximate ones a relative error of 13 % (Mitchell division errs by up to 12.5 %). Quire sums of
// products of small integers are exact, checked for c2 and c3.
// Latency is checked too: one cycle for the combinational operations and the
// approximate units, N+1 cycles for the exact division.
`include "tb_check.svh"
module tb_posit_pau_configs;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NC = 6;
  localparam int CN [NC] = '{32, 32, 32, 32, 64, 64};
  localparam bit CQ [NC] = '{1'b0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b0};
  localparam bit CA [NC] = '{1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b0};

  logic clk = 0, rst_n = 0, in_valid = 0;
  posit_op_e op = OP_PADD;
  logic [63:0] opa [NC], opb [NC], res [NC], got [NC];
  logic rdy [NC], ov [NC], seen [NC];
  int lat [NC];
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    posit_pau #(.N(CN[c]), .QW(16 * CN[c]), .XLEN(64), .QUIRE_EN(CQ[c]),
                .APPROX_MUL(1'b0), .APPROX_DIVSQRT(CA[c])) u_pau (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(rdy[c]), .op(op),
      .operand_a(opa[c]), .operand_b(opb[c]), .out_valid(ov[c]), .result(res[c])
    );
    always @(posedge clk) if (ov[c] && !seen[c]) begin
      got[c]  <= res[c];
      seen[c] <= 1'b1;
      lat[c]  <= cyc;
    end
  end

  // ------------------------------------------------------- posit32 reference
  function automatic logic [63:0] round32(logic [63:0] p);
    logic [63:0] m;
    logic [32:0] r;
    if (p == 64'h0 || p == nar()) return {32'h0, p[63:32]};
    m = p[63] ? -p : p;
    r = {1'b0, m[63:32]} + 33'(m[31] && (m[30:0] != 0 || m[32]));
    if (r[31:0] == 32'h0) r = 33'd1;                      // never round to 0
    if (r[31]) r = 33'h7fff_ffff;                         // saturate at maxpos
    return {32'h0, p[63] ? -r[31:0] : r[31:0]};
  endfunction

  function automatic real val(int c, logic [63:0] p);
    return (CN[c] == 32) ? to_real({p[31:0], 32'h0}) : to_real(p);
  endfunction

  function automatic logic [63:0] rnd(int c, real x);
    return (CN[c] == 32) ? round32(from_real(x)) : from_real(x);
  endfunction

  // ulp distance on the configuration's own width
  function automatic longint unsigned ulps(int c, logic [63:0] a, logic [63:0] b);
    return (CN[c] == 32) ? ulp_dist({a[31:0], 32'h0}, {b[31:0], 32'h0}) >> 32 : ulp_dist(a, b);
  endfunction

  // hand one operation to all six and wait for every result
  task automatic run(posit_op_e o);
    int t0;
    @(negedge clk);
    op = o; in_valid = 1;
    for (int c = 0; c < NC; c++) seen[c] = 1'b0;
    t0 = cyc;
    @(negedge clk);
    in_valid = 0;
    for (int w = 0; w < 200; w++) begin
      bit all;
      all = 1;
      for (int c = 0; c < NC; c++) all &= seen[c];
      if (all) break;
      @(negedge clk);
    end
    for (int c = 0; c < NC; c++) begin
      `CHECK_TRUE(seen[c], $sformatf("c%0d result for %s", c, o.name()))
      lat[c] = lat[c] - t0 - 1;
    end
  endtask

  initial begin
    real xa [NC], xb [NC];
    for (int c = 0; c < NC; c++) begin opa[c] = 0; opb[c] = 0; seen[c] = 0; lat[c] = 0; got[c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int it = 0; it < 300; it++) begin
      for (int c = 0; c < NC; c++) begin
        xa[c] = rand_real(20, 8);
        xb[c] = rand_real(20, 8);
        opa[c] = rnd(c, xa[c]);
        opb[c] = rnd(c, xb[c]);
        `CHECK_TRUE(val(c, opa[c]) == xa[c] && val(c, opb[c]) == xb[c], "operands exact")
      end

      run(OP_PADD);
      for (int c = 0; c < NC; c++) begin
        `CHECK_EQ(got[c], rnd(c, xa[c] + xb[c]), $sformatf("c%0d PADD", c))
        `CHECK_EQ(lat[c], 1, $sformatf("c%0d PADD latency", c))
      end
      run(OP_PSUB);
      for (int c = 0; c < NC; c++) `CHECK_EQ(got[c], rnd(c, xa[c] - xb[c]), $sformatf("c%0d PSUB", c))
      run(OP_PMUL);
      for (int c = 0; c < NC; c++) `CHECK_EQ(got[c], rnd(c, xa[c] * xb[c]), $sformatf("c%0d PMUL", c))
      run(OP_PLT);
      for (int c = 0; c < NC; c++) `CHECK_EQ(got[c], 64'(xa[c] < xb[c]), $sformatf("c%0d PLT", c))

      run(OP_PDIV);
      for (int c = 0; c < NC; c++) begin
        real q, e;
        q = xa[c] / xb[c];
        if (CA[c]) begin
          e = val(c, got[c]) / q - 1.0;
          `CHECK_TRUE(e < 0.13 && e > -0.13, $sformatf("c%0d approximate PDIV within 13 %%: %f", c, e))
          `CHECK_EQ(lat[c], 1, $sformatf("c%0d approximate PDIV latency", c))
        end else begin
          `CHECK_TRUE((CN[c] == 32) ? ulps(c, got[c], rnd(c, q)) <= 1 : close(got[c], q), $sformatf("c%0d PDIV", c))
          `CHECK_EQ(lat[c], CN[c] + 1, $sformatf("c%0d exact PDIV latency", c))
        end
      end

      for (int c = 0; c < NC; c++) opa[c] = rnd(c, xa[c] < 0.0 ? -xa[c] : xa[c]);
      run(OP_PSQRT);
      for (int c = 0; c < NC; c++) begin
        real s, e;
        s = $sqrt(xa[c] < 0.0 ? -xa[c] : xa[c]);
        if (CA[c]) begin
          e = val(c, got[c]) / s - 1.0;
          `CHECK_TRUE(e < 0.13 && e > -0.13, $sformatf("c%0d approximate PSQRT within 13 %%", c))
        end else
          `CHECK_TRUE((CN[c] == 32) ? ulps(c, got[c], rnd(c, s)) <= 1 : close(got[c], s), $sformatf("c%0d PSQRT", c))
      end

      // integer conversions
      for (int c = 0; c < NC; c++) opa[c] = 64'(signed'(int'($urandom)));
      run(OP_L2P);
      for (int c = 0; c < NC; c++)
        `CHECK_EQ(got[c], rnd(c, real'(longint'(signed'(opa[c])))), $sformatf("c%0d PCVT.S.L", c))
      for (int c = 0; c < NC; c++) begin
        xa[c] = real'(int'($urandom_range(2000000, 0)) - 1000000) / 8.0;
        opa[c] = rnd(c, xa[c]);
      end
      run(OP_P2L);
      for (int c = 0; c < NC; c++) begin
        real fl;
        longint ex;
        fl = $floor(xa[c]);
        ex = longint'(fl);
        if (xa[c] - fl > 0.5 || (xa[c] - fl == 0.5 && ex[0])) ex++;
        `CHECK_EQ(got[c], 64'(ex), $sformatf("c%0d PCVT.L.S", c))
      end
    end

    // quire of the posit32 configurations: exact sums of integer products
    run(OP_QCLR);
    begin
      real acc [NC];
      for (int c = 0; c < NC; c++) acc[c] = 0.0;
      for (int k = 0; k < 40; k++) begin
        bit sub;
        sub = $urandom_range(1, 0);
        for (int c = 0; c < NC; c++) begin
          xa[c] = real'(int'($urandom_range(2000, 0)) - 1000) / 16.0;
          xb[c] = real'(int'($urandom_range(2000, 0)) - 1000) / 16.0;
          opa[c] = rnd(c, xa[c]);
          opb[c] = rnd(c, xb[c]);
          acc[c] = sub ? acc[c] - xa[c] * xb[c] : acc[c] + xa[c] * xb[c];
        end
        run(sub ? OP_QMSUB : OP_QMADD);
      end
      run(OP_QROUND);
      for (int c = 0; c < NC; c++)
        if (CQ[c]) `CHECK_EQ(got[c], rnd(c, acc[c]), $sformatf("c%0d QROUND of a 40-term sum", c))
      run(OP_QNEG);
      run(OP_QROUND);
      for (int c = 0; c < NC; c++)
        if (CQ[c]) `CHECK_EQ(got[c], rnd(c, -acc[c]), $sformatf("c%0d QNEG", c))
    end

    `TB_FINISH
  end

  initial begin
    wait (cyc == 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
