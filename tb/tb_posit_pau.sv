// tb_posit_pau: self-checking test of the Posit Arithmetic Unit, posit_pau,
// in its default configuration (posit64, quire, exact units).
//
// Every operation of the Xposit table is issued through the valid/ready
// handshake and its result is compared with the reference model: arithmetic,
// comparisons and min/max (checked on the real values), sign injection,
// moves, the eight conversions, and quire sequences (clear, multiply-add,
// multiply-subtract, negate, round) that form exact dot products. Latencies
// are checked: 1 cycle, N+1 for division, N for square root. A cycle
// watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_pau;
  import posit_ref_pkg::*;
  import posit_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  posit_op_e op;
  logic [63:0] opa, opb, res;
  int cyc = 0;

  posit_pau dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .op(op),
    .operand_a(opa), .operand_b(opb), .out_valid(out_valid), .result(res));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic issue(posit_op_e o, logic [63:0] a, logic [63:0] b, output logic [63:0] r, output int lat);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    op = o; opa = a; opb = b; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    r = res;
  endtask

  task automatic expect_op(posit_op_e o, logic [63:0] a, logic [63:0] b, logic [63:0] e, int elat, string what);
    logic [63:0] r;
    int lat;
    issue(o, a, b, r, lat);
    `CHECK_EQ(r, e, what)
    `CHECK_EQ(lat, elat, {what, " latency"})
  endtask

  initial begin
    real ra, rb, acc;
    logic [63:0] r;
    int lat;
    op = OP_PADD; opa = 0; opb = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      ra = rand_real(20, 12); rb = rand_real(20, 12);
      expect_op(OP_PADD, from_real(ra), from_real(rb), from_real(ra + rb), 1, "PADD");
      expect_op(OP_PSUB, from_real(ra), from_real(rb), from_real(ra - rb), 1, "PSUB");
      expect_op(OP_PMUL, from_real(ra), from_real(rb), from_real(ra * rb), 1, "PMUL");
      expect_op(OP_PDIV, from_real(ra * rb), from_real(rb), from_real(ra), N + 1, "PDIV");
      expect_op(OP_PSQRT, from_real(ra * ra), 0, from_real(ra < 0.0 ? -ra : ra), N, "PSQRT");
      expect_op(OP_PMIN, from_real(ra), from_real(rb), from_real(ra < rb ? ra : rb), 1, "PMIN");
      expect_op(OP_PMAX, from_real(ra), from_real(rb), from_real(ra < rb ? rb : ra), 1, "PMAX");
      expect_op(OP_PEQ, from_real(ra), from_real(rb), 64'(ra == rb), 1, "PEQ");
      expect_op(OP_PEQ, from_real(ra), from_real(ra), 64'd1, 1, "PEQ same");
      expect_op(OP_PLT, from_real(ra), from_real(rb), 64'(ra < rb), 1, "PLT");
      expect_op(OP_PLE, from_real(ra), from_real(rb), 64'(ra <= rb), 1, "PLE");
      expect_op(OP_PSGNJ, from_real(ra), from_real(rb), from_real((rb < 0.0) == (ra < 0.0) ? ra : -ra), 1, "PSGNJ");
      expect_op(OP_PSGNJN, from_real(ra), from_real(rb), from_real((rb < 0.0) != (ra < 0.0) ? ra : -ra), 1, "PSGNJN");
      expect_op(OP_PSGNJX, from_real(ra), from_real(rb), from_real(rb < 0.0 ? -ra : ra), 1, "PSGNJX");
      expect_op(OP_PMV_X_W, from_real(ra), 0, from_real(ra), 1, "PMV.X.W");
      expect_op(OP_PMV_W_X, from_real(rb), 0, from_real(rb), 1, "PMV.W.X");
    end
    expect_op(OP_PLT, nar(), from_real(-1.0e30), 64'd1, 1, "NaR below every posit");
    expect_op(OP_PDIV, from_real(1.0), 0, nar(), 2, "1/0 is NaR, fast");
    // conversions
    expect_op(OP_P2I, from_real(-7.5), 0, -64'sd8, 1, "P2I -7.5");
    expect_op(OP_P2U, from_real(4.0e9), 0, {{32{1'b1}}, 32'(64'd4000000000)}, 1, "P2U 4e9");
    expect_op(OP_P2L, from_real(6.0e15), 0, 64'd6000000000000000, 1, "P2L 6e15");
    expect_op(OP_P2LU, from_real(-3.0), 0, 64'd0, 1, "P2LU -3");
    expect_op(OP_I2P, 64'hdead_beef_ffff_fff4, 0, from_real(-12.0), 1, "I2P uses low 32 bits");
    expect_op(OP_U2P, 64'h0000_0000_ffff_fff4, 0, from_real(4294967284.0), 1, "U2P");
    expect_op(OP_L2P, -64'sd123456789012, 0, from_real(-123456789012.0), 1, "L2P");
    expect_op(OP_LU2P, 64'h8000_0000_0000_0000, 0, from_real(pow2(63)), 1, "LU2P");
    // quire: exact dot products
    for (int t = 0; t < 20; t++) begin
      expect_op(OP_QCLR, 0, 0, 64'd0, 1, "QCLR");
      acc = 0.0;
      for (int k = 0; k < 16; k++) begin
        ra = rand_real(12, 8); rb = rand_real(12, 8);
        if (k % 3 == 2) begin
          expect_op(OP_QMSUB, from_real(ra), from_real(rb), 64'd0, 1, "QMSUB");
          acc -= ra * rb;
        end else begin
          expect_op(OP_QMADD, from_real(ra), from_real(rb), 64'd0, 1, "QMADD");
          acc += ra * rb;
        end
      end
      expect_op(OP_QROUND, 0, 0, from_real(acc), 1, "QROUND dot product");
      expect_op(OP_QNEG, 0, 0, 64'd0, 1, "QNEG");
      expect_op(OP_QROUND, 0, 0, from_real(-acc), 1, "QROUND after QNEG");
    end
    // exactness beyond a double: 1 + tiny - 1 keeps the tiny term
    expect_op(OP_QCLR, 0, 0, 64'd0, 1, "QCLR");
    expect_op(OP_QMADD, from_real(1.0), from_real(1.0), 64'd0, 1, "QMADD 1");
    expect_op(OP_QMADD, from_real(pow2(-100)), from_real(pow2(-100)), 64'd0, 1, "QMADD 2^-200");
    expect_op(OP_QMSUB, from_real(1.0), from_real(1.0), 64'd0, 1, "QMSUB 1");
    expect_op(OP_QROUND, 0, 0, from_real(pow2(-200)), 1, "quire keeps 2^-200");
    `TB_FINISH
  end

  initial begin
    wait (cyc == 400000);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
