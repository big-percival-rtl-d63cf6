// tb_posit_quire: self-checking test of the quire register posit_quire.
//
// Checks reset, accumulate write, negation (including NaR mapping onto
// itself), clear, and the priority clr > neg > acc_we against a model kept
// in the testbench. A cycle watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_quire;
  localparam int QW = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, neg = 0, we = 0;
  logic [QW-1:0] din, q, model;
  int cyc = 0;

  posit_quire #(.QW(QW)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .neg(neg), .acc_we(we), .acc_in(din), .q(q));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    din = '0;
    @(negedge clk);
    `CHECK_EQ(q, '0, "reset")
    rst_n = 1;
    model = '0;
    for (int i = 0; i < 500; i++) begin
      for (int w = 0; w < QW / 32; w++) din[w*32 +: 32] = $urandom;
      if (i % 97 == 5) din = {1'b1, {(QW-1){1'b0}}};
      clr = ($urandom_range(9, 0) == 0);
      neg = ($urandom_range(3, 0) == 0);
      we  = ($urandom_range(1, 0) == 1);
      @(negedge clk);
      if (clr)      model = '0;
      else if (neg) model = -model;
      else if (we)  model = din;
      `CHECK_EQ(q, model, "quire register")
    end
    clr = 0; neg = 0; we = 1; din = {1'b1, {(QW-1){1'b0}}};
    @(negedge clk); we = 0; neg = 1;
    @(negedge clk);
    `CHECK_EQ(q, {1'b1, {(QW-1){1'b0}}}, "-NaR = NaR")
    `TB_FINISH
  end

  initial begin
    wait (cyc == 10000);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
