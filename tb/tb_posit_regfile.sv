// tb_posit_regfile: self-checking test of posit_regfile.
//
// Checks that every register reads 0 after reset, then performs random writes
// and reads on both ports against an array model kept in the testbench,
// including a read of the register written in the same cycle (old value). A
// cycle watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] ra, rb, wa;
  logic [63:0] da, db, wd;
  logic [63:0] model [32];
  int cyc = 0;

  posit_regfile #(.N(64), .NREGS(32)) dut (.clk(clk), .rst_n(rst_n), .raddr_a(ra), .raddr_b(rb),
    .rdata_a(da), .rdata_b(db), .we(we), .waddr(wa), .wdata(wd));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    ra = 0; rb = 0; wa = 0; wd = 0;
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      ra = 5'(i); #1;
      `CHECK_EQ(da, 64'h0, "reset value")
      model[i] = '0;
    end
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      we = $urandom_range(1, 0);
      wa = 5'($urandom); wd = {$urandom, $urandom};
      ra = 5'($urandom); rb = (i % 4 == 0) ? wa : 5'($urandom);
      #1;
      `CHECK_EQ(da, model[ra], "port a")
      `CHECK_EQ(db, model[rb], "port b (old value while written)")
      @(negedge clk);
      if (we) model[wa] = wd;
    end
    `TB_FINISH
  end

  initial begin
    wait (cyc == 100000);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
