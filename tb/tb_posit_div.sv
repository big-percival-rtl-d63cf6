// tb_posit_div: self-checking test of posit_div (PDIV.S, iterative).
//
// Quotients that are exact doubles (a = b * c with short significands) must
// match the reference exactly; general random quotients, rounded twice in the
// reference, may differ by at most one unit in the last place. The latency,
// start to done, is checked to be N cycles (1 for special operands). A cycle
// watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_div;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [N-1:0] a, b, y;
  int cyc = 0;

  posit_div #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b), .busy(busy), .done(done), .result(y));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic divide(logic [N-1:0] pa, logic [N-1:0] pb, output logic [N-1:0] res, output int lat);
    a = pa; b = pb;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    res = y;
  endtask

  task automatic exact(real rc, real rb);
    logic [N-1:0] res;
    int lat;
    divide(from_real(rc * rb), from_real(rb), res, lat);
    `CHECK_EQ(res, from_real(rc), $sformatf("%g / %g", rc * rb, rb))
    `CHECK_EQ(lat, N, "latency")
  endtask

  initial begin
    logic [N-1:0] res;
    int lat;
    a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    exact(2.0, 3.0);
    exact(0.25, -4.0);
    exact(-3.5, 7.0);
    exact(1.0, 1.0);
    divide(from_real(1.0), from_real(3.0), res, lat);
    `CHECK_EQ(res, 64'h32aa_aaaa_aaaa_aaab, "1/3 rounded")
    divide(from_real(1.0), '0, res, lat);
    `CHECK_EQ(res, nar(), "1/0")
    `CHECK_EQ(lat, 1, "special latency")
    divide('0, from_real(5.0), res, lat);
    `CHECK_EQ(res, '0, "0/5")
    divide(maxpos(), minpos(), res, lat);
    `CHECK_EQ(res, maxpos(), "maxpos/minpos saturates")
    for (int i = 0; i < 300; i++) exact(rand_real(24, 12), rand_real(24, 12));
    for (int i = 0; i < 300; i++) begin
      real ra, rb;
      ra = rand_real(50, 100); rb = rand_real(50, 100);
      divide(from_real(ra), from_real(rb), res, lat);
      `CHECK_TRUE(close(res, to_real(from_real(ra)) / to_real(from_real(rb))), $sformatf("%g / %g within 1 ulp", ra, rb))
    end
    `TB_FINISH
  end

  initial begin
    wait (cyc == 200000);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end
endmodule
