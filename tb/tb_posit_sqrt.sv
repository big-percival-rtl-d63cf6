// tb_posit_sqrt: self-checking test of posit_sqrt (PSQRT.S, iterative).
//
// Roots that are exact doubles (a = c * c) must match exactly; general
// random roots may differ from the twice-rounded reference by one unit in the
// last place. Latency start to done is checked to be N-1 cycles (1 for
// special operands). A cycle watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_sqrt;
  import posit_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [N-1:0] a, y;
  int cyc = 0;

  posit_sqrt #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .busy(busy), .done(done), .result(y));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic root(logic [N-1:0] pa, output logic [N-1:0] res, output int lat);
    a = pa;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    res = y;
  endtask

  task automatic exact(real rc);
    logic [N-1:0] res;
    int lat;
    root(from_real(rc * rc), res, lat);
    `CHECK_EQ(res, from_real(rc), $sformatf("sqrt(%g)", rc * rc))
    `CHECK_EQ(lat, N - 1, "latency")
  endtask

  initial begin
    logic [N-1:0] res;
    int lat;
    a = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    exact(2.0);
    exact(3.0);
    exact(0.5);
    exact(1.0);
    exact(3.0 * pow2(40));
    root(from_real(2.0), res, lat);
    `CHECK_EQ(res, 64'h4350_4f33_3f9d_e648, "sqrt(2)")
    root(from_real(-4.0), res, lat);
    `CHECK_EQ(res, nar(), "sqrt(-4)")
    `CHECK_EQ(lat, 1, "special latency")
    root('0, res, lat);
    `CHECK_EQ(res, '0, "sqrt(0)")
    root(maxpos(), res, lat);
    `CHECK_EQ(res, from_real(pow2(124)), "sqrt(maxpos)")
    for (int i = 0; i < 300; i++) begin
      real c;
      c = rand_real(24, 12);
      exact(c < 0.0 ? -c : c);
    end
    for (int i = 0; i < 300; i++) begin
      real ra;
      ra = rand_real(50, 200);
      if (ra < 0.0) ra = -ra;
      root(from_real(ra), res, lat);
      `CHECK_TRUE(close(res, $sqrt(to_real(from_real(ra)))), $sformatf("sqrt(%g) within 1 ulp", ra))
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
