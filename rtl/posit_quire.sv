// posit_quire: the quire accumulator register of the PAU.
//
// Holds the QW-bit quire. On each clock edge one of: clear (QCLR.S), negate
// (QNEG.S, 2's complement; the NaR pattern maps onto itself) or load the value
// computed by posit_quire_mac (QMADD.S / QMSUB.S). Priority clr > neg > acc_we.
// Asynchronous active-low reset clears it. The quire and its operations are
// the paper's; reset value and priority are this design's choices.
module posit_quire #(
  parameter int QW = 1024
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          neg,
  input  logic          acc_we,
  input  logic [QW-1:0] acc_in,
  output logic [QW-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= '0;
    else if (clr)    q <= '0;
    else if (neg)    q <= ~q + 1'b1;
    else if (acc_we) q <= acc_in;
  end

endmodule
