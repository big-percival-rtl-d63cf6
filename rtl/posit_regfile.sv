// posit_regfile: the posit register file of Big-PERCIVAL.
//
// NREGS registers of N bits (32 x 64 for posit64), two combinational read
// ports and one write port written on the rising clock edge. Register 0 is an
// ordinary register, as f0 is for RISC-V floating point. An asynchronous
// active-low reset clears every register. There is no write-to-read bypass:
// a value written in a cycle is visible in the next. The 32-entry size is the
// paper's; ports, reset and bypass behaviour are this design's choices.
module posit_regfile #(
  parameter int N     = 64,
  parameter int NREGS = 32,
  parameter int AW    = $clog2(NREGS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] raddr_a,
  input  logic [AW-1:0] raddr_b,
  output logic [N-1:0]  rdata_a,
  output logic [N-1:0]  rdata_b,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [N-1:0]  wdata
);

  logic [N-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata_a = regs[raddr_a];
  assign rdata_b = regs[raddr_b];

endmodule
