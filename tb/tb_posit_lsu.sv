// tb_posit_lsu: self-checking test of posit_lsu.
//
// A memory model with random request-ready and response delays answers the
// unit. Checked for random PLW/PLD/PSW/PSD: address = base + sign-extended
// offset, access size, store data, the PLW sign extension, and that done
// comes once, after the store is accepted or the load data returns. A cycle
// watchdog ends a hung run.
`include "tb_check.svh"
module tb_posit_lsu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic req = 0, st, dw, mreq, mrdy = 0, mwe, mrsp = 0, done;
  logic [63:0] base, maddr, mwd, mrd, sd, ld;
  logic [11:0] imm;
  logic [1:0]  msize;
  int cyc = 0;

  posit_lsu #(.XLEN(64), .N(64)) dut (.clk(clk), .rst_n(rst_n), .req_valid(req), .is_store(st), .dword(dw),
    .base(base), .imm(imm), .store_data(sd), .mem_req_valid(mreq), .mem_req_ready(mrdy), .mem_addr(maddr),
    .mem_we(mwe), .mem_size(msize), .mem_wdata(mwd), .mem_rsp_valid(mrsp), .mem_rdata(mrd),
    .done(done), .load_data(ld));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    st = 0; dw = 0; base = 0; imm = 0; sd = 0; mrd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      logic [63:0] word;
      int dones;
      st = $urandom_range(1, 0); dw = $urandom_range(1, 0);
      base = {$urandom, $urandom}; imm = 12'($urandom); sd = {$urandom, $urandom};
      word = {$urandom, $urandom};
      req = 1;
      @(negedge clk) req = 0;
      dones = 0;
      repeat ($urandom_range(3, 0)) begin
        @(negedge clk);
        if (done) dones++;
      end
      `CHECK_EQ(mreq, 1'b1, "request raised")
      `CHECK_EQ(maddr, base + {{52{imm[11]}}, imm}, "address")
      `CHECK_EQ(mwe, st, "write enable")
      `CHECK_EQ(msize, dw ? 2'd3 : 2'd2, "size")
      if (st) `CHECK_EQ(mwd, dw ? sd : {32'h0, sd[31:0]}, "store data")
      mrdy = 1; #1;
      if (done) dones++;
      @(negedge clk) mrdy = 0;
      if (!st) begin
        repeat ($urandom_range(3, 0)) begin
          `CHECK_EQ(done, 1'b0, "no done before data")
          @(negedge clk);
        end
        mrsp = 1; mrd = word; #1;
        if (done) begin
          dones++;
          `CHECK_EQ(ld, dw ? word : {{32{word[31]}}, word[31:0]}, "load data")
        end
        @(negedge clk) mrsp = 0;
      end
      `CHECK_EQ(dones, 1, "one done per access")
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
