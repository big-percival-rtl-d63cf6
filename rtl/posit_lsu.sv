// posit_lsu: the posit part of the load/store unit (PLW, PLD, PSW, PSD).
//
// On req_valid it forms the byte address base + sign-extended imm and raises
// a memory request, held until mem_req_ready. A store finishes when the
// request is accepted; a load waits for mem_rsp_valid. done pulses for one
// cycle at the end and, for loads, load_data holds the value for the posit
// register file in that cycle: PLD takes the 64-bit word, PLW sign-extends the
// 32-bit word. Data on the memory port is aligned to bit 0. The paper says
// the LSU was extended for double-width posit loads and stores; the cache,
// TLB and page-table walker behind mem_* are the base core's, and this port,
// its handshake and the PLW extension are this design's choices.
module posit_lsu #(
  parameter int XLEN = 64,
  parameter int N    = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  input  logic            is_store,
  input  logic            dword,
  input  logic [XLEN-1:0] base,
  input  logic [11:0]     imm,
  input  logic [N-1:0]    store_data,
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output logic [XLEN-1:0] mem_addr,
  output logic            mem_we,
  output logic [1:0]      mem_size,
  output logic [63:0]     mem_wdata,
  input  logic            mem_rsp_valid,
  input  logic [63:0]     mem_rdata,
  output logic            done,
  output logic [N-1:0]    load_data
);

  typedef enum logic [1:0] {L_IDLE, L_REQ, L_RSP} lstate_e;
  lstate_e state;
  logic    dword_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= L_IDLE;
      mem_addr  <= '0;
      mem_we    <= 1'b0;
      mem_size  <= 2'd0;
      mem_wdata <= '0;
      dword_q   <= 1'b0;
    end else begin
      unique case (state)
        L_IDLE: if (req_valid) begin
          mem_addr  <= base + XLEN'($signed(imm));
          mem_we    <= is_store;
          mem_size  <= dword ? 2'd3 : 2'd2;
          mem_wdata <= dword ? 64'(store_data) : {32'h0, store_data[31:0]};
          dword_q   <= dword;
          state     <= L_REQ;
        end
        L_REQ: if (mem_req_ready) state <= mem_we ? L_IDLE : L_RSP;
        L_RSP: if (mem_rsp_valid) state <= L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end

  assign mem_req_valid = (state == L_REQ);
  assign done = ((state == L_REQ) && mem_req_ready && mem_we) ||
                ((state == L_RSP) && mem_rsp_valid);
  assign load_data = dword_q ? N'(mem_rdata) : N'($signed(mem_rdata[31:0]));

endmodule
