// mem_arb: shares the primary-memory port between Pro-mem's own VMIDR
// save/restore (port c) and the checked accesses of the paging unit (port p).
//
// Both sides use the same handshake: req held with we/addr/wdata until a
// one-cycle ack, which also carries rdata. Pro-mem has priority when both
// ask in the same cycle; a transaction, once granted, keeps the port until
// its ack. The arbiter is this design's own; the source only places Pro-mem
// between the paging unit and primary memory.
module mem_arb
  import asmi_pkg::*;
#(
  parameter int PADDR_W = DEF_SEG_W + DEF_PIDX_W + PAGE_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               c_req,
  input  logic               c_we,
  input  logic [PADDR_W-1:0] c_addr,
  input  logic [DATA_W-1:0]  c_wdata,
  output logic               c_ack,
  input  logic               p_req,
  input  logic               p_we,
  input  logic [PADDR_W-1:0] p_addr,
  input  logic [DATA_W-1:0]  p_wdata,
  output logic               p_ack,
  output logic               mem_req,
  output logic               mem_we,
  output logic [PADDR_W-1:0] mem_addr,
  output logic [DATA_W-1:0]  mem_wdata,
  input  logic               mem_ack
);

  logic busy, owner_c;   // a transaction is open, and whose it is
  logic sel_c;

  assign sel_c     = busy ? owner_c : c_req;
  assign mem_req   = busy || c_req || p_req;
  assign mem_we    = sel_c ? c_we    : p_we;
  assign mem_addr  = sel_c ? c_addr  : p_addr;
  assign mem_wdata = sel_c ? c_wdata : p_wdata;
  assign c_ack     = mem_ack &&  sel_c;
  assign p_ack     = mem_ack && !sel_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      owner_c <= 1'b0;
    end else if (mem_req && !mem_ack) begin
      busy    <= 1'b1;
      owner_c <= sel_c;
    end else if (mem_ack) begin
      busy    <= 1'b0;
    end
  end

endmodule
