// asmi_top: ASMI memory-isolation subsystem of one processor.
//
// Physical memory is cut into equal segments; each segment belongs to at
// most one VM (ID 0 = hypervisor), as recorded in the Memory Protection
// Table. The Pro-mem unit sits between the paging unit and primary memory:
// it hands out pages and segments on request (allocation with a fair share
// MSEG = TSEG / TOT when memory is full), assigns VM IDs, loads the VMIDR
// register, saves/restores VMIDR on VM Entry / VM Exit, and checks every
// access of the paging unit against the MPT, so a VM can only reach its own
// segments whatever the hypervisor does.
//
// Blocks: promem_ctrl (requests), mpt_mem (MPT + page-use words),
// segmax_unit (TSEG, TOT, MSEG), vmid_alloc (unique IDs), access_check
// (per-access validation), vmidr_reg (the processor's VMIDR) and mem_arb
// (memory port shared by Pro-mem and the paging unit).
//
// Interfaces:
//  cmd_* / rsp_*  requests from the processor (asmi_pkg::op_e), one at a time;
//                 cmd accepted when cmd_valid && cmd_ready, one rsp_valid
//                 pulse per request.
//  reclaim_*      one-cycle notice to a VM holding more than MSEG segments.
//  pu_*           accesses of the paging unit: pu_req held until pu_ack
//                 (done) or pu_fault (exception, no memory access); pu_paddr
//                 returns the checked physical address. While
//                 Pro-mem saves/restores VMIDR (ctx_busy) an access waits.
//  mem_*          primary memory: req held until a one-cycle ack.
// The split of functions and the handshakes are this design's choices; the
// source gives the functions (see each block).
module asmi_top
  import asmi_pkg::*;
#(
  parameter int SEG_W  = DEF_SEG_W,
  parameter int PIDX_W = DEF_PIDX_W,
  localparam int PADDR_W = SEG_W + PIDX_W + PAGE_W,
  localparam int CNT_W   = SEG_W + 1,
  localparam int PPS     = 1 << PIDX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // processor requests
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  op_e                cmd_op,
  input  vmid_t              cmd_vmid,
  input  logic [PADDR_W-1:0] cmd_arg,
  output logic               rsp_valid,
  output status_e            rsp_status,
  output logic [PADDR_W-1:0] rsp_addr,
  output vmid_t              rsp_vmid,
  output logic               reclaim_valid,
  output vmid_t              reclaim_vmid,
  output logic [CNT_W-1:0]   reclaim_count,
  output vmid_t              vmidr,
  output logic [CNT_W-1:0]   mseg,
  output logic [TOT_W-1:0]   tot,
  // paging unit
  input  logic               pu_req,
  input  logic               pu_we,
  input  logic [PADDR_W-1:0] pu_addr,
  input  logic [DATA_W-1:0]  pu_wdata,
  output logic [DATA_W-1:0]  pu_rdata,
  output logic               pu_ack,
  output logic               pu_fault,
  output afault_e            pu_cause,
  output logic [PADDR_W-1:0] pu_paddr,   // checked physical address
  output logic               pu_stall,
  // primary memory
  output logic               mem_req,
  output logic               mem_we,
  output logic [PADDR_W-1:0] mem_addr,
  output logic [DATA_W-1:0]  mem_wdata,
  input  logic [DATA_W-1:0]  mem_rdata,
  input  logic               mem_ack
);

  // VMIDR
  logic  vmidr_we, is_hv;
  vmid_t vmidr_wdata;

  // SegMax
  logic             tseg_we, tot_inc, tot_dec, sm_busy, tseg_locked;
  logic [CNT_W-1:0] tseg_wdata, tseg;

  // VM IDs
  logic  id_free_ok, id_alloc, id_release, id_used;
  vmid_t id_free_id, id_release_id, id_query;
  logic [TOT_W-1:0] id_count;

  // MPT
  logic             mpt_we, pm_we;
  logic [SEG_W-1:0] mpt_waddr, pm_waddr, mpt_addr, ac_mpt_addr;
  mpt_entry_t       mpt_wentry, mpt_entry, ac_mpt_entry;
  logic [PPS-1:0]   pm_wdata, mpt_pmap;

  // memory port of Pro-mem
  logic               c_req, c_we, c_ack, ctx_busy;
  logic [PADDR_W-1:0] c_addr;
  logic [DATA_W-1:0]  c_wdata;

  // access path
  logic               ac_req, ac_ok, ac_fault;
  logic [PADDR_W-1:0] ac_paddr;

  vmidr_reg u_vmidr (
    .clk, .rst_n, .we(vmidr_we), .wdata(vmidr_wdata), .vmidr, .is_hv
  );

  segmax_unit #(.SEG_W(SEG_W)) u_segmax (
    .clk, .rst_n, .tseg_we, .tseg_wdata, .tot_inc, .tot_dec,
    .tseg, .tot, .mseg, .tseg_locked, .busy(sm_busy)
  );

  vmid_alloc u_ids (
    .clk, .rst_n, .alloc(id_alloc), .free_ok(id_free_ok), .free_id(id_free_id),
    .release_en(id_release), .release_id(id_release_id),
    .query_id(id_query), .query_used(id_used), .used_count(id_count)
  );

  mpt_mem #(.SEG_W(SEG_W), .PIDX_W(PIDX_W)) u_mpt (
    .clk, .rst_n,
    .we(mpt_we), .waddr(mpt_waddr), .wentry(mpt_wentry),
    .pm_we, .pm_waddr, .pm_wdata,
    .a_addr(mpt_addr), .a_entry(mpt_entry), .a_pmap(mpt_pmap),
    .b_addr(ac_mpt_addr), .b_entry(ac_mpt_entry)
  );

  promem_ctrl #(.SEG_W(SEG_W), .PIDX_W(PIDX_W)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_vmid, .cmd_arg,
    .rsp_valid, .rsp_status, .rsp_addr, .rsp_vmid,
    .reclaim_valid, .reclaim_vmid, .reclaim_count,
    .vmidr, .vmidr_we, .vmidr_wdata,
    .tseg, .mseg, .sm_busy, .tseg_we, .tseg_wdata, .tot_inc, .tot_dec,
    .id_free_ok, .id_free_id, .id_alloc, .id_release, .id_release_id,
    .id_query, .id_used,
    .mpt_we, .mpt_waddr, .mpt_wentry, .pm_we, .pm_waddr, .pm_wdata,
    .mpt_addr, .mpt_entry, .mpt_pmap,
    .m_req(c_req), .m_we(c_we), .m_addr(c_addr), .m_wdata(c_wdata),
    .m_rdata(mem_rdata), .m_ack(c_ack), .ctx_busy
  );

  // accesses wait while VMIDR is being switched
  assign pu_stall = pu_req && ctx_busy;
  assign ac_req   = pu_req && !ctx_busy;

  access_check #(.SEG_W(SEG_W), .PIDX_W(PIDX_W)) u_check (
    .req(ac_req), .addr(pu_addr), .vmidr, .tseg,
    .mpt_addr(ac_mpt_addr), .mpt_entry(ac_mpt_entry),
    .ok(ac_ok), .fault(ac_fault), .cause(pu_cause), .paddr(ac_paddr)
  );

  assign pu_fault = ac_fault;
  assign pu_paddr = ac_paddr;
  assign pu_rdata = mem_rdata;

  mem_arb #(.PADDR_W(PADDR_W)) u_arb (
    .clk, .rst_n,
    .c_req, .c_we, .c_addr, .c_wdata, .c_ack,
    .p_req(ac_ok), .p_we(pu_we), .p_addr(ac_paddr), .p_wdata(pu_wdata), .p_ack(pu_ack),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack
  );

endmodule
