// access_check: Pro-mem's validation of every memory access.
//
// The paging unit hands over the physical address it produced from the guest
// page table. The segment field of that address indexes the MPT (mpt_addr ->
// mpt_entry); the access is allowed only when the segment is allotted to the
// VM whose ID is in VMIDR. Otherwise an exception is raised (fault) with a
// cause. That rule follows the source. This design also refuses
// - segment 0, which holds the MPT (the source keeps the MPT in memory
//   closed to all software),
// - segments at or above TSEG,
// - page 0 of an owner's first segment, where Pro-mem saves VMIDR on
//   VM Entry / VM Exit, so that no software can forge a saved ID.
// Since the guest page tables already hold real physical addresses, the
// address goes on unchanged (paddr): a single-level translation.
//
// Purely combinational: ok/fault are valid in the same cycle as addr.
module access_check
  import asmi_pkg::*;
#(
  parameter int SEG_W  = DEF_SEG_W,
  parameter int PIDX_W = DEF_PIDX_W,
  localparam int PADDR_W = SEG_W + PIDX_W + PAGE_W,
  localparam int CNT_W   = SEG_W + 1
) (
  input  logic               req,
  input  logic [PADDR_W-1:0] addr,
  input  vmid_t              vmidr,
  input  logic [CNT_W-1:0]   tseg,
  output logic [SEG_W-1:0]   mpt_addr,
  input  mpt_entry_t         mpt_entry,
  output logic               ok,
  output logic               fault,
  output afault_e            cause,
  output logic [PADDR_W-1:0] paddr
);

  logic [SEG_W-1:0]  seg;
  logic [PIDX_W-1:0] pidx;

  assign seg      = addr[PADDR_W-1 -: SEG_W];
  assign pidx     = addr[PAGE_W +: PIDX_W];
  assign mpt_addr = seg;
  assign paddr    = addr;

  always_comb begin
    if (seg == '0)                                 cause = AF_MPT_AREA;
    else if ({1'b0, seg} >= tseg)                  cause = AF_RANGE;
    else if (!mpt_entry.valid)                     cause = AF_FREE;
    else if (mpt_entry.vmid != vmidr)              cause = AF_OWNER;
    else if (mpt_entry.first && pidx == '0)        cause = AF_SAVE;
    else                                           cause = AF_NONE;
    ok    = req && (cause == AF_NONE);
    fault = req && (cause != AF_NONE);
  end

endmodule
