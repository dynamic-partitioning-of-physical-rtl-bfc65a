// asmi_pkg: types and constants shared by the ASMI memory-isolation blocks.
//
// Physical memory is split into equal segments, each holding a fixed number
// of pages. A physical address is {segment, page-in-segment, byte offset}.
// The 32-bit physical address space follows the 0x00000000..0xFFFFFFFF range
// of the address map; the 4 KiB page (12 offset bits), 256 pages per segment
// and 8-bit VM IDs are this design's choices, the source gives no sizes.
// Hypervisor owns VM ID 0, as in the source's protection table.
package asmi_pkg;

  localparam int PAGE_W     = 12;  // byte offset inside a 4 KiB page
  localparam int DEF_PIDX_W = 8;   // 256 pages per segment (1 MiB segments)
  localparam int DEF_SEG_W  = 12;  // 4096 segments -> 32-bit physical address
  localparam int VMID_W     = 8;   // up to 256 IDs, hypervisor included
  localparam int NVMID      = 1 << VMID_W;
  localparam int TOT_W      = VMID_W + 1;  // TOT counts up to NVMID
  localparam int DATA_W     = 32;  // memory word (VMIDR is saved zero-extended)

  typedef logic [VMID_W-1:0] vmid_t;

  localparam vmid_t HV_VMID = '0;  // VMID 0 marks hypervisor segments

  // One Memory Protection Table entry (indexed by segment ID).
  //   valid : segment is allotted
  //   first : segment is the owner's first segment; its page 0 keeps the
  //           owner's saved VMIDR word and is closed to software
  //   vmid  : owner
  typedef struct packed {
    logic  valid;
    logic  first;
    vmid_t vmid;
  } mpt_entry_t;

  // Requests from the processor to Pro-mem.
  typedef enum logic [2:0] {
    OP_HV_START   = 3'd0,  // hypervisor loaded by the boot firmware; arg = TSEG
    OP_VM_CREATE  = 3'd1,  // hypervisor creates a VM
    OP_VM_DESTROY = 3'd2,  // hypervisor destroys VM cmd_vmid
    OP_VM_ENTRY   = 3'd3,  // VM Entry to VM cmd_vmid
    OP_VM_EXIT    = 3'd4,  // VM Exit back to the hypervisor
    OP_PAGE_ALLOC = 3'd5,  // running VM asks for a page
    OP_PAGE_FREE  = 3'd6   // running VM gives back the page at arg
  } op_e;

  typedef enum logic [2:0] {
    ST_OK       = 3'd0,
    ST_MEM_FULL = 3'd1,  // memory full exception
    ST_RECLAIM  = 3'd2,  // no free segment; an over-quota VM was told to swap
    ST_DENIED   = 3'd3   // request not allowed for the running VM
  } status_e;

  // Why an access was refused.
  typedef enum logic [2:0] {
    AF_NONE     = 3'd0,
    AF_MPT_AREA = 3'd1,  // segment 0 holds the MPT itself
    AF_RANGE    = 3'd2,  // segment beyond TSEG
    AF_FREE     = 3'd3,  // segment not allotted
    AF_OWNER    = 3'd4,  // segment allotted to another VM
    AF_SAVE     = 3'd5   // VMIDR save page
  } afault_e;

endpackage
