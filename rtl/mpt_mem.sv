// mpt_mem: the Memory Protection Table (MPT) with its page-use map.
//
// One entry per physical segment, indexed by segment ID: whether the segment
// is allotted, to which VM ID (0 = hypervisor), and whether it is its owner's
// first segment. Beside each entry sits a PPS-bit page-use word, bit p set
// when page p of the segment has been handed out.
//
// The SegID -> VMID table follows the source, which keeps it in a reserved
// area of primary memory that only Pro-mem can reach. Here it is an on-chip
// array owned by Pro-mem and read without delay; the controller writes a
// copy of every entry to the reserved area (segment 0), which is fenced off
// (never allotted, refused by the access check). The page-use word is this
// design's addition, needed to find free pages inside allotted segments.
//
// Interface: one write port (entry and page word written separately), one
// read port for the controller (a) and one for the access check (b). Reads
// are combinational, writes land at the clock edge. Reset empties the table
// by clearing the valid bits; the rest of an entry is don't-care until its
// segment is allotted, when the controller writes both entry and page word.
module mpt_mem
  import asmi_pkg::*;
#(
  parameter int SEG_W  = DEF_SEG_W,
  parameter int PIDX_W = DEF_PIDX_W,
  localparam int NSEG  = 1 << SEG_W,
  localparam int PPS   = 1 << PIDX_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // write port
  input  logic             we,
  input  logic [SEG_W-1:0] waddr,
  input  mpt_entry_t       wentry,
  input  logic             pm_we,
  input  logic [SEG_W-1:0] pm_waddr,
  input  logic [PPS-1:0]   pm_wdata,
  // controller read port
  input  logic [SEG_W-1:0] a_addr,
  output mpt_entry_t       a_entry,
  output logic [PPS-1:0]   a_pmap,
  // access-check read port
  input  logic [SEG_W-1:0] b_addr,
  output mpt_entry_t       b_entry
);

  logic [NSEG-1:0] valid;
  logic            first [NSEG];
  vmid_t           owner [NSEG];
  logic [PPS-1:0]  pmap  [NSEG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  valid <= '0;
    else if (we) valid[waddr] <= wentry.valid;
  end

  always_ff @(posedge clk) begin
    if (we) begin
      first[waddr] <= wentry.first;
      owner[waddr] <= wentry.vmid;
    end
    if (pm_we) pmap[pm_waddr] <= pm_wdata;
  end

  always_comb begin
    a_entry = '{valid: valid[a_addr], first: first[a_addr], vmid: owner[a_addr]};
    b_entry = '{valid: valid[b_addr], first: first[b_addr], vmid: owner[b_addr]};
    a_pmap  = pmap[a_addr];
  end

endmodule
