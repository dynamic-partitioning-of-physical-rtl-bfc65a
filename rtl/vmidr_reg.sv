// vmidr_reg: the VM ID register (VMIDR) of one processor.
//
// Holds the ID of the VM running on the processor; 0 is the hypervisor.
// Software cannot write it: only Pro-mem loads it (we/wdata), on hypervisor
// start, VM creation, VM Entry and VM Exit. The register itself follows the
// source; the reset value 0 and the is_hv flag are this design's choices.
//
// Timing: wdata appears on vmidr the cycle after we. Reset clears it to 0.
module vmidr_reg
  import asmi_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  we,
  input  vmid_t wdata,
  output vmid_t vmidr,
  output logic  is_hv   // hypervisor running
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  vmidr <= HV_VMID;
    else if (we) vmidr <= wdata;
  end

  assign is_hv = (vmidr == HV_VMID);

endmodule
