// tb_fig1_mpt: builds, through ordinary requests, the example protection
// table of the ASMI address map: segment 1 -> hypervisor (ID 0), segment 2
// -> VM 2, segment 5 -> VM 3, all other segments free. Default sizes.
//
// Sequence: hypervisor takes segment 1; VMs 1, 2, 3 are created; VM 2 takes
// segment 2; VM 1 takes segments 3 and 4 (fills 3); VM 3 takes segment 5;
// VM 1 is destroyed, which frees 3 and 4. The table is then read back from
// the MPT and from its copy in memory (segment 0), and each owner's access
// rights are probed.
module tb_fig1_mpt;
  import asmi_pkg::*;
  localparam int SEG_W = DEF_SEG_W, PIDX_W = DEF_PIDX_W;
  localparam int PADDR_W = SEG_W + PIDX_W + PAGE_W, CNT_W = SEG_W + 1;
  localparam int PPS = 1 << PIDX_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 0, cmd_ready;
  op_e cmd_op = OP_HV_START;
  vmid_t cmd_vmid = '0;
  logic [PADDR_W-1:0] cmd_arg = '0;
  logic rsp_valid;
  status_e rsp_status;
  logic [PADDR_W-1:0] rsp_addr;
  vmid_t rsp_vmid;
  logic reclaim_valid;
  vmid_t reclaim_vmid;
  logic [CNT_W-1:0] reclaim_count;
  vmid_t vmidr;
  logic [CNT_W-1:0] mseg;
  logic [TOT_W-1:0] tot;
  logic pu_req = 0, pu_we = 0;
  logic [PADDR_W-1:0] pu_addr = '0, pu_paddr;
  logic [DATA_W-1:0] pu_wdata = '0, pu_rdata;
  logic pu_ack, pu_fault, pu_stall;
  afault_e pu_cause;
  logic mem_req, mem_we, mem_ack;
  logic [PADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;
  int checks = 0, failures = 0;

  asmi_top dut (.*);
  mem_model #(.AW(PADDR_W), .DW(DATA_W), .MAX_LAT(2), .FILL(32'hFFFF_FFFF)) u_mem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .rdata(mem_rdata), .ack(mem_ack));

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cmd(input op_e op, input vmid_t vm, input logic [PADDR_W-1:0] arg,
                     output status_e st, output logic [PADDR_W-1:0] a);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_vmid = vm; cmd_arg = arg;
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    st = rsp_status; a = rsp_addr;
  endtask

  task automatic ok_cmd(input string what, input op_e op, input vmid_t vm);
    status_e st; logic [PADDR_W-1:0] a;
    cmd(op, vm, '0, st, a);
    check(what, st == ST_OK);
  endtask

  task automatic alloc_in(input int seg);
    status_e st; logic [PADDR_W-1:0] a;
    cmd(OP_PAGE_ALLOC, '0, '0, st, a);
    check($sformatf("VM %0d page in segment %0d", vmidr, seg),
          st == ST_OK && int'(a[PADDR_W-1 -: SEG_W]) == seg);
  endtask

  task automatic probe(input int seg, input bit allowed);
    @(negedge clk);
    pu_req = 1; pu_we = 0; pu_addr = {SEG_W'(seg), PIDX_W'(3), PAGE_W'(0)};
    forever begin #1; if (pu_fault || pu_ack) break; @(negedge clk); end
    check($sformatf("VMIDR %0d access to segment %0d %s", vmidr, seg,
                    allowed ? "allowed" : "refused"), pu_ack == allowed && pu_fault == !allowed);
    @(negedge clk);
    pu_req = 0;
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    status_e st; logic [PADDR_W-1:0] a;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cmd(OP_HV_START, '0, PADDR_W'(1 << SEG_W), st, a);
    check("hypervisor start", st == ST_OK);
    alloc_in(1);
    for (int v = 1; v <= 3; v++) begin
      ok_cmd($sformatf("create VM %0d", v), OP_VM_CREATE, '0);
      check($sformatf("VM %0d running", v), int'(vmidr) == v);
      ok_cmd("exit", OP_VM_EXIT, '0);
    end
    ok_cmd("enter VM 2", OP_VM_ENTRY, 8'd2);
    alloc_in(2);
    ok_cmd("exit", OP_VM_EXIT, '0);
    ok_cmd("enter VM 1", OP_VM_ENTRY, 8'd1);
    for (int k = 0; k < PPS - 1; k++) alloc_in(3);   // pages 1..255 of segment 3
    alloc_in(4);
    ok_cmd("exit", OP_VM_EXIT, '0);
    ok_cmd("enter VM 3", OP_VM_ENTRY, 8'd3);
    alloc_in(5);
    ok_cmd("exit", OP_VM_EXIT, '0);
    ok_cmd("destroy VM 1", OP_VM_DESTROY, 8'd1);

    // the table of the address map
    for (int s = 0; s < 8; s++) begin
      automatic logic [DATA_W-1:0] w = u_mem.peek(PADDR_W'(s * 4));
      automatic bit exp_valid = (s == 1 || s == 2 || s == 5);
      automatic int exp_vmid = (s == 1) ? 0 : (s == 2) ? 2 : 3;
      check($sformatf("MPT row %0d", s), dut.u_mpt.valid[s] == exp_valid &&
            (!exp_valid || int'(dut.u_mpt.owner[s]) == exp_vmid));
      check($sformatf("MPT copy in memory row %0d", s),
            w[VMID_W+1] == exp_valid && (!exp_valid || int'(w[VMID_W-1:0]) == exp_vmid));
    end
    // each owner reaches only its own row
    probe(1, 1); probe(2, 0); probe(5, 0); probe(3, 0);
    ok_cmd("enter VM 2", OP_VM_ENTRY, 8'd2);
    probe(1, 0); probe(2, 1); probe(5, 0);
    ok_cmd("exit", OP_VM_EXIT, '0);
    ok_cmd("enter VM 3", OP_VM_ENTRY, 8'd3);
    probe(1, 0); probe(2, 0); probe(5, 1); probe(4, 0);
    ok_cmd("exit", OP_VM_EXIT, '0);
    check("TOT = hypervisor + 2 VMs, MSEG = 4096 / 3", tot == 3 && mseg == 1365);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
