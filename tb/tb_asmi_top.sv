// tb_asmi_top: end-to-end test of the ASMI subsystem at its default sizes
// (32-bit physical address, 4096 segments of 256 pages of 4 KiB, 8-bit VM
// IDs), with a behavioural primary memory of random latency.
//
// Phase A boots with TSEG = 4096: hypervisor and two VMs allocate pages,
// write and read their own pages through the checked access path, are
// refused every other kind of access (MPT area, free segment, segment of
// another VM, VMIDR save page), switch with VM Entry / VM Exit (VMIDR saved
// to and reloaded from memory), a paging-unit access stalls during a
// switch, and a VM is destroyed.
// Phase B reboots with TSEG = 4 so that memory fills up: a VM above its
// share MSEG is told to give segments back (reclaim), frees them, the
// freed segment goes to the requester, then the memory-full exception,
// a segment beyond TSEG, and reuse of a destroyed VM's segment.
// The MPT copy that Pro-mem keeps in segment 0 of memory is checked too.
// Expected addresses and IDs are worked out by hand from the allocation
// rules, not read from the design. Each mechanism is counted and must occur.
module tb_asmi_top;
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

  mem_model #(.AW(PADDR_W), .DW(DATA_W), .MAX_LAT(4), .FILL(32'hDEAD_BEEF)) u_mem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .rdata(mem_rdata), .ack(mem_ack)
  );

  always #5 clk = ~clk;

  // mechanism counters
  int n_alloc_first, n_alloc_own, n_alloc_new, n_reclaim, n_mem_full, n_denied;
  int n_seg_release, n_destroy, n_entry, n_exit, n_create, n_stall;
  int n_fault[8];
  int n_rd_ok, n_wr_ok;

  vmid_t last_reclaim_vmid;
  int    last_reclaim_count, n_reclaim_pulse;
  always @(posedge clk) if (reclaim_valid) begin
    last_reclaim_vmid  <= reclaim_vmid;
    last_reclaim_count <= int'(reclaim_count);
    n_reclaim_pulse++;
  end
  always @(posedge clk) if (pu_stall) n_stall++;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t vmidr=%0d rsp=%s addr=%h vmid=%0d)", what, $time, vmidr,
               rsp_status.name(), rsp_addr, rsp_vmid);
    end
  endtask

  task automatic cmd(input op_e op, input vmid_t vm, input logic [PADDR_W-1:0] arg,
                     output status_e st, output logic [PADDR_W-1:0] a, output vmid_t id);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_vmid = vm; cmd_arg = arg;
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    st = rsp_status; a = rsp_addr; id = rsp_vmid;
  endtask

  function automatic logic [PADDR_W-1:0] pa(input int seg, input int page, input int off = 0);
    return {SEG_W'(seg), PIDX_W'(page), PAGE_W'(off)};
  endfunction

  task automatic alloc_expect(input int seg, input int page);
    status_e st; logic [PADDR_W-1:0] a; vmid_t id;
    cmd(OP_PAGE_ALLOC, '0, '0, st, a, id);
    check($sformatf("alloc -> seg %0d page %0d", seg, page), st == ST_OK && a == pa(seg, page));
  endtask

  task automatic simple(input string what, input op_e op, input vmid_t vm,
                        input logic [PADDR_W-1:0] arg, input status_e exp);
    status_e st; logic [PADDR_W-1:0] a; vmid_t id;
    cmd(op, vm, arg, st, a, id);
    check(what, st == exp);
    if (st == ST_DENIED) n_denied++;
  endtask

  task automatic access(input logic we, input logic [PADDR_W-1:0] addr,
                        input logic [DATA_W-1:0] wdata,
                        output logic fault, output afault_e cause, output logic [DATA_W-1:0] rdata);
    @(negedge clk);
    pu_req = 1; pu_we = we; pu_addr = addr; pu_wdata = wdata;
    forever begin
      #1;
      if (pu_fault || pu_ack) break;
      @(negedge clk);
    end
    fault = pu_fault; cause = pu_cause; rdata = pu_rdata;
    @(negedge clk);
    pu_req = 0;
  endtask

  task automatic expect_fault(input logic [PADDR_W-1:0] addr, input afault_e exp);
    logic f; afault_e c; logic [DATA_W-1:0] d;
    access(0, addr, '0, f, c, d);
    check($sformatf("fault %s at %h", exp.name(), addr), f && c == exp);
    n_fault[int'(c)]++;
  endtask

  task automatic write_ok(input logic [PADDR_W-1:0] addr, input logic [DATA_W-1:0] data);
    logic f; afault_e c; logic [DATA_W-1:0] d;
    access(1, addr, data, f, c, d);
    check($sformatf("write %h", addr), !f && u_mem.peek(addr) == data && pu_paddr == addr);
    n_wr_ok++;
  endtask

  task automatic read_ok(input logic [PADDR_W-1:0] addr, input logic [DATA_W-1:0] data);
    logic f; afault_e c; logic [DATA_W-1:0] d;
    access(0, addr, '0, f, c, d);
    check($sformatf("read %h", addr), !f && d == data);
    n_rd_ok++;
  endtask

  task automatic wait_segmax();
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
  endtask

  task automatic create(input vmid_t exp_id);
    status_e st; logic [PADDR_W-1:0] a; vmid_t id;
    cmd(OP_VM_CREATE, '0, '0, st, a, id);
    check($sformatf("create vm %0d", exp_id), st == ST_OK && id == exp_id && vmidr == exp_id);
    n_create++;
  endtask

  task automatic vm_exit(input vmid_t from);
    status_e st; logic [PADDR_W-1:0] a; vmid_t id;
    cmd(OP_VM_EXIT, '0, '0, st, a, id);
    check($sformatf("exit from vm %0d", from), st == ST_OK && vmidr == 0);
    n_exit++;
  endtask

  task automatic vm_entry(input vmid_t to);
    status_e st; logic [PADDR_W-1:0] a; vmid_t id;
    cmd(OP_VM_ENTRY, to, '0, st, a, id);
    check($sformatf("entry to vm %0d", to), st == ST_OK && vmidr == to);
    n_entry++;
  endtask

  task automatic reboot(input int tseg);
    status_e st; logic [PADDR_W-1:0] a; vmid_t id;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cmd(OP_HV_START, '0, PADDR_W'(tseg), st, a, id);
    check("hypervisor start", st == ST_OK && id == 0 && vmidr == 0 && tot == 1);
    wait_segmax();
    check("MSEG = TSEG / 1", int'(mseg) == tseg);
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    status_e st; logic [PADDR_W-1:0] a; vmid_t id;
    logic f; afault_e c; logic [DATA_W-1:0] d;

    // ---------------- phase A: full memory, isolation and switching
    reboot(4096);
    check("MPT area cleared at start", u_mem.peek(PADDR_W'(0)) == 0 &&
          u_mem.peek(PADDR_W'(4095 * 4)) == 0 && u_mem.n_writes >= 4096);
    simple("second hypervisor start refused", OP_HV_START, '0, PADDR_W'(10), ST_DENIED);
    alloc_expect(1, 1); n_alloc_first++;   // page 0 of segment 1 keeps the saved VMIDR
    alloc_expect(1, 2); n_alloc_own++;
    write_ok(pa(1, 1, 8), 32'h0000_AAAA);
    create(1);
    check("hypervisor VMIDR saved", u_mem.peek(pa(1, 0)) == 0);
    wait_segmax();
    check("TOT 2, MSEG 2048", tot == 2 && mseg == 2048);
    alloc_expect(2, 1); n_alloc_first++;
    alloc_expect(2, 2); n_alloc_own++;
    write_ok(pa(2, 1, 16), 32'hCAFE_0001);
    read_ok(pa(2, 1, 16), 32'hCAFE_0001);
    expect_fault(pa(1, 1, 8), AF_OWNER);     // hypervisor page
    expect_fault(pa(0, 0, 64), AF_MPT_AREA);
    expect_fault(pa(2, 0), AF_SAVE);
    expect_fault(pa(3, 5), AF_FREE);
    simple("VM may not create", OP_VM_CREATE, '0, '0, ST_DENIED);
    simple("VM may not destroy", OP_VM_DESTROY, 8'd1, '0, ST_DENIED);
    vm_exit(1);
    check("VM 1 VMIDR saved in its first segment", u_mem.peek(pa(2, 0)) == 1);
    read_ok(pa(1, 1, 8), 32'h0000_AAAA);
    expect_fault(pa(2, 1, 16), AF_OWNER);    // the hypervisor cannot read VM 1
    create(2);
    alloc_expect(3, 1);
    write_ok(pa(3, 7, 4), 32'h2222_0002);
    expect_fault(pa(2, 1, 16), AF_OWNER);
    vm_exit(2);
    // an access arriving during VM Entry waits and is judged for the new VM
    fork
      vm_entry(1);
      begin
        @(negedge clk);
        while (!dut.ctx_busy) @(negedge clk);
        access(0, pa(2, 1, 16), '0, f, c, d);
        check("stalled access served after the switch", !f && d == 32'hCAFE_0001);
      end
    join
    check("entry stored hypervisor VMIDR", u_mem.peek(pa(1, 0)) == 0);
    vm_exit(1);
    cmd(OP_VM_DESTROY, 8'd2, '0, st, a, id);
    check("destroy vm 2", st == ST_OK);
    n_destroy++;
    wait_segmax();
    check("TOT back to 2", tot == 2 && mseg == 2048);
    expect_fault(pa(3, 7, 4), AF_FREE);
    simple("entry to destroyed VM refused", OP_VM_ENTRY, 8'd2, '0, ST_DENIED);
    simple("entry to the hypervisor ID refused", OP_VM_ENTRY, 8'd0, '0, ST_DENIED);
    create(2);                                // the ID comes back
    vm_exit(2);

    // ---------------- phase B: memory fills up (TSEG = 4)
    reboot(4);
    alloc_expect(1, 1);
    create(1);
    for (int k = 0; k < 2 * PPS - 1; k++) begin
      if (k < PPS - 1) alloc_expect(2, k + 1);
      else alloc_expect(3, k - (PPS - 1));
      if (k == PPS - 1) n_alloc_new++;
      else if (k > 0) n_alloc_own++;
    end
    vm_exit(1);
    create(2);
    wait_segmax();
    check("TOT 3, MSEG 1", tot == 3 && mseg == 1);
    n_reclaim_pulse = 0;
    cmd(OP_PAGE_ALLOC, '0, '0, st, a, id);
    @(negedge clk);
    check("VM 2 told to wait", st == ST_RECLAIM);
    check("VM 1 told to give back 1 segment",
          n_reclaim_pulse == 1 && last_reclaim_vmid == 1 && last_reclaim_count == 1);
    n_reclaim++;
    vm_exit(2);
    vm_entry(1);
    for (int p = 0; p < PPS; p++)
      simple($sformatf("VM 1 frees seg 3 page %0d", p), OP_PAGE_FREE, '0, pa(3, p), ST_OK);
    n_seg_release++;
    expect_fault(pa(3, 0), AF_FREE);
    simple("page 0 of the first segment cannot be freed", OP_PAGE_FREE, '0, pa(2, 0), ST_DENIED);
    simple("free page twice refused", OP_PAGE_FREE, '0, pa(3, 4), ST_DENIED);
    vm_exit(1);
    vm_entry(2);
    alloc_expect(3, 1); n_alloc_first++;
    for (int p = 2; p < PPS; p++) alloc_expect(3, p);
    cmd(OP_PAGE_ALLOC, '0, '0, st, a, id);
    check("memory full exception", st == ST_MEM_FULL);
    n_mem_full++;
    expect_fault(pa(4, 0), AF_RANGE);
    expect_fault(pa(2, 3), AF_OWNER);
    simple("VM 2 cannot free VM 1 page", OP_PAGE_FREE, '0, pa(2, 3), ST_DENIED);
    vm_exit(2);
    cmd(OP_VM_DESTROY, 8'd1, '0, st, a, id);
    check("destroy vm 1", st == ST_OK);
    n_destroy++;
    wait_segmax();
    check("TOT 2, MSEG 2", tot == 2 && mseg == 2);
    vm_entry(2);
    alloc_expect(2, 0);        // VM 1's old segment, not VM 2's first: page 0 given
    n_alloc_new++;
    write_ok(pa(2, 0, 0), 32'h5555_0000);
    read_ok(pa(2, 0, 0), 32'h5555_0000);
    vm_exit(2);

    // the MPT copy in memory: segment 0 holds one word per segment
    check("MPT word seg 1 = hypervisor, first",
          u_mem.peek(PADDR_W'(1 * 4)) == {22'd0, 1'b1, 1'b1, 8'd0});
    check("MPT word seg 2 = VM 2, not first",
          u_mem.peek(PADDR_W'(2 * 4)) == {22'd0, 1'b1, 1'b0, 8'd2});
    check("MPT word seg 3 = VM 2, first",
          u_mem.peek(PADDR_W'(3 * 4)) == {22'd0, 1'b1, 1'b1, 8'd2});
    // words beyond TSEG keep what the phase A clear left (memory is not reset)
    check("MPT area beyond TSEG untouched", u_mem.peek(PADDR_W'(4 * 4)) == 0);

    // ---------------- every mechanism happened
    check("alloc in first segment seen", n_alloc_first > 0);
    check("alloc in own segment seen", n_alloc_own > 0);
    check("alloc of a further segment seen", n_alloc_new > 0);
    check("reclaim seen", n_reclaim > 0);
    check("memory full seen", n_mem_full > 0);
    check("segment release seen", n_seg_release > 0);
    check("destroy seen", n_destroy > 0);
    check("create seen", n_create > 0);
    check("entry seen", n_entry > 0);
    check("exit seen", n_exit > 0);
    check("stall seen", n_stall > 0);
    check("denied request seen", n_denied > 0);
    for (int k = 1; k < 6; k++) check($sformatf("fault cause %0d seen", k), n_fault[k] > 0);
    $display("mechanisms: first=%0d own=%0d new=%0d reclaim=%0d full=%0d release=%0d destroy=%0d create=%0d entry=%0d exit=%0d stall=%0d denied=%0d",
             n_alloc_first, n_alloc_own, n_alloc_new, n_reclaim, n_mem_full, n_seg_release,
             n_destroy, n_create, n_entry, n_exit, n_stall, n_denied);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
