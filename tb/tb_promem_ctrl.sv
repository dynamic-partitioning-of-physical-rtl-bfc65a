// tb_promem_ctrl: random requests against a reference model of Pro-mem.
//
// The controller runs with small tables (16 segments of 4 pages) so that
// memory fills, reclaim notices and memory-full exceptions come often. It is
// wired to the real MPT, SegMax unit, ID pool and VMIDR register and to a
// behavioural memory. The testbench keeps its own copy of the MPT, page-use
// words, per-VM segment counts, TOT/TSEG and saved VMIDR words, applies
// each request to it by the allocation rules (own segment first, then a
// free segment, then reclaim from a VM above MSEG = TSEG / TOT, else memory
// full) and compares every response, the reclaim notice, VMIDR, and at the
// end the whole MPT, both the table and its copy in memory.
module tb_promem_ctrl;
  import asmi_pkg::*;
  localparam int SEG_W = 4, PIDX_W = 2;
  localparam int PADDR_W = SEG_W + PIDX_W + PAGE_W, CNT_W = SEG_W + 1;
  localparam int NSEG = 1 << SEG_W, PPS = 1 << PIDX_W;
  localparam int MAXVM = 6;   // IDs used by the test: 0..MAXVM

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
  vmid_t vmidr, vmidr_wdata;
  logic vmidr_we, is_hv;
  logic [CNT_W-1:0] tseg, mseg, tseg_wdata;
  logic [TOT_W-1:0] tot, id_count;
  logic sm_busy, tseg_we, tot_inc, tot_dec, tseg_locked;
  logic id_free_ok, id_alloc, id_release, id_used;
  vmid_t id_free_id, id_release_id, id_query;
  logic mpt_we, pm_we;
  logic [SEG_W-1:0] mpt_waddr, pm_waddr, mpt_addr, b_addr;
  mpt_entry_t mpt_wentry, mpt_entry, b_entry;
  logic [PPS-1:0] pm_wdata, mpt_pmap;
  logic m_req, m_we, m_ack, ctx_busy;
  logic [PADDR_W-1:0] m_addr;
  logic [DATA_W-1:0] m_wdata, m_rdata;

  int checks = 0, failures = 0;

  promem_ctrl #(.SEG_W(SEG_W), .PIDX_W(PIDX_W)) dut (.*);
  vmidr_reg u_vmidr (.clk, .rst_n, .we(vmidr_we), .wdata(vmidr_wdata), .vmidr, .is_hv);
  segmax_unit #(.SEG_W(SEG_W)) u_sm (.clk, .rst_n, .tseg_we, .tseg_wdata, .tot_inc, .tot_dec,
                                     .tseg, .tot, .mseg, .tseg_locked, .busy(sm_busy));
  vmid_alloc u_ids (.clk, .rst_n, .alloc(id_alloc), .free_ok(id_free_ok), .free_id(id_free_id),
                    .release_en(id_release), .release_id(id_release_id),
                    .query_id(id_query), .query_used(id_used), .used_count(id_count));
  mpt_mem #(.SEG_W(SEG_W), .PIDX_W(PIDX_W)) u_mpt (
    .clk, .rst_n, .we(mpt_we), .waddr(mpt_waddr), .wentry(mpt_wentry),
    .pm_we, .pm_waddr, .pm_wdata, .a_addr(mpt_addr), .a_entry(mpt_entry), .a_pmap(mpt_pmap),
    .b_addr, .b_entry);
  mem_model #(.AW(PADDR_W), .DW(DATA_W), .MAX_LAT(3), .FILL(32'h0000_00EE)) u_mem (
    .clk, .req(m_req), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata), .ack(m_ack));

  always #5 clk = ~clk;

  // ---------------- reference model
  bit             r_hv_up;
  int             r_tseg, r_tot, r_vmidr;
  bit             r_valid [NSEG];
  bit             r_first [NSEG];
  int             r_owner [NSEG];
  bit [PPS-1:0]   r_pm    [NSEG];
  bit             r_used  [NVMID];
  int             r_cnt   [NVMID];
  int             r_fseg  [NVMID];   // -1: none
  int             r_saved [NSEG];    // VMIDR words saved at segment bases, -1 unknown

  int n_ok[8], n_st[8];
  int n_rcl_pulse;
  vmid_t last_rcl_vmid;
  int last_rcl_cnt;

  always @(posedge clk) if (reclaim_valid) begin
    n_rcl_pulse++;
    last_rcl_vmid <= reclaim_vmid;
    last_rcl_cnt  <= int'(reclaim_count);
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t vmidr=%0d rsp=%s addr=%h vmid=%0d)", what, $time, vmidr,
               rsp_status.name(), rsp_addr, rsp_vmid);
    end
  endtask

  function automatic int r_mseg();
    return (r_tot == 0) ? 0 : r_tseg / r_tot;
  endfunction

  function automatic logic [PADDR_W-1:0] pa(input int seg, input int page);
    return {SEG_W'(seg), PIDX_W'(page), PAGE_W'(0)};
  endfunction

  // VMIDR save and load of a switch; returns the new VMIDR
  function automatic int r_switch(input int save_owner, input int load_owner, input int direct);
    if (r_fseg[save_owner] >= 0) r_saved[r_fseg[save_owner]] = r_vmidr;
    if (load_owner >= 0 && r_fseg[load_owner] >= 0) begin
      int w = r_saved[r_fseg[load_owner]];
      return (w < 0) ? 'hEE : w;
    end
    return direct;
  endfunction

  // expected response of one request; updates the model
  task automatic r_apply(input op_e op, input int vm, input logic [PADDR_W-1:0] arg,
                         output status_e st, output logic [PADDR_W-1:0] a, output int id,
                         output int rcl_vm, output int rcl_cnt);
    st = ST_OK; a = '0; id = r_vmidr; rcl_vm = -1; rcl_cnt = 0;
    case (op)
      OP_HV_START: begin
        id = 0;
        if (r_hv_up) st = ST_DENIED;
        else begin
          r_hv_up = 1; r_tseg = int'(arg); r_tot = 1; r_used[0] = 1;
          r_cnt[0] = 0; r_fseg[0] = -1; r_vmidr = 0;
        end
      end
      OP_VM_CREATE: begin
        int nid = -1;
        for (int i = NVMID - 1; i >= 0; i--) if (!r_used[i]) nid = i;
        if (!r_hv_up || r_vmidr != 0 || nid < 0) st = ST_DENIED;
        else begin
          r_used[nid] = 1; r_tot++; r_cnt[nid] = 0; r_fseg[nid] = -1;
          r_vmidr = r_switch(0, -1, nid);
          id = nid;
        end
      end
      OP_VM_DESTROY: begin
        if (!r_hv_up || r_vmidr != 0 || vm == 0 || !r_used[vm]) st = ST_DENIED;
        else begin
          for (int s = 1; s < r_tseg; s++) if (r_valid[s] && r_owner[s] == vm) r_valid[s] = 0;
          r_used[vm] = 0; r_tot--; r_cnt[vm] = 0; r_fseg[vm] = -1;
        end
      end
      OP_VM_ENTRY: begin
        if (!r_hv_up || r_vmidr != 0 || vm == 0 || !r_used[vm]) st = ST_DENIED;
        else begin r_vmidr = r_switch(0, vm, vm); id = r_vmidr; end
      end
      OP_VM_EXIT: begin
        if (!r_hv_up || r_vmidr == 0) st = ST_DENIED;
        else begin r_vmidr = r_switch(r_vmidr, 0, 0); id = r_vmidr; end
      end
      OP_PAGE_ALLOC: begin
        int cur = r_vmidr, fs = -1;
        bit done = 0;
        if (!r_hv_up) st = ST_DENIED;
        else begin
          for (int s = 1; s < r_tseg && !done; s++) begin
            if (r_valid[s] && r_owner[s] == cur && r_pm[s] != '1) begin
              for (int p = 0; p < PPS && !done; p++) if (!r_pm[s][p]) begin
                r_pm[s][p] = 1; a = pa(s, p); done = 1;
              end
            end else if (!r_valid[s] && fs < 0) fs = s;
          end
          if (!done && fs >= 0) begin
            bit first = (r_fseg[cur] < 0);
            r_valid[fs] = 1; r_owner[fs] = cur; r_first[fs] = first;
            r_pm[fs] = first ? PPS'(3) : PPS'(1);
            a = pa(fs, first ? 1 : 0);
            r_cnt[cur]++;
            if (first) r_fseg[cur] = fs;
            done = 1;
          end
          if (!done) begin
            for (int j = 1; j < NVMID && rcl_vm < 0; j++)
              if (j != cur && r_used[j] && r_cnt[j] > r_mseg()) begin
                rcl_vm = j; rcl_cnt = r_cnt[j] - r_mseg();
              end
            st = (rcl_vm >= 0) ? ST_RECLAIM : ST_MEM_FULL;
          end
        end
      end
      OP_PAGE_FREE: begin
        int s = int'(arg[PADDR_W-1 -: SEG_W]), p = int'(arg[PAGE_W +: PIDX_W]);
        if (!r_hv_up || s == 0 || s >= r_tseg || !r_valid[s] || r_owner[s] != r_vmidr ||
            (r_first[s] && p == 0) || !r_pm[s][p]) st = ST_DENIED;
        else begin
          a = pa(s, p);
          r_pm[s][p] = 0;
          if (r_pm[s] == '0) begin r_valid[s] = 0; r_cnt[r_vmidr]--; end
        end
      end
      default: st = ST_DENIED;
    endcase
  endtask

  task automatic run(input op_e op, input int vm, input logic [PADDR_W-1:0] arg);
    status_e est; logic [PADDR_W-1:0] ea; int eid, rvm, rcnt, pulses;
    r_apply(op, vm, arg, est, ea, eid, rvm, rcnt);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    pulses = n_rcl_pulse;
    cmd_valid = 1; cmd_op = op; cmd_vmid = vmid_t'(vm); cmd_arg = arg;
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check($sformatf("%s status (exp %s)", op.name(), est.name()), rsp_status == est);
    if (est == ST_OK && (op == OP_PAGE_ALLOC || op == OP_PAGE_FREE))
      check($sformatf("%s address exp %h", op.name(), ea), rsp_addr == ea);
    if (est == ST_OK && op inside {OP_HV_START, OP_VM_CREATE, OP_VM_ENTRY, OP_VM_EXIT})
      check($sformatf("%s id exp %0d", op.name(), eid), int'(rsp_vmid) == eid);
    @(negedge clk);
    check("VMIDR", int'(vmidr) == r_vmidr);
    if (est == ST_RECLAIM)
      check("reclaim notice", n_rcl_pulse == pulses + 1 && int'(last_rcl_vmid) == rvm &&
                              last_rcl_cnt == rcnt);
    else check("no reclaim notice", n_rcl_pulse == pulses);
    n_ok[int'(op)] += (est == ST_OK);
    n_st[int'(est)]++;
  endtask

  task automatic compare_mpt();
    for (int s = 0; s < NSEG; s++) begin
      b_addr = SEG_W'(s);
      #1;
      check($sformatf("MPT valid %0d", s), b_entry.valid == r_valid[s]);
      if (r_valid[s]) check($sformatf("MPT owner %0d", s),
                            int'(b_entry.vmid) == r_owner[s] && b_entry.first == r_first[s]);
      // the copy in the MPT area of memory (segment 0, one word per segment)
      if (s < r_tseg) begin
        logic [DATA_W-1:0] w = u_mem.peek(PADDR_W'(s * 4));
        check($sformatf("MPT word in memory %0d", s), w[VMID_W+1] == r_valid[s] &&
              (!r_valid[s] || (int'(w[VMID_W-1:0]) == r_owner[s] && w[VMID_W] == r_first[s])));
      end
    end
  endtask

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    b_addr = '0;
    for (int round = 0; round < 3; round++) begin
      r_hv_up = 0; r_tseg = 0; r_tot = 0; r_vmidr = 0;
      for (int s = 0; s < NSEG; s++) begin r_valid[s] = 0; r_saved[s] = -1; end
      for (int v = 0; v < NVMID; v++) begin r_used[v] = 0; r_cnt[v] = 0; r_fseg[v] = -1; end
      rst_n = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      run(OP_PAGE_ALLOC, 0, '0);                 // before boot: refused
      run(OP_HV_START, 0, PADDR_W'((round == 2) ? NSEG : 6 + 3 * round));
      for (int i = 0; i < 1500; i++) begin
        automatic int r = $urandom_range(0, 99);
        op_e op;
        automatic int vm = $urandom_range(0, MAXVM);
        automatic logic [PADDR_W-1:0] arg = '0;
        if (r < 40) op = OP_PAGE_ALLOC;
        else if (r < 60) begin
          op = OP_PAGE_FREE;
          // usually a page the running VM holds
          arg = PADDR_W'($urandom);
          for (int t = 0; t < 8 && $urandom_range(0, 4) != 0; t++) begin
            automatic int s = $urandom_range(1, NSEG - 1);
            if (r_valid[s] && r_owner[s] == r_vmidr) begin
              arg = pa(s, $urandom_range(0, PPS - 1));
              break;
            end
          end
        end
        else if (r < 68) op = (r_vmidr == 0 || $urandom_range(0, 9) == 0) ? OP_VM_CREATE : OP_VM_EXIT;
        else if (r < 73) op = OP_VM_DESTROY;
        else if (r < 85) op = OP_VM_ENTRY;
        else if (r < 97) op = OP_VM_EXIT;
        else op = op_e'($urandom_range(0, 7));
        run(op, vm, arg);
      end
      compare_mpt();
    end
    for (int k = 0; k < 7; k++) check($sformatf("op %0d succeeded at least once", k), n_ok[k] > 0);
    for (int k = 0; k < 4; k++) check($sformatf("status %0d seen", k), n_st[k] > 0);
    $display("ok per op: %p  statuses: %p", n_ok, n_st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
