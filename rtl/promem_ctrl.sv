// promem_ctrl: the Pro-mem controller.
//
// Serves one request at a time from the processor (cmd_*), answers with one
// rsp_valid pulse, and drives the MPT, the SegMax unit, the VM ID pool, the
// VMIDR register and, for VM Entry / VM Exit, the memory port.
//
// Requests (asmi_pkg::op_e) and what follows the source:
//  HV_START    TSEG is set (once per boot), the hypervisor gets ID 0, VMIDR=0,
//              TOT+1 (SegMax recomputes MSEG = TSEG / TOT).
//  VM_CREATE   a unique ID is assigned and written to VMIDR, TOT+1 (the
//              hypervisor's VMIDR is first saved as on VM Entry).
//  VM_DESTROY  all segments of the VM return to the free pool, its ID is
//              released, TOT-1.
//  PAGE_ALLOC  1) a free page in a segment already allotted to the running
//              VM; else 2) a free segment, which is allotted (MPT updated)
//              and its first page given; else 3) if another VM holds more
//              than MSEG segments, that VM is told (reclaim_*) how many
//              segments it holds above MSEG, so that it swaps them out, and
//              the requester is answered ST_RECLAIM to retry; else
//              4) memory-full exception (ST_MEM_FULL).
//  VM_ENTRY    VMIDR is stored at the start of the hypervisor's first
//              segment, then VMIDR is loaded from the start of the target
//              VM's first segment.
//  VM_EXIT     VMIDR is stored at the start of the running VM's first
//              segment, then loaded from the start of the hypervisor's.
// The MPT lives in mpt_mem, on chip. As the source places the table in a
// reserved area of primary memory, every MPT update is also written there
// (segment 0, word s = entry of segment s, {valid, first, vmid} zero-
// extended), and HV_START first clears the words of segments 0..TSEG-1.
// The request that changed the MPT is answered after that write.
// This design's own choices: the per-VM segment count and first-segment
// record; page 0 of an owner's first segment is reserved for the VMIDR save
// word (so an owner's first allocation returns page 1); an owner with no
// segment yet skips the save, and VMIDR is then loaded with the ID directly;
// PAGE_FREE (how swapped-out pages come back) releases a segment when its
// last page is freed; create/destroy/entry are accepted only from the
// hypervisor (VMIDR = 0); the reclaim search skips the hypervisor and the
// requester; reclaim and memory-full are reported, not waited on.
//
// Timing: cmd_ready is high in the idle state while SegMax is not busy. An
// allocation scans one MPT entry per cycle (at most TSEG cycles), then one VM
// per cycle when reclaiming (at most 2^VMID_W); destroy scans TSEG entries;
// entry/exit take the two memory transactions; each MPT change adds one
// memory write, and HV_START takes TSEG memory writes. ctx_busy is high
// during the VMIDR store/load so that the paging unit's accesses wait.
// Memory port (VMIDR save/restore and the MPT copy): m_req held with
// m_we/m_addr/m_wdata until a one-cycle m_ack, which also carries m_rdata.
module promem_ctrl
  import asmi_pkg::*;
#(
  parameter int SEG_W  = DEF_SEG_W,
  parameter int PIDX_W = DEF_PIDX_W,
  localparam int PADDR_W = SEG_W + PIDX_W + PAGE_W,
  localparam int CNT_W   = SEG_W + 1,
  localparam int NSEG    = 1 << SEG_W,
  localparam int PPS     = 1 << PIDX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // requests from the processor
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  op_e                cmd_op,
  input  vmid_t              cmd_vmid,
  input  logic [PADDR_W-1:0] cmd_arg,
  output logic               rsp_valid,
  output status_e            rsp_status,
  output logic [PADDR_W-1:0] rsp_addr,
  output vmid_t              rsp_vmid,
  // notice to an over-quota VM
  output logic               reclaim_valid,
  output vmid_t              reclaim_vmid,
  output logic [CNT_W-1:0]   reclaim_count,
  // VMIDR register
  input  vmid_t              vmidr,
  output logic               vmidr_we,
  output vmid_t              vmidr_wdata,
  // SegMax unit
  input  logic [CNT_W-1:0]   tseg,
  input  logic [CNT_W-1:0]   mseg,
  input  logic               sm_busy,
  output logic               tseg_we,
  output logic [CNT_W-1:0]   tseg_wdata,
  output logic               tot_inc,
  output logic               tot_dec,
  // VM ID pool
  input  logic               id_free_ok,
  input  vmid_t              id_free_id,
  output logic               id_alloc,
  output logic               id_release,
  output vmid_t              id_release_id,
  output vmid_t              id_query,
  input  logic               id_used,
  // MPT
  output logic               mpt_we,
  output logic [SEG_W-1:0]   mpt_waddr,
  output mpt_entry_t         mpt_wentry,
  output logic               pm_we,
  output logic [SEG_W-1:0]   pm_waddr,
  output logic [PPS-1:0]     pm_wdata,
  output logic [SEG_W-1:0]   mpt_addr,
  input  mpt_entry_t         mpt_entry,
  input  logic [PPS-1:0]     mpt_pmap,
  // memory port (VMIDR save / restore)
  output logic               m_req,
  output logic               m_we,
  output logic [PADDR_W-1:0] m_addr,
  output logic [DATA_W-1:0]  m_wdata,
  input  logic [DATA_W-1:0]  m_rdata,
  input  logic               m_ack,
  output logic               ctx_busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_ALLOC_SCAN, S_ALLOC_END, S_RECLAIM_SCAN, S_FREE_CHK,
    S_DESTROY_SCAN, S_MEM_ST, S_MEM_LD, S_MPT_WB, S_MPT_CLR
  } state_e;

  state_e state;

  // request being served
  vmid_t              cur;       // requester (VMIDR) or target VM
  logic [PADDR_W-1:0] arg;
  logic [SEG_W-1:0]   scan_seg;
  vmid_t              scan_vm;
  logic               free_found;
  logic [SEG_W-1:0]   free_seg;
  logic               hv_up;
  // VM Entry / Exit sequence
  logic               do_st, do_ld;
  logic [PADDR_W-1:0] st_addr, ld_addr;
  vmid_t              st_id, direct_id;

  // per-VM records
  logic [NVMID-1:0]   has_first;
  logic [SEG_W-1:0]   first_seg [NVMID];
  logic [CNT_W-1:0]   seg_cnt   [NVMID];

  // combinational controls for the registered updates
  logic               rsp_set;
  status_e            rsp_st_n;
  logic [PADDR_W-1:0] rsp_addr_n;
  vmid_t              rsp_vmid_n;
  logic               cnt_we;
  vmid_t              cnt_idx;
  logic [CNT_W-1:0]   cnt_wdata;
  logic               first_we;
  vmid_t              first_idx;
  logic               first_val;
  logic [SEG_W-1:0]   first_wseg;
  state_e             state_n;

  // copy of each MPT update for the table's area in memory
  logic               wb_start;
  state_e             wb_ret_n;
  logic               wb_rsp_n;
  state_e             wb_ret;
  logic               wb_rsp;
  logic [SEG_W-1:0]   wb_seg;
  mpt_entry_t         wb_entry;
  status_e            pend_st;
  logic [PADDR_W-1:0] pend_addr;
  vmid_t              pend_vmid;

  // the MPT area is the start of segment 0, one word per segment
  if (SEG_W + 2 > PIDX_W + PAGE_W) begin : g_mpt_area_check
    $error("MPT of %0d words does not fit in segment 0", NSEG);
  end

  function automatic logic [PADDR_W-1:0] mpt_word_addr(input logic [SEG_W-1:0] s);
    return PADDR_W'({s, 2'b00});
  endfunction

  function automatic logic [PADDR_W-1:0] seg_base(input logic [SEG_W-1:0] s);
    return {s, {(PIDX_W + PAGE_W){1'b0}}};
  endfunction

  function automatic logic [PADDR_W-1:0] page_addr(input logic [SEG_W-1:0] s,
                                                   input logic [PIDX_W-1:0] p);
    return {s, p, {PAGE_W{1'b0}}};
  endfunction

  // lowest clear bit of the page-use word of the scanned segment
  logic [PIDX_W-1:0] free_pidx;
  always_comb begin
    free_pidx = '0;
    for (int i = PPS - 1; i >= 0; i--)
      if (!mpt_pmap[i]) free_pidx = PIDX_W'(i);
  end

  logic [SEG_W-1:0]  arg_seg;
  logic [PIDX_W-1:0] arg_pidx;
  logic              scan_last;   // scan_seg is the last segment below TSEG
  assign arg_seg   = arg[PADDR_W-1 -: SEG_W];
  assign arg_pidx  = arg[PAGE_W +: PIDX_W];
  assign scan_last = ({1'b0, scan_seg} + 1'b1 >= tseg);

  logic [PPS-1:0] freed_map;
  assign freed_map = mpt_pmap & ~(PPS'(1) << arg_pidx);

  assign cmd_ready = (state == S_IDLE) && !sm_busy;
  assign ctx_busy  = (state == S_MEM_ST) || (state == S_MEM_LD);

  always_comb begin
    state_n       = state;
    rsp_set       = 1'b0;
    rsp_st_n      = ST_OK;
    rsp_addr_n    = '0;
    rsp_vmid_n    = cur;
    vmidr_we      = 1'b0;
    vmidr_wdata   = HV_VMID;
    tseg_we       = 1'b0;
    tseg_wdata    = (cmd_arg[PADDR_W-1:CNT_W] != '0 || cmd_arg[CNT_W-1:0] > CNT_W'(NSEG))
                    ? CNT_W'(NSEG) : cmd_arg[CNT_W-1:0];
    tot_inc       = 1'b0;
    tot_dec       = 1'b0;
    id_alloc      = 1'b0;
    id_release    = 1'b0;
    id_release_id = cur;
    id_query      = (state == S_RECLAIM_SCAN) ? scan_vm : cmd_vmid;
    mpt_we        = 1'b0;
    mpt_waddr     = scan_seg;
    mpt_wentry    = '{valid: 1'b0, first: 1'b0, vmid: cur};
    pm_we         = 1'b0;
    pm_waddr      = scan_seg;
    pm_wdata      = '0;
    mpt_addr      = (state == S_FREE_CHK) ? arg_seg : scan_seg;
    m_req         = 1'b0;
    m_we          = 1'b0;
    m_addr        = st_addr;
    m_wdata       = DATA_W'(st_id);
    cnt_we        = 1'b0;
    cnt_idx       = cur;
    cnt_wdata     = '0;
    first_we      = 1'b0;
    first_idx     = cur;
    first_val     = 1'b0;
    first_wseg    = free_seg;

    unique case (state)
      S_IDLE: if (cmd_valid && cmd_ready) begin
        rsp_vmid_n = vmidr;
        unique case (cmd_op)
          OP_HV_START: begin
            rsp_set    = 1'b1;
            rsp_vmid_n = HV_VMID;
            if (hv_up) rsp_st_n = ST_DENIED;
            else begin
              rsp_set   = 1'b0;       // answered after the MPT area is cleared
              state_n   = S_MPT_CLR;
              tseg_we   = 1'b1;
              id_alloc  = 1'b1;       // lowest free ID: 0
              tot_inc   = 1'b1;
              vmidr_we  = 1'b1;
              cnt_we    = 1'b1;
              cnt_idx   = HV_VMID;
              first_we  = 1'b1;
              first_idx = HV_VMID;
            end
          end
          OP_VM_CREATE: begin
            rsp_set = 1'b1;
            if (!hv_up || vmidr != HV_VMID || !id_free_ok) rsp_st_n = ST_DENIED;
            else begin
              // the new VM starts running: save the hypervisor's VMIDR as
              // on VM Entry, then load the new ID
              rsp_set     = 1'b0;
              id_alloc    = 1'b1;
              tot_inc     = 1'b1;
              cnt_we      = 1'b1;
              cnt_idx     = id_free_id;
              first_we    = 1'b1;
              first_idx   = id_free_id;
              state_n     = S_MEM_ST;
            end
          end
          OP_VM_DESTROY, OP_VM_ENTRY: begin
            if (!hv_up || vmidr != HV_VMID || cmd_vmid == HV_VMID || !id_used) begin
              rsp_set  = 1'b1;
              rsp_st_n = ST_DENIED;
            end else begin
              state_n = (cmd_op == OP_VM_DESTROY) ? S_DESTROY_SCAN : S_MEM_ST;
            end
          end
          OP_VM_EXIT: begin
            if (!hv_up || vmidr == HV_VMID) begin
              rsp_set  = 1'b1;
              rsp_st_n = ST_DENIED;
            end else state_n = S_MEM_ST;
          end
          OP_PAGE_ALLOC: begin
            if (!hv_up) begin
              rsp_set  = 1'b1;
              rsp_st_n = ST_DENIED;
            end else state_n = S_ALLOC_SCAN;
          end
          OP_PAGE_FREE: begin
            if (!hv_up) begin
              rsp_set  = 1'b1;
              rsp_st_n = ST_DENIED;
            end else state_n = S_FREE_CHK;
          end
          default: begin
            rsp_set  = 1'b1;
            rsp_st_n = ST_DENIED;
          end
        endcase
      end

      // 1) a free page in a segment the requester already owns
      S_ALLOC_SCAN: begin
        if ({1'b0, scan_seg} < tseg && mpt_entry.valid && mpt_entry.vmid == cur
            && !(&mpt_pmap)) begin
          pm_we      = 1'b1;
          pm_wdata   = mpt_pmap | (PPS'(1) << free_pidx);
          rsp_set    = 1'b1;
          rsp_addr_n = page_addr(scan_seg, free_pidx);
          state_n    = S_IDLE;
        end else if (scan_last) begin
          state_n = S_ALLOC_END;
        end
      end

      // 2) a free segment
      S_ALLOC_END: begin
        if (free_found) begin
          mpt_we     = 1'b1;
          mpt_waddr  = free_seg;
          mpt_wentry = '{valid: 1'b1, first: !has_first[cur], vmid: cur};
          pm_we      = 1'b1;
          pm_waddr   = free_seg;
          pm_wdata   = has_first[cur] ? PPS'(1) : PPS'(3);
          cnt_we     = 1'b1;
          cnt_wdata  = seg_cnt[cur] + 1'b1;
          first_we   = !has_first[cur];
          first_val  = 1'b1;
          rsp_set    = 1'b1;
          rsp_addr_n = page_addr(free_seg, has_first[cur] ? PIDX_W'(0) : PIDX_W'(1));
          state_n    = S_IDLE;
        end else begin
          state_n = S_RECLAIM_SCAN;
        end
      end

      // 3) a VM above MSEG, else 4) memory full
      S_RECLAIM_SCAN: begin
        if (scan_vm != cur && id_used && seg_cnt[scan_vm] > mseg) begin
          rsp_set  = 1'b1;
          rsp_st_n = ST_RECLAIM;
          state_n  = S_IDLE;
        end else if (scan_vm == vmid_t'(NVMID - 1)) begin
          rsp_set  = 1'b1;
          rsp_st_n = ST_MEM_FULL;
          state_n  = S_IDLE;
        end
      end

      S_FREE_CHK: begin
        rsp_set = 1'b1;
        state_n = S_IDLE;
        if (arg_seg == '0 || {1'b0, arg_seg} >= tseg || !mpt_entry.valid ||
            mpt_entry.vmid != cur || (mpt_entry.first && arg_pidx == '0) ||
            !mpt_pmap[arg_pidx]) begin
          rsp_st_n = ST_DENIED;
        end else begin
          rsp_addr_n = page_addr(arg_seg, arg_pidx);
          pm_we      = 1'b1;
          pm_waddr   = arg_seg;
          pm_wdata   = freed_map;
          if (freed_map == '0) begin
            mpt_we    = 1'b1;
            mpt_waddr = arg_seg;
            cnt_we    = 1'b1;
            cnt_wdata = seg_cnt[cur] - 1'b1;
          end
        end
      end

      S_DESTROY_SCAN: begin
        if (mpt_entry.valid && mpt_entry.vmid == cur) mpt_we = 1'b1;
        if (scan_last) begin
          id_release = 1'b1;
          tot_dec    = 1'b1;
          cnt_we     = 1'b1;
          first_we   = 1'b1;
          rsp_set    = 1'b1;
          state_n    = S_IDLE;
        end
      end

      S_MEM_ST: begin
        if (!do_st) state_n = S_MEM_LD;
        else begin
          m_req = 1'b1;
          m_we  = 1'b1;
          if (m_ack) state_n = S_MEM_LD;
        end
      end

      S_MEM_LD: begin
        m_addr = ld_addr;
        if (!do_ld) begin
          vmidr_we    = 1'b1;
          vmidr_wdata = direct_id;
          rsp_set     = 1'b1;
          rsp_vmid_n  = direct_id;
          state_n     = S_IDLE;
        end else begin
          m_req = 1'b1;
          if (m_ack) begin
            vmidr_we    = 1'b1;
            vmidr_wdata = vmid_t'(m_rdata);
            rsp_set     = 1'b1;
            rsp_vmid_n  = vmid_t'(m_rdata);
            state_n     = S_IDLE;
          end
        end
      end

      // the MPT area starts empty: one zero word per segment below TSEG
      S_MPT_CLR: begin
        m_req   = 1'b1;
        m_we    = 1'b1;
        m_addr  = mpt_word_addr(scan_seg);
        m_wdata = '0;
        if (m_ack && scan_last) begin
          rsp_set    = 1'b1;
          rsp_vmid_n = HV_VMID;
          state_n    = S_IDLE;
        end
      end

      S_MPT_WB: begin
        m_req      = 1'b1;
        m_we       = 1'b1;
        m_addr     = mpt_word_addr(wb_seg);
        m_wdata    = DATA_W'(wb_entry);
        rsp_st_n   = pend_st;
        rsp_addr_n = pend_addr;
        rsp_vmid_n = pend_vmid;
        if (m_ack) begin
          rsp_set = wb_rsp;
          state_n = wb_ret;
        end
      end

      default: state_n = S_IDLE;
    endcase

    // Every MPT update is also written to the table's area in memory before
    // the request goes on; its response waits for that write.
    wb_start = mpt_we;
    wb_ret_n = state_n;
    wb_rsp_n = rsp_set;
    if (mpt_we) begin
      state_n = S_MPT_WB;
      rsp_set = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cur           <= HV_VMID;
      arg           <= '0;
      scan_seg      <= '0;
      scan_vm       <= '0;
      free_found    <= 1'b0;
      free_seg      <= '0;
      hv_up         <= 1'b0;
      do_st         <= 1'b0;
      do_ld         <= 1'b0;
      st_addr       <= '0;
      ld_addr       <= '0;
      st_id         <= HV_VMID;
      direct_id     <= HV_VMID;
      has_first     <= '0;
      wb_ret        <= S_IDLE;
      wb_rsp        <= 1'b0;
      wb_seg        <= '0;
      wb_entry      <= '0;
      pend_st       <= ST_OK;
      pend_addr     <= '0;
      pend_vmid     <= HV_VMID;
      rsp_valid     <= 1'b0;
      rsp_status    <= ST_OK;
      rsp_addr      <= '0;
      rsp_vmid      <= HV_VMID;
      reclaim_valid <= 1'b0;
      reclaim_vmid  <= HV_VMID;
      reclaim_count <= '0;
    end else begin
      state         <= state_n;
      rsp_valid     <= rsp_set;
      reclaim_valid <= 1'b0;
      if (rsp_set) begin
        rsp_status <= rsp_st_n;
        rsp_addr   <= rsp_addr_n;
        rsp_vmid   <= rsp_vmid_n;
      end
      if (first_we) has_first[first_idx] <= first_val;
      if (wb_start) begin
        wb_ret    <= wb_ret_n;
        wb_rsp    <= wb_rsp_n;
        wb_seg    <= mpt_waddr;
        wb_entry  <= mpt_wentry;
        pend_st   <= rsp_st_n;
        pend_addr <= rsp_addr_n;
        pend_vmid <= rsp_vmid_n;
      end

      unique case (state)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          arg        <= cmd_arg;
          scan_seg   <= (cmd_op == OP_HV_START) ? '0 : SEG_W'(1);
          scan_vm    <= vmid_t'(1);
          free_found <= 1'b0;
          if (cmd_op == OP_HV_START) hv_up <= 1'b1;
          if (cmd_op == OP_VM_DESTROY || cmd_op == OP_VM_ENTRY) cur <= cmd_vmid;
          else cur <= vmidr;
          if (cmd_op == OP_VM_CREATE) begin
            do_st     <= has_first[HV_VMID];
            st_addr   <= seg_base(first_seg[HV_VMID]);
            st_id     <= vmidr;
            do_ld     <= 1'b0;
            ld_addr   <= '0;
            direct_id <= id_free_id;
          end else if (cmd_op == OP_VM_ENTRY) begin
            do_st     <= has_first[HV_VMID];
            st_addr   <= seg_base(first_seg[HV_VMID]);
            st_id     <= vmidr;
            do_ld     <= has_first[cmd_vmid];
            ld_addr   <= seg_base(first_seg[cmd_vmid]);
            direct_id <= cmd_vmid;
          end else begin                 // VM exit
            do_st     <= has_first[vmidr];
            st_addr   <= seg_base(first_seg[vmidr]);
            st_id     <= vmidr;
            do_ld     <= has_first[HV_VMID];
            ld_addr   <= seg_base(first_seg[HV_VMID]);
            direct_id <= HV_VMID;
          end
        end
        S_ALLOC_SCAN: begin
          if (!mpt_entry.valid && !free_found && {1'b0, scan_seg} < tseg) begin
            free_found <= 1'b1;
            free_seg   <= scan_seg;
          end
          scan_seg <= scan_seg + 1'b1;
        end
        S_RECLAIM_SCAN: begin
          if (rsp_set && rsp_st_n == ST_RECLAIM) begin
            reclaim_valid <= 1'b1;
            reclaim_vmid  <= scan_vm;
            reclaim_count <= seg_cnt[scan_vm] - mseg;
          end
          scan_vm <= scan_vm + 1'b1;
        end
        S_DESTROY_SCAN: scan_seg <= scan_seg + 1'b1;
        S_MPT_CLR: if (m_ack) scan_seg <= scan_seg + 1'b1;
        default: ;
      endcase
    end
  end

  // per-VM arrays (no reset: each record is written when its ID is assigned)
  always_ff @(posedge clk) begin
    if (cnt_we) seg_cnt[cnt_idx] <= cnt_wdata;
    if (first_we && first_val) first_seg[first_idx] <= first_wseg;
  end

  // one request at a time; the memory request holds until acknowledged
  a_mreq_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                m_req && !m_ack |=> m_req && $stable(m_addr) && $stable(m_we));

endmodule
