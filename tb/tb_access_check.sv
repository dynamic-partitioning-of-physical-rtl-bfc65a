// tb_access_check: drives random addresses, VMIDR values and MPT entries into
// the access check and compares allow/deny and cause with a reference rule:
// refuse segment 0 (MPT area), segments >= TSEG, free segments, segments of
// another VM and the VMIDR save page; allow the rest, address unchanged.
module tb_access_check;
  import asmi_pkg::*;
  localparam int SEG_W = DEF_SEG_W, PIDX_W = DEF_PIDX_W;
  localparam int PADDR_W = SEG_W + PIDX_W + PAGE_W, CNT_W = SEG_W + 1;

  logic req;
  logic [PADDR_W-1:0] addr, paddr;
  vmid_t vmidr;
  logic [CNT_W-1:0] tseg;
  logic [SEG_W-1:0] mpt_addr;
  mpt_entry_t mpt_entry;
  logic ok, fault;
  afault_e cause;
  int checks = 0, failures = 0;
  int n_cause [8];

  access_check #(.SEG_W(SEG_W), .PIDX_W(PIDX_W)) dut (.*);

  task automatic check(input string what, input logic c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s: addr=%h vmidr=%0d entry=%p ok=%0b fault=%0b cause=%s",
               what, addr, vmidr, mpt_entry, ok, fault, cause.name());
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    afault_e exp;
    logic [SEG_W-1:0] seg;
    logic [PIDX_W-1:0] pidx;
    for (int i = 0; i < 20000; i++) begin
      req   = ($urandom_range(0, 7) != 0);
      vmidr = vmid_t'($urandom_range(0, 4));
      tseg  = CNT_W'($urandom_range(0, 1 << SEG_W));
      addr  = PADDR_W'($urandom);
      if ($urandom_range(0, 3) == 0) addr[PAGE_W +: PIDX_W] = '0;
      if ($urandom_range(0, 7) == 0) addr[PADDR_W-1 -: SEG_W] = '0;
      mpt_entry = '{valid: ($urandom_range(0, 3) != 0), first: 1'($urandom),
                    vmid: ($urandom_range(0, 1) != 0) ? vmidr : vmid_t'($urandom_range(0, 4))};
      #1;
      seg  = addr[PADDR_W-1 -: SEG_W];
      pidx = addr[PAGE_W +: PIDX_W];
      if (seg == 0)                               exp = AF_MPT_AREA;
      else if (int'(seg) >= int'(tseg))           exp = AF_RANGE;
      else if (!mpt_entry.valid)                  exp = AF_FREE;
      else if (mpt_entry.vmid != vmidr)           exp = AF_OWNER;
      else if (mpt_entry.first && pidx == 0)      exp = AF_SAVE;
      else                                        exp = AF_NONE;
      check("mpt index", mpt_addr == seg);
      check("cause", cause == exp);
      check("ok", ok == (req && exp == AF_NONE));
      check("fault", fault == (req && exp != AF_NONE));
      check("paddr", paddr == addr);
      n_cause[int'(exp)]++;
    end
    for (int c = 0; c < 6; c++) check("every cause seen", n_cause[c] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
