// tb_mpt_mem: checks the Memory Protection Table: empty after reset, entry
// and page-use word written separately, both read ports, against a
// reference copy of the table.
module tb_mpt_mem;
  import asmi_pkg::*;
  localparam int SEG_W = DEF_SEG_W, PIDX_W = DEF_PIDX_W;
  localparam int NSEG = 1 << SEG_W, PPS = 1 << PIDX_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 0, pm_we = 0;
  logic [SEG_W-1:0] waddr = '0, pm_waddr = '0, a_addr = '0, b_addr = '0;
  mpt_entry_t wentry = '0, a_entry, b_entry;
  logic [PPS-1:0] pm_wdata = '0, a_pmap;
  int checks = 0, failures = 0;

  mpt_entry_t     ref_e  [NSEG];
  logic [PPS-1:0] ref_pm [NSEG];
  logic           ref_pm_ok [NSEG];

  mpt_mem #(.SEG_W(SEG_W), .PIDX_W(PIDX_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s a=%0d b=%0d", what, a_addr, b_addr);
    end
  endtask

  task automatic probe(input logic [SEG_W-1:0] a, input logic [SEG_W-1:0] b);
    a_addr = a; b_addr = b;
    #1;
    check("a valid", a_entry.valid == ref_e[a].valid);
    if (ref_e[a].valid) check("a entry", a_entry == ref_e[a]);
    if (ref_pm_ok[a])   check("a pmap", a_pmap == ref_pm[a]);
    check("b valid", b_entry.valid == ref_e[b].valid);
    if (ref_e[b].valid) check("b entry", b_entry == ref_e[b]);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NSEG; i++) begin
      ref_e[i] = '0; ref_pm_ok[i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // empty after reset
    for (int i = 0; i < NSEG; i += 37) probe(SEG_W'(i), SEG_W'(NSEG - 1 - i));
    // the table of the address map example: segment 1 -> 0, 2 -> 2, 5 -> 3
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      we = 1;
      waddr  = (k == 0) ? 1 : (k == 1) ? 2 : 5;
      wentry = '{valid: 1'b1, first: 1'b1, vmid: (k == 0) ? 8'd0 : (k == 1) ? 8'd2 : 8'd3};
      ref_e[waddr] = wentry;
      @(negedge clk);
      we = 0;
    end
    probe(1, 5); check("seg1 hv", a_entry.vmid == 0 && b_entry.vmid == 3);
    probe(2, 3); check("seg2 vm2 / seg3 free", a_entry.vmid == 2 && !b_entry.valid);
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      pm_we = $urandom_range(0, 1);
      waddr = SEG_W'($urandom);
      pm_waddr = ($urandom_range(0, 3) == 0) ? waddr : SEG_W'($urandom);
      wentry = '{valid: 1'($urandom), first: 1'($urandom), vmid: vmid_t'($urandom)};
      for (int w = 0; w < PPS / 32; w++) pm_wdata[w*32 +: 32] = $urandom;
      if (we) ref_e[waddr] = wentry;
      if (pm_we) begin ref_pm[pm_waddr] = pm_wdata; ref_pm_ok[pm_waddr] = 1; end
      @(negedge clk);
      we = 0; pm_we = 0;
      probe(waddr, SEG_W'($urandom));
      probe(pm_waddr, waddr);
    end
    // reset empties the table again
    rst_n = 0; #1; rst_n = 1;
    for (int i = 0; i < NSEG; i++) begin ref_e[i].valid = 0; end
    for (int i = 0; i < NSEG; i += 13) probe(SEG_W'(i), SEG_W'(i + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
