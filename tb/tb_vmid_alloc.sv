// tb_vmid_alloc: checks that IDs come out unique and lowest-first (0 for the
// first, the hypervisor), that released IDs come back, that the pool
// reports exhaustion, and the used count, against a reference bit vector.
module tb_vmid_alloc;
  import asmi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic alloc = 0, free_ok, release_en = 0, query_used;
  vmid_t free_id, release_id = '0, query_id = '0;
  logic [TOT_W-1:0] used_count;
  logic [NVMID-1:0] ref_used;
  int checks = 0, failures = 0;

  vmid_alloc dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: free_ok=%0b free_id=%0d count=%0d", what, free_ok, free_id, used_count);
    end
  endtask

  function automatic int ref_lowest();
    for (int i = 0; i < NVMID; i++) if (!ref_used[i]) return i;
    return -1;
  endfunction

  function automatic int ref_count();
    int n = 0;
    for (int i = 0; i < NVMID; i++) n += int'(ref_used[i]);
    return n;
  endfunction

  task automatic compare();
    int lo = ref_lowest();
    check("free_ok", free_ok == (lo >= 0));
    if (lo >= 0) check("lowest id", int'(free_id) == lo);
    check("count", int'(used_count) == ref_count());
    query_id = vmid_t'($urandom);
    #1 check("query", query_used == ref_used[query_id]);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_used = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 compare();
    check("hypervisor gets 0", free_id == 0);
    // fill the whole pool, then one more
    for (int i = 0; i <= NVMID; i++) begin
      @(negedge clk);
      alloc = 1;
      if (free_ok) ref_used[free_id] = 1'b1;
      @(negedge clk);
      alloc = 0;
      #1 compare();
    end
    check("pool empty", !free_ok && used_count == NVMID);
    // random release / allocate
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      release_en = $urandom_range(0, 1);
      release_id = vmid_t'($urandom);
      alloc      = $urandom_range(0, 1);
      if (release_en) ref_used[release_id] = 1'b0;
      if (alloc && free_ok) ref_used[free_id] = 1'b1;
      @(negedge clk);
      alloc = 0; release_en = 0;
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
