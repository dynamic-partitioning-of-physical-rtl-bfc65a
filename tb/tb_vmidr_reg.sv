// tb_vmidr_reg: checks the VMIDR register: reset to the hypervisor ID 0,
// load on we only, hold otherwise, and the is_hv flag, against a reference
// value kept by the testbench.
module tb_vmidr_reg;
  import asmi_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, we = 1'b0, is_hv;
  vmid_t wdata = '0, vmidr, ref_v;
  int checks = 0, failures = 0;

  vmidr_reg dut (.clk, .rst_n, .we, .wdata, .vmidr, .is_hv);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: vmidr=%0d ref=%0d is_hv=%0b", what, vmidr, ref_v, is_hv);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_v = '0;
    repeat (2) @(posedge clk);
    #1 check("reset value", vmidr == 8'd0 && is_hv);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      we    = ($urandom_range(0, 2) == 0);
      wdata = vmid_t'($urandom);
      if (i % 17 == 0) wdata = '0;
      @(posedge clk);
      if (we) ref_v = wdata;
      #1 check("load/hold", vmidr == ref_v && is_hv == (ref_v == 0));
    end
    // asynchronous reset returns to the hypervisor ID
    @(negedge clk);
    we = 1'b1; wdata = 8'd77;
    @(posedge clk); #1 check("load 77", vmidr == 8'd77 && !is_hv);
    rst_n = 1'b0; #1 check("async reset", vmidr == 8'd0 && is_hv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
