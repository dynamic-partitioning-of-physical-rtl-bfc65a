// tb_segmax_unit: checks MSEG = TSEG / TOT after every change of TOT (VM
// created or destroyed), that TSEG is written once and then locked, MSEG = 0
// while TOT = 0, and that the quotient is ready SEG_W + 2 cycles after the
// change (one cycle to latch the operands, SEG_W + 1 quotient bits).
module tb_segmax_unit;
  import asmi_pkg::*;
  localparam int SEG_W = DEF_SEG_W;
  localparam int CNT_W = SEG_W + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic tseg_we = 0, tot_inc = 0, tot_dec = 0, tseg_locked, busy;
  logic [CNT_W-1:0] tseg_wdata = '0, tseg, mseg;
  logic [TOT_W-1:0] tot;
  int checks = 0, failures = 0;
  int ref_tot;

  segmax_unit #(.SEG_W(SEG_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: tseg=%0d tot=%0d mseg=%0d ref_tot=%0d", what, tseg, tot, mseg, ref_tot);
    end
  endtask

  // apply one update and wait for the quotient, counting cycles
  task automatic step(input bit inc, input bit dec);
    int cyc;
    @(negedge clk);
    tot_inc = inc; tot_dec = dec;
    @(negedge clk);
    tot_inc = 0; tot_dec = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    if (inc && !dec) ref_tot++;
    if (dec && !inc) ref_tot--;
    check("count", int'(tot) == ref_tot);
    check("quotient", int'(mseg) == (ref_tot == 0 ? 0 : int'(tseg) / ref_tot));
    if (inc != dec && ref_tot != 0) check("latency", cyc == SEG_W + 3);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_tot = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("boot zero", mseg == 0 && tot == 0 && !tseg_locked);
    @(negedge clk);
    tseg_we = 1; tseg_wdata = CNT_W'(4096);
    @(negedge clk);
    tseg_we = 0;
    while (busy) @(negedge clk);
    check("tseg set", tseg == 4096 && tseg_locked && mseg == 0);
    // a second write is ignored until reset
    tseg_we = 1; tseg_wdata = CNT_W'(100);
    @(negedge clk);
    tseg_we = 0;
    while (busy) @(negedge clk);
    check("tseg locked", tseg == 4096);
    for (int i = 0; i < 40; i++) step(1, 0);
    for (int i = 0; i < 60; i++) begin
      automatic int r = $urandom_range(0, 3);
      if (r == 0 && ref_tot > 0) step(0, 1);
      else if (r == 1) step(1, 1);
      else step(1, 0);
    end
    while (ref_tot > 0) step(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
