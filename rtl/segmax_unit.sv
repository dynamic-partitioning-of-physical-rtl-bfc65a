// segmax_unit: the SegMax register and the counts it is derived from.
//
//   TSEG  total number of physical segments, written once by the hypervisor
//         at boot (tseg_we) and locked until reset.
//   TOT   number of running VMs plus the hypervisor; +1 on hypervisor load
//         and VM creation (tot_inc), -1 on VM destruction (tot_dec).
//   MSEG  TSEG / TOT (integer quotient), the largest number of segments a VM
//         may keep once physical memory is full; 0 while TOT is 0.
// The formula and the update events follow the source. The divider is this
// design's choice: a restoring divider, one quotient bit per cycle. busy
// rises at the clock edge that takes the change of TOT or TSEG, the next
// edge latches the operands, and SEG_W+1 more edges produce the quotient:
// MSEG is new SEG_W+3 edges after the request. While busy is high mseg keeps its old value until the new quotient is complete.
// tot_inc and tot_dec in the same cycle cancel.
module segmax_unit
  import asmi_pkg::*;
#(
  parameter int SEG_W = DEF_SEG_W,
  localparam int CNT_W = SEG_W + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tseg_we,
  input  logic [CNT_W-1:0] tseg_wdata,
  input  logic             tot_inc,
  input  logic             tot_dec,
  output logic [CNT_W-1:0] tseg,
  output logic [TOT_W-1:0] tot,
  output logic [CNT_W-1:0] mseg,
  output logic             tseg_locked,
  output logic             busy
);

  logic [CNT_W-1:0] quo;       // dividend shifting out, quotient shifting in
  logic [TOT_W-1:0] rem;
  logic [TOT_W-1:0] divisor;
  logic [$clog2(CNT_W+1)-1:0] step;
  logic             start;

  logic [TOT_W+1:0] trial;   // one extra bit catches the borrow

  always_comb trial = {1'b0, rem, quo[CNT_W-1]} - {2'b0, divisor};

  assign start = (tseg_we && !tseg_locked) || (tot_inc != tot_dec);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tseg        <= '0;
      tseg_locked <= 1'b0;
      tot         <= '0;
      mseg        <= '0;
      busy        <= 1'b0;
      quo         <= '0;
      rem         <= '0;
      divisor     <= '0;
      step        <= '0;
    end else begin
      if (tseg_we && !tseg_locked) begin
        tseg        <= tseg_wdata;
        tseg_locked <= 1'b1;
      end
      if (tot_inc && !tot_dec)      tot <= tot + 1'b1;
      else if (tot_dec && !tot_inc) tot <= tot - 1'b1;

      if (start) begin
        // Operands are taken in the next cycle, once the counts settle.
        busy <= 1'b1;
        step <= '0;
      end else if (busy) begin
        if (step == '0) begin
          quo     <= tseg;
          rem     <= '0;
          divisor <= tot;
          step    <= step + 1'b1;
        end else if (divisor == '0) begin
          mseg <= '0;
          busy <= 1'b0;
        end else begin
          if (!trial[TOT_W+1]) begin
            rem <= trial[TOT_W-1:0];
            quo <= {quo[CNT_W-2:0], 1'b1};
          end else begin
            rem <= {rem[TOT_W-2:0], quo[CNT_W-1]};
            quo <= {quo[CNT_W-2:0], 1'b0};
          end
          if (step == $bits(step)'(CNT_W)) begin
            mseg <= trial[TOT_W+1] ? {quo[CNT_W-2:0], 1'b0} : {quo[CNT_W-2:0], 1'b1};
            busy <= 1'b0;
          end
          step <= step + 1'b1;
        end
      end
    end
  end

endmodule
