// mem_model: behavioural model of primary memory for the testbenches.
//
// Sparse word memory (associative array, unwritten words read as FILL).
// Handshake: req held with we/addr/wdata until ack; ack is a one-cycle
// pulse 1..MAX_LAT cycles after req is first seen, with rdata valid in the
// ack cycle. Not synthesizable; it stands in for the DRAM.
module mem_model #(
  parameter int AW = 32,
  parameter int DW = 32,
  parameter int MAX_LAT = 4,
  parameter logic [DW-1:0] FILL = '0
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata,
  output logic          ack
);
  logic [DW-1:0] mem [logic [AW-1:0]];
  int wait_left = -1;
  int n_writes = 0, n_reads = 0;

  initial begin
    ack = 1'b0;
    rdata = '0;
  end

  always @(posedge clk) begin
    ack <= 1'b0;
    if (req && !ack) begin
      if (wait_left < 0) wait_left = $urandom_range(0, MAX_LAT - 1);
      if (wait_left == 0) begin
        if (we) begin
          mem[addr] = wdata;
          n_writes++;
        end else begin
          rdata <= mem.exists(addr) ? mem[addr] : FILL;
          n_reads++;
        end
        ack <= 1'b1;
        wait_left = -1;
      end else begin
        wait_left--;
      end
    end
  end

  function automatic logic [DW-1:0] peek(input logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : FILL;
  endfunction
endmodule
