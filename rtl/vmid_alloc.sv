// vmid_alloc: hands out unique VM IDs.
//
// Keeps one "in use" bit per ID. alloc takes the lowest free ID, so the
// hypervisor, which is loaded first, gets ID 0, the ID the protection table
// uses for hypervisor segments; VMs get 1, 2, ... release returns an ID.
// That IDs are unique follows the source; lowest-first order and reuse of
// released IDs are this design's choices.
//
// Timing: free_ok/free_id are combinational on the current state; alloc and
// release take effect at the next clock edge. query_id/query_used is a
// combinational look-up. Reset frees every ID.
module vmid_alloc
  import asmi_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  alloc,       // take free_id (ignored when !free_ok)
  output logic  free_ok,     // an ID is free
  output vmid_t free_id,     // lowest free ID
  input  logic  release_en,
  input  vmid_t release_id,
  input  vmid_t query_id,
  output logic  query_used,
  output logic [TOT_W-1:0] used_count
);

  logic [NVMID-1:0] used;

  always_comb begin
    free_ok = 1'b0;
    free_id = '0;
    for (int i = NVMID - 1; i >= 0; i--) begin
      if (!used[i]) begin
        free_ok = 1'b1;
        free_id = vmid_t'(i);
      end
    end
  end

  always_comb begin
    used_count = '0;
    for (int i = 0; i < NVMID; i++) used_count = used_count + TOT_W'(used[i]);
  end

  assign query_used = used[query_id];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0;
    end else begin
      if (release_en)       used[release_id] <= 1'b0;
      if (alloc && free_ok) used[free_id]    <= 1'b1;
    end
  end

endmodule
