// mmu: per-task protection check on off-chip memory accesses.
//
// All tasks share off-chip memory, so every DMA access is checked against
// the region the host granted to the running task. The TaskID acts as the
// address-space identifier (ASID) that selects the region. Each ASID has a
// base row and a length in rows, written by the host; an access is allowed
// when base <= addr < base + limit. A length of zero denies everything.
//
// The TaskID-as-ASID check follows the design description; the base/limit
// region format (no address translation) is this design's own choice.
// The check is combinational; the table is written on the clock edge and
// cleared at reset.
module mmu
  import npu_pkg::*;
#(
  parameter int unsigned NUM_TASKS = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // host programming
  input  logic               cfg_we,
  input  logic [TID_W-1:0]   cfg_asid,
  input  logic [DADDR_W-1:0] cfg_base,
  input  logic [DADDR_W-1:0] cfg_limit,
  // check
  input  logic [TID_W-1:0]   asid,
  input  logic [DADDR_W-1:0] addr,
  output logic               ok
);
  logic [DADDR_W-1:0] base_q [NUM_TASKS];
  logic [DADDR_W-1:0] limit_q[NUM_TASKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NUM_TASKS; t++) begin
        base_q[t]  <= '0;
        limit_q[t] <= '0;
      end
    end else if (cfg_we && 32'(cfg_asid) < NUM_TASKS) begin
      base_q[cfg_asid]  <= cfg_base;
      limit_q[cfg_asid] <= cfg_limit;
    end
  end

  always_comb begin
    ok = 1'b0;
    if (32'(asid) < NUM_TASKS) begin
      ok = (addr >= base_q[asid]) &&
           ({1'b0, addr} < {1'b0, base_q[asid]} + {1'b0, limit_q[asid]});
    end
  end
endmodule
