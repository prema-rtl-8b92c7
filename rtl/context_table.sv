// context_table: the inference task context table of the preemption module.
//
// One entry per resident task with seven 64-bit fields: TaskID, the three
// execution-time fields Executed / Waited / Estimated, Priority (the token
// value of the task's priority level), Token and State. Seven 64-bit fields
// per task is the size the design description assumes for its storage
// estimate (448 bits per task, 16 tasks). State packs a valid bit, the
// status (ready / running / preempted) and the program counters the
// preemption module needs; that packing is this design's own.
//
// Time keeping, every cycle: the entry named by run_idx (when run_valid)
// counts Executed up; every other valid entry counts Waited up. Times are in
// clock cycles.
// Update ports (all take effect at the clock edge; the allocation port has
// priority over the others for the same entry):
//   alloc : initialise a free entry from a host request
//   free  : release the entry of a finished task
//   tok   : write a new Token value (scheduler)
//   st    : write status, optionally resume/restore PCs, optionally clear
//           Executed (KILL restarts a task from scratch)
// free_idx / any_free name the lowest free entry.
//
// Lint note: the assertions below are disabled during reset with
// `disable iff (!rst_n)`, which makes lint report rst_n as used both
// synchronously and asynchronously (SYNCASYNCNET). The assertion is not
// logic; every flop in this module resets asynchronously only.
module context_table
  import npu_pkg::*;
#(
  parameter int unsigned NUM_TASKS = 16,
  parameter int unsigned TOK_LOW   = 1,
  parameter int unsigned TOK_MED   = 3,
  parameter int unsigned TOK_HIGH  = 9,
  localparam int unsigned IW       = $clog2(NUM_TASKS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            alloc,
  input  logic [IW-1:0]   alloc_idx,
  input  task_req_t       alloc_req,
  input  logic            free,
  input  logic [IW-1:0]   free_idx_in,
  input  logic            tok_we,
  input  logic [IW-1:0]   tok_idx,
  input  logic [TIME_W-1:0] tok_val,
  input  logic            st_we,
  input  logic [IW-1:0]   st_idx,
  input  task_status_e    st_status,
  input  logic            st_set_pcs,
  input  logic [PC_W-1:0] st_resume_pc,
  input  logic [PC_W-1:0] st_restore_pc,
  input  logic            st_clear_exec,
  input  logic            run_valid,
  input  logic [IW-1:0]   run_idx,
  output ctx_entry_t      entries[NUM_TASKS],
  output logic            any_free,
  output logic [IW-1:0]   free_idx
);
  function automatic logic [TIME_W-1:0] prio_tokens(prio_e p);
    unique case (p)
      PRIO_HIGH: return TIME_W'(TOK_HIGH);
      PRIO_MED:  return TIME_W'(TOK_MED);
      default:   return TIME_W'(TOK_LOW);
    endcase
  endfunction

  ctx_entry_t tab[NUM_TASKS];
  assign entries = tab;

  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    for (int i = NUM_TASKS - 1; i >= 0; i--) begin
      if (!tab[i].state.valid) begin
        any_free = 1'b1;
        free_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_TASKS; i++) tab[i] <= '0;
    end else begin
      for (int i = 0; i < NUM_TASKS; i++) begin
        if (alloc && alloc_idx == IW'(i)) begin
          tab[i].task_id          <= TIME_W'(alloc_req.task_id);
          tab[i].executed         <= '0;
          tab[i].waited           <= '0;
          tab[i].estimated        <= alloc_req.estimated;
          tab[i].prio_tokens      <= prio_tokens(alloc_req.prio);
          tab[i].token            <= prio_tokens(alloc_req.prio) << TOKEN_FRAC;
          tab[i].state            <= '0;
          tab[i].state.valid      <= 1'b1;
          tab[i].state.status     <= ST_READY;
          tab[i].state.prog_pc    <= alloc_req.prog_pc;
          tab[i].state.trap_pc    <= alloc_req.trap_pc;
        end else if (tab[i].state.valid) begin
          if (run_valid && run_idx == IW'(i)) tab[i].executed <= tab[i].executed + 1'b1;
          else                                tab[i].waited   <= tab[i].waited + 1'b1;
          if (tok_we && tok_idx == IW'(i)) tab[i].token <= tok_val;
          if (st_we && st_idx == IW'(i)) begin
            tab[i].state.status <= st_status;
            if (st_set_pcs) begin
              tab[i].state.resume_pc  <= st_resume_pc;
              tab[i].state.restore_pc <= st_restore_pc;
            end
            if (st_clear_exec) tab[i].executed <= '0;
          end
          if (free && free_idx_in == IW'(i)) tab[i].state.valid <= 1'b0;
        end
      end
    end
  end

  a_alloc_free_slot: assert property (@(posedge clk) disable iff (!rst_n)
    alloc |-> !tab[alloc_idx].state.valid);
endmodule
