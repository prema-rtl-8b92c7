// preemption_module: makes the NPU a preemptible, multi-tasking device.
//
// Contents: the task queue (new requests from the host), the inference task
// context table, the PREMA scheduling policy (prema_scheduler) and the
// dynamic preemption-mechanism selection (mechanism_select). The module
// starts, checkpoints and kills tasks on the NPU core through the
// controller's task-control port.
//
// Scheduling is event driven. The scheduler wakes when
//   (1) a new task has been moved from the queue into the table,
//   (2) the running task has finished, or
//   (3) a scheduling period (PERIOD cycles, 0.25 ms at 700 MHz by default)
//       has elapsed; only this wake-up adds tokens.
// Wake-ups that arrive while the scheduler is busy are remembered and served
// afterwards. With the scheduler's candidate:
//   * NPU idle                      -> start the candidate
//   * candidate is the running task -> nothing
//   * otherwise ask mechanism_select: DRAIN -> nothing (the running task
//     finishes first); CHECKPOINT -> ckpt_req, wait for the trap routine's
//     YIELD, mark the task preempted with its resume/restore PCs, then start
//     the candidate; KILL -> kill_req, wait for `killed`, mark the task ready
//     with Executed cleared (it restarts from scratch), start the candidate.
// A preempted task is started at its restore routine, a ready task at its
// program entry. A finished task's entry is freed and reported on
// task_done / task_done_id (task_done_fault for an MMU violation).
//
// evt_* pulse once per scheduler decision of each kind (performance counters).
// The event list, the policy and the mechanism choice follow the design
// description; the handshakes and counters are this design's own.
//
// Lint note: the assertions below are disabled during reset with
// `disable iff (!rst_n)`, which makes lint report rst_n as used both
// synchronously and asynchronously (SYNCASYNCNET). The assertion is not
// logic; every flop in this module resets asynchronously only.
module preemption_module
  import npu_pkg::*;
#(
  parameter int unsigned NUM_TASKS = 16,
  parameter int unsigned QDEPTH    = 16,
  parameter int unsigned PERIOD    = 175000,   // 0.25 ms x 700 MHz
  parameter int unsigned TOK_LOW   = 1,
  parameter int unsigned TOK_MED   = 3,
  parameter int unsigned TOK_HIGH  = 9,
  localparam int unsigned IW       = $clog2(NUM_TASKS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  mech_mode_e       mode,
  // host
  input  logic             req_valid,
  output logic             req_ready,
  input  task_req_t        req,
  output logic             task_done,
  output logic [TID_W-1:0] task_done_id,
  output logic             task_done_fault,
  // NPU core task control
  output logic             core_start,
  output logic [PC_W-1:0]  core_start_pc,
  output logic [PC_W-1:0]  core_resume_pc,
  output logic [PC_W-1:0]  core_trap_pc,
  output logic [TID_W-1:0] core_tid,
  output logic             core_ckpt_req,
  output logic             core_kill_req,
  input  logic             core_active,
  input  logic             core_done,
  input  logic             core_done_fault,
  input  logic             core_yielded,
  input  logic [PC_W-1:0]  core_yield_resume_pc,
  input  logic [PC_W-1:0]  core_yield_restore_pc,
  input  logic             core_killed,
  // events
  output logic             evt_sched,
  output logic             evt_period,
  output logic             evt_start,
  output logic             evt_ckpt,
  output logic             evt_kill,
  output logic             evt_drain
);
  typedef enum logic [1:0] {P_IDLE, P_SCHED, P_WAIT, P_START} pstate_e;

  // ---------------- task queue ----------------
  logic      q_valid, q_pop;
  task_req_t q_data;
  task_queue #(.DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(q_valid), .pop(q_pop), .out_data(q_data));

  // ---------------- context table ----------------
  ctx_entry_t        entries[NUM_TASKS];
  logic              any_free;
  logic [IW-1:0]     free_idx;
  logic              free_en;
  logic [IW-1:0]     free_sel;
  logic              tok_we;
  logic [IW-1:0]     tok_idx;
  logic [TIME_W-1:0] tok_val;
  logic              st_we, st_set_pcs, st_clear_exec;
  logic [IW-1:0]     st_idx;
  task_status_e      st_status;
  logic [PC_W-1:0]   st_resume_pc, st_restore_pc;
  logic              running;
  logic [IW-1:0]     run_idx;

  assign q_pop = q_valid && any_free;

  context_table #(.NUM_TASKS(NUM_TASKS), .TOK_LOW(TOK_LOW), .TOK_MED(TOK_MED), .TOK_HIGH(TOK_HIGH)) u_table (
    .clk, .rst_n,
    .alloc(q_pop), .alloc_idx(free_idx), .alloc_req(q_data),
    .free(free_en), .free_idx_in(free_sel),
    .tok_we, .tok_idx, .tok_val,
    .st_we, .st_idx, .st_status, .st_set_pcs, .st_resume_pc, .st_restore_pc, .st_clear_exec,
    .run_valid(running), .run_idx,
    .entries, .any_free, .free_idx);

  // ---------------- policy and mechanism selection ----------------
  logic          sch_wake, sch_period, sch_busy, sch_result, cand_valid;
  logic [IW-1:0] cand_idx;

  prema_scheduler #(.NUM_TASKS(NUM_TASKS), .TOK_LOW(TOK_LOW), .TOK_MED(TOK_MED), .TOK_HIGH(TOK_HIGH)) u_sched (
    .clk, .rst_n, .entries, .wake(sch_wake), .period(sch_period), .busy(sch_busy),
    .result(sch_result), .cand_valid, .cand_idx, .tok_we, .tok_idx, .tok_val);

  mech_e mech;
  mechanism_select u_mech (
    .mode,
    .cur_estimated (entries[run_idx].estimated),
    .cur_executed  (entries[run_idx].executed),
    .cand_estimated(entries[cand_idx].estimated),
    .cand_executed (entries[cand_idx].executed),
    .mech);

  // ---------------- control ----------------
  pstate_e           pst;
  logic              pend_wake, pend_period;
  logic [31:0]       period_cnt;
  logic [IW-1:0]     target;
  logic              period_tick;

  assign period_tick = (period_cnt == PERIOD - 1);
  assign sch_wake    = (pst == P_IDLE) && pend_wake;
  assign sch_period  = pend_period;
  assign free_en     = core_done;
  assign free_sel    = run_idx;

  logic start_now;
  logic [IW-1:0] start_idx;

  always_comb begin
    start_now = 1'b0;
    start_idx = target;
    if (pst == P_SCHED && sch_result && cand_valid && !running && !core_active &&
        entries[cand_idx].state.valid) begin
      start_now = 1'b1;
      start_idx = cand_idx;
    end else if (pst == P_START && entries[target].state.valid) begin
      start_now = 1'b1;
      start_idx = target;
    end
  end

  assign core_start     = start_now;
  assign core_tid       = TID_W'(entries[start_idx].task_id);
  assign core_start_pc  = (entries[start_idx].state.status == ST_PREEMPTED) ?
                          entries[start_idx].state.restore_pc : entries[start_idx].state.prog_pc;
  assign core_resume_pc = entries[start_idx].state.resume_pc;
  assign core_trap_pc   = entries[start_idx].state.trap_pc;

  // context-table state writes
  always_comb begin
    st_we         = 1'b0;
    st_idx        = run_idx;
    st_status     = ST_READY;
    st_set_pcs    = 1'b0;
    st_resume_pc  = core_yield_resume_pc;
    st_restore_pc = core_yield_restore_pc;
    st_clear_exec = 1'b0;
    if (pst == P_WAIT && core_yielded) begin
      st_we      = 1'b1;
      st_status  = ST_PREEMPTED;
      st_set_pcs = 1'b1;
    end else if (pst == P_WAIT && core_killed) begin
      st_we         = 1'b1;
      st_status     = ST_READY;
      st_clear_exec = 1'b1;
    end else if (start_now) begin
      st_we     = 1'b1;
      st_idx    = start_idx;
      st_status = ST_RUNNING;
    end
  end

  logic preempt_ok;
  assign preempt_ok = running && core_active && !core_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst             <= P_IDLE;
      pend_wake       <= 1'b0;
      pend_period     <= 1'b0;
      period_cnt      <= '0;
      target          <= '0;
      running         <= 1'b0;
      run_idx         <= '0;
      core_ckpt_req   <= 1'b0;
      core_kill_req   <= 1'b0;
      task_done       <= 1'b0;
      task_done_id    <= '0;
      task_done_fault <= 1'b0;
      evt_sched       <= 1'b0;
      evt_period      <= 1'b0;
      evt_start       <= 1'b0;
      evt_ckpt        <= 1'b0;
      evt_kill        <= 1'b0;
      evt_drain       <= 1'b0;
    end else begin
      core_ckpt_req   <= 1'b0;
      core_kill_req   <= 1'b0;
      task_done       <= 1'b0;
      task_done_fault <= 1'b0;
      evt_sched       <= 1'b0;
      evt_period      <= 1'b0;
      evt_start       <= start_now;
      evt_ckpt        <= 1'b0;
      evt_kill        <= 1'b0;
      evt_drain       <= 1'b0;

      // wake-up sources
      period_cnt <= period_tick ? '0 : period_cnt + 1'b1;
      if (period_tick) begin
        pend_wake   <= 1'b1;
        pend_period <= 1'b1;
      end
      if (q_pop) pend_wake <= 1'b1;
      if (sch_wake && !period_tick && !q_pop && !core_done) begin
        pend_wake   <= 1'b0;
        pend_period <= 1'b0;
      end else if (sch_wake) begin
        // a new event arrived in the same cycle: keep the wake-up pending
        pend_period <= period_tick;
      end

      // task completion
      if (core_done) begin
        running         <= 1'b0;
        task_done       <= 1'b1;
        task_done_id    <= TID_W'(entries[run_idx].task_id);
        task_done_fault <= core_done_fault;
        pend_wake       <= 1'b1;
      end

      if (start_now) begin
        running <= 1'b1;
        run_idx <= start_idx;
      end

      unique case (pst)
        P_IDLE: if (sch_wake) begin
          pst       <= P_SCHED;
          evt_sched <= 1'b1;
          evt_period <= pend_period;
        end
        P_SCHED: if (sch_result) begin
          pst <= P_IDLE;
          if (cand_valid && running && cand_idx != run_idx && preempt_ok) begin
            target <= cand_idx;
            unique case (mech)
              MECH_CHECKPOINT: begin
                core_ckpt_req <= 1'b1;
                evt_ckpt      <= 1'b1;
                pst           <= P_WAIT;
              end
              MECH_KILL: begin
                core_kill_req <= 1'b1;
                evt_kill      <= 1'b1;
                pst           <= P_WAIT;
              end
              default: evt_drain <= 1'b1;
            endcase
          end else if (cand_valid && !start_now && !running && !core_active) begin
            pend_wake <= 1'b1;   // candidate vanished: look again
          end
        end
        P_WAIT: begin
          if (core_yielded || core_killed) begin
            running <= 1'b0;
            pst     <= P_START;
          end else if (core_done) begin
            pst <= P_IDLE;       // the task ended (fault) before the preemption point
          end
        end
        P_START: pst <= P_IDLE;
        default: pst <= P_IDLE;
      endcase
    end
  end

  a_ckpt_only_when_running: assert property (@(posedge clk) disable iff (!rst_n)
    core_ckpt_req |-> running);
  // The scheduler is only woken when it is idle.
  a_sched_free: assert property (@(posedge clk) disable iff (!rst_n) sch_wake |-> !sch_busy);
endmodule
