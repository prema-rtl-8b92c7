// tb_preemption_module: the preemption module (task queue, context table,
// PREMA scheduler, mechanism selection) driving a behavioural NPU core.
//
// The core model runs each task for a fixed number of cycles (remembering
// the work done across a checkpoint), answers a checkpoint request with a
// yield 20 cycles later and a kill request with `killed` 10 cycles later.
// Scenarios, each with its expected order of events:
//  1. static CHECKPOINT: a low-priority task runs, a high-priority one
//     arrives and preempts it; the low task later restarts at its restore
//     routine with its resume PC and completes its remaining work only;
//  2. static KILL: as 1, but the low task restarts from its program entry
//     and its Executed count is cleared;
//  3. dynamic: a nearly finished low task is not interrupted (DRAIN) by a
//     longer high-priority task, which starts only after it;
//  4. period wake-ups add tokens to a waiting task (PERIOD shortened).
module tb_preemption_module;
  import npu_pkg::*;
  localparam int NT = 4, PERIOD = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mech_mode_e mode;
  logic req_valid, req_ready, task_done, task_done_fault;
  task_req_t req;
  logic [3:0] task_done_id, core_tid;
  logic core_start, core_ckpt_req, core_kill_req, core_active, core_done, core_done_fault;
  logic core_yielded, core_killed;
  logic [11:0] core_start_pc, core_resume_pc, core_trap_pc, core_yield_resume_pc, core_yield_restore_pc;
  logic evt_sched, evt_period, evt_start, evt_ckpt, evt_kill, evt_drain;

  preemption_module #(.NUM_TASKS(NT), .QDEPTH(4), .PERIOD(PERIOD)) dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- behavioural core ----------------
  int len[16];          // total work per task id
  int left[16];         // remaining work
  int ckpt_cnt, kill_cnt;
  logic [3:0] cur;
  logic [11:0] st_pc[16], st_rpc[16];
  bit ckpt_pend, kill_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_active <= 0; core_done <= 0; core_yielded <= 0; core_killed <= 0; core_done_fault <= 0;
      core_yield_resume_pc <= 0; core_yield_restore_pc <= 0; ckpt_pend <= 0; kill_pend <= 0;
      cur <= 0;
    end else begin
      core_done <= 0; core_yielded <= 0; core_killed <= 0;
      if (!core_active) begin
        if (core_start) begin
          core_active <= 1; cur <= core_tid;
          st_pc[core_tid] <= core_start_pc; st_rpc[core_tid] <= core_resume_pc;
        end
      end else if (kill_pend) begin
        if (kill_cnt == 0) begin
          core_killed <= 1; core_active <= 0; kill_pend <= 0; left[cur] <= len[cur];
        end else kill_cnt <= kill_cnt - 1;
      end else if (ckpt_pend) begin
        if (ckpt_cnt == 0) begin
          core_yielded <= 1; core_active <= 0; ckpt_pend <= 0;
          core_yield_resume_pc  <= 12'(100 + cur);
          core_yield_restore_pc <= 12'(200 + cur);
        end else ckpt_cnt <= ckpt_cnt - 1;
      end else if (core_kill_req) begin
        kill_pend <= 1; kill_cnt <= 10;
      end else if (core_ckpt_req) begin
        ckpt_pend <= 1; ckpt_cnt <= 20;
      end else if (left[cur] <= 1) begin
        left[cur] <= 0; core_done <= 1; core_active <= 0;
      end else left[cur] <= left[cur] - 1;
    end
  end

  // ---------------- event log ----------------
  int n_ckpt = 0, n_kill = 0, n_drain = 0, n_period = 0, n_sched = 0, n_start = 0;
  int done_order[$];
  int start_order[$];
  always @(posedge clk) if (rst_n) begin
    if (evt_ckpt) n_ckpt++;
    if (evt_kill) n_kill++;
    if (evt_drain) n_drain++;
    if (evt_period) n_period++;
    if (evt_sched) n_sched++;
    if (evt_start) n_start++;
    if (task_done) done_order.push_back(int'(task_done_id));
    if (core_start) start_order.push_back(int'(core_tid));
  end

  task automatic submit(input int tid, input prio_e p, input int est, input int work);
    len[tid] = work; left[tid] = work;
    @(negedge clk);
    req_valid = 1;
    req = '{task_id: 4'(tid), prio: p, estimated: 64'(est), prog_pc: 12'(10 + tid), trap_pc: 12'(50 + tid)};
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic wait_done(input int n);
    while (done_order.size() < n) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  int idx_low;
  logic [63:0] tok0;

  initial begin
    mode = MODE_CHECKPOINT; req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. static CHECKPOINT ----
    submit(1, PRIO_LOW, 3000, 3000);
    repeat (200) @(negedge clk);
    submit(2, PRIO_HIGH, 500, 500);
    wait_done(2);
    check(n_ckpt == 1 && n_kill == 0, "one checkpoint");
    check(done_order[0] == 2 && done_order[1] == 1, "high task finished first");
    check(start_order.size() == 3 && start_order[2] == 1, "low task restarted");
    check(st_pc[1] == 12'(200 + 1) && st_rpc[1] == 12'(100 + 1), "restarted at restore routine with resume PC");
    done_order.delete(); start_order.delete();

    // ---- 2. static KILL ----
    mode = MODE_KILL;
    submit(1, PRIO_LOW, 3000, 3000);
    repeat (200) @(negedge clk);
    submit(2, PRIO_HIGH, 500, 500);
    // Executed of the low task is cleared when it is killed.
    while (n_kill == 0) @(negedge clk);
    while (!core_killed) @(negedge clk);
    repeat (2) @(negedge clk);
    idx_low = -1;
    for (int i = 0; i < NT; i++)
      if (dut.entries[i].state.valid && dut.entries[i].task_id == 1) idx_low = i;
    check(idx_low >= 0 && dut.entries[idx_low].executed < 10, "killed task's Executed cleared");
    wait_done(2);
    check(n_kill == 1 && n_ckpt == 1, "one kill");
    check(done_order[0] == 2 && done_order[1] == 1, "high task finished first (kill)");
    check(st_pc[1] == 12'(10 + 1), "killed task restarted from its entry");
    done_order.delete(); start_order.delete();

    // ---- 3. dynamic: DRAIN ----
    mode = MODE_DYNAMIC;
    submit(1, PRIO_LOW, 2000, 2000);
    repeat (1500) @(negedge clk);
    submit(2, PRIO_HIGH, 1000, 1000);
    wait_done(2);
    check(n_drain >= 1, "dynamic policy drained");
    check(n_ckpt == 1 && n_kill == 1, "no preemption while draining");
    check(done_order[0] == 1 && done_order[1] == 2, "running task finished first (drain)");
    done_order.delete(); start_order.delete();

    // ---- 3b. dynamic: CHECKPOINT when the newcomer is short ----
    submit(1, PRIO_LOW, 4000, 4000);
    repeat (100) @(negedge clk);
    submit(2, PRIO_HIGH, 300, 300);
    wait_done(2);
    check(n_ckpt == 2, "dynamic policy checkpointed a long task for a short one");
    check(done_order[0] == 2, "short high task first");
    done_order.delete(); start_order.delete();

    // ---- 4. period wake-ups and token growth ----
    mode = MODE_CHECKPOINT;
    submit(3, PRIO_HIGH, 3000, 3000);
    repeat (20) @(negedge clk);
    submit(1, PRIO_LOW, 3000, 3000);
    repeat (5) @(negedge clk);
    for (int i = 0; i < NT; i++)
      if (dut.entries[i].state.valid && dut.entries[i].task_id == 1) idx_low = i;
    tok0 = dut.entries[idx_low].token;
    repeat (3 * PERIOD) @(negedge clk);
    check(n_period >= 2, $sformatf("period wake-ups: %0d", n_period));
    check(dut.entries[idx_low].token > tok0, "waiting task gained tokens");
    wait_done(2);
    check(n_sched > 0 && n_start > 0, "scheduler events counted");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
