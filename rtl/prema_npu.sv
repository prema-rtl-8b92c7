// prema_npu: a preemptible systolic-array NPU with the PREMA scheduler.
//
// The NPU core (instruction buffer, controller, UBUF, WBUF, systolic data
// setup, SH x SW systolic array, ACCQ, vector unit, DMA, MMU) executes one
// inference task at a time; the preemption module holds up to NUM_TASKS
// resident tasks in its context table, decides with the PREMA policy which
// one should run, and preempts the running task by CHECKPOINT or KILL, or
// lets it DRAIN. The latency predictor and the sequence-length table let the
// host (or the NPU) compute each task's predicted execution time, which is
// sent with the task request and drives both scheduling decisions.
//
// Host side (plain signals, a bus adapter is outside this design):
//   ib_*        write compiled instructions into the instruction buffer
//   mmu_*       give TaskID (ASID) a region of off-chip memory
//   mech_mode   dynamic DRAIN/CHECKPOINT selection, or static CHECKPOINT / KILL
//   task_req_*  dispatch an inference task (valid/ready)
//   task_done*  completion of a task
//   pred_*, lut_* the prediction model and its RNN length table
// Lint reports rst_n here as used both synchronously and asynchronously:
// that comes only from the `disable iff (!rst_n)` of assertions in the
// sub-modules; all flops reset asynchronously.
// Memory side: row-wide read requests (valid/ready) with in-order
// responses, and row-wide writes (valid/ready).
module prema_npu
  import npu_pkg::*;
#(
  parameter int unsigned SH        = 128,
  parameter int unsigned SW        = 128,
  parameter int unsigned ACC       = 128,
  parameter int unsigned UB_ROWS   = 32768,    // 8 MB
  parameter int unsigned WB_ROWS   = 16384,    // 4 MB
  parameter int unsigned IB_DEPTH  = 1024,
  parameter int unsigned NUM_TASKS = 16,
  parameter int unsigned PERIOD    = 175000,   // 0.25 ms at 700 MHz
  parameter int unsigned BW        = 255,      // 16-bit elements per cycle
  parameter int unsigned LUT_ENTRIES = 64,
  localparam int unsigned ROW_W    = SH * DATA_W,
  localparam int unsigned IB_AW    = $clog2(IB_DEPTH),
  localparam int unsigned LUT_AW   = $clog2(LUT_ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host
  input  logic               ib_we,
  input  logic [IB_AW-1:0]   ib_waddr,
  input  instr_t             ib_wdata,
  input  logic               mmu_we,
  input  logic [TID_W-1:0]   mmu_asid,
  input  logic [DADDR_W-1:0] mmu_base,
  input  logic [DADDR_W-1:0] mmu_limit,
  input  mech_mode_e         mech_mode,
  input  logic               task_req_valid,
  output logic               task_req_ready,
  input  task_req_t          task_req,
  output logic               task_done,
  output logic [TID_W-1:0]   task_done_id,
  output logic               task_done_fault,
  input  logic               pred_clear,
  input  logic               pred_layer_valid,
  input  logic [31:0]        pred_m,
  input  logic [31:0]        pred_k,
  input  logic [31:0]        pred_n,
  input  logic               pred_recurrent,
  input  logic [15:0]        pred_in_len,
  output logic [TIME_W-1:0]  pred_time,
  input  logic               lut_we,
  input  logic [LUT_AW-1:0]  lut_wlen,
  input  logic [15:0]        lut_wval,
  // event pulses (performance counters)
  output logic               evt_sched,
  output logic               evt_period,
  output logic               evt_start,
  output logic               evt_ckpt,
  output logic               evt_kill,
  output logic               evt_drain,
  output logic               gemm_busy,
  // off-chip memory
  output logic               mem_rd_valid,
  input  logic               mem_rd_ready,
  output logic [DADDR_W-1:0] mem_rd_addr,
  input  logic               mem_rd_resp_valid,
  input  logic [ROW_W-1:0]   mem_rd_resp_data,
  output logic               mem_wr_valid,
  input  logic               mem_wr_ready,
  output logic [DADDR_W-1:0] mem_wr_addr,
  output logic [ROW_W-1:0]   mem_wr_data
);
  logic             core_start, core_ckpt_req, core_kill_req;
  logic [PC_W-1:0]  core_start_pc, core_resume_pc, core_trap_pc;
  logic [TID_W-1:0] core_tid;
  logic             core_active, core_done, core_done_fault, core_yielded, core_killed;
  logic [PC_W-1:0]  core_yield_resume_pc, core_yield_restore_pc;

  preemption_module #(.NUM_TASKS(NUM_TASKS), .PERIOD(PERIOD)) u_pm (
    .clk, .rst_n, .mode(mech_mode),
    .req_valid(task_req_valid), .req_ready(task_req_ready), .req(task_req),
    .task_done, .task_done_id, .task_done_fault,
    .core_start, .core_start_pc, .core_resume_pc, .core_trap_pc, .core_tid,
    .core_ckpt_req, .core_kill_req, .core_active, .core_done, .core_done_fault,
    .core_yielded, .core_yield_resume_pc, .core_yield_restore_pc, .core_killed,
    .evt_sched, .evt_period, .evt_start, .evt_ckpt, .evt_kill, .evt_drain);

  npu_core #(.SH(SH), .SW(SW), .ACC(ACC), .UB_ROWS(UB_ROWS), .WB_ROWS(WB_ROWS),
             .IB_DEPTH(IB_DEPTH), .NUM_TASKS(NUM_TASKS)) u_core (
    .clk, .rst_n,
    .ib_we, .ib_waddr, .ib_wdata, .mmu_we, .mmu_asid, .mmu_base, .mmu_limit,
    .start(core_start), .start_pc(core_start_pc), .start_resume_pc(core_resume_pc),
    .start_trap_pc(core_trap_pc), .start_tid(core_tid),
    .ckpt_req(core_ckpt_req), .kill_req(core_kill_req),
    .active(core_active), .done(core_done), .done_fault(core_done_fault),
    .yielded(core_yielded), .yield_resume_pc(core_yield_resume_pc),
    .yield_restore_pc(core_yield_restore_pc), .killed(core_killed), .gemm_busy,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data);

  logic [15:0] lut_len;
  seqlen_lut #(.ENTRIES(LUT_ENTRIES), .VAL_W(16)) u_lut (
    .clk, .rst_n, .wr_en(lut_we), .wr_len(lut_wlen), .wr_val(lut_wval),
    .in_len(pred_in_len), .out_len(lut_len));

  latency_predictor #(.SH(SH), .SW(SW), .ACC(ACC), .BW(BW)) u_pred (
    .clk, .rst_n, .clear(pred_clear), .layer_valid(pred_layer_valid),
    .m(pred_m), .k(pred_k), .n(pred_n), .reps(pred_recurrent ? lut_len : 16'd1),
    .time_estimated(pred_time));
endmodule
