// tb_prema_npu: end-to-end test of the whole NPU (preemption module, core,
// latency predictor, sequence-length table) at a small size.
//
// Array 4 x 4, ACCQ 8 rows, 4 task contexts, scheduling period 300 cycles,
// memory latency 100 cycles. Three tasks share the NPU:
//   task 1  high priority, short: relu(X (W1 + W2)) >> 2
//   task 2  low priority, long: twelve accumulating GEMMs, then 12 X W; its trap
//           routine saves the ACCQ and its restore routine reloads it
//   task 3  reads outside its memory region (MMU fault)
// Task 2 is started first and task 1 arrives while it runs, once under each
// mechanism policy: static CHECKPOINT, static KILL, and the dynamic policy
// with a cost estimate that makes it DRAIN. Every run's results are compared
// with a software model. The predictor is used to produce the estimates,
// once with a recurrent layer whose repeat count comes from the length table.
// Each mechanism (schedule, period wake-up, start, checkpoint, kill, drain,
// completion, fault, GEMM, vector op, DMA load and store, prediction,
// table lookup) is counted and must have happened at least once.
module tb_prema_npu;
  import npu_pkg::*;
  localparam int SH = 4, SW = 4, ACC = 8, ROW_W = SH * 16, LAT = 100, NGEMM = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ib_we, mmu_we, task_req_valid, task_req_ready, task_done, task_done_fault;
  logic [5:0] ib_waddr;
  instr_t ib_wdata;
  logic [3:0] mmu_asid, task_done_id;
  logic [31:0] mmu_base, mmu_limit;
  mech_mode_e mech_mode;
  task_req_t task_req;
  logic pred_clear, pred_layer_valid, pred_recurrent, lut_we;
  logic [31:0] pred_m, pred_k, pred_n;
  logic [15:0] pred_in_len, lut_wval;
  logic [63:0] pred_time;
  logic [5:0] lut_wlen;
  logic evt_sched, evt_period, evt_start, evt_ckpt, evt_kill, evt_drain, gemm_busy;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid, mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [ROW_W-1:0] mem_rd_resp_data, mem_wr_data;

  prema_npu #(.SH(SH), .SW(SW), .ACC(ACC), .UB_ROWS(64), .WB_ROWS(64), .IB_DEPTH(64),
              .NUM_TASKS(4), .PERIOD(300)) dut (.*);
  dram_model #(.ROW_W(ROW_W), .LAT(LAT)) mem (
    .clk, .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .resp_valid(mem_rd_resp_valid), .resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_sched = 0, n_period = 0, n_start = 0, n_ckpt = 0, n_kill = 0, n_drain = 0;
  int n_done = 0, n_fault = 0, n_gemm = 0, n_vec = 0, gemm_bad = 0, gemm_len = 0;
  int done_ids[$];
  bit gemm_q = 0, vec_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (evt_sched)  n_sched++;
    if (evt_period) n_period++;
    if (evt_start)  n_start++;
    if (evt_ckpt)   n_ckpt++;
    if (evt_kill)   n_kill++;
    if (evt_drain)  n_drain++;
    if (task_done) begin
      n_done++;
      done_ids.push_back(int'(task_done_id));
      if (task_done_fault) n_fault++;
    end
    if (gemm_busy) gemm_len++;
    if (gemm_q && !gemm_busy) begin
      n_gemm++;
      if (gemm_len != ACC + SH + 2 * SW && n_kill == 0) gemm_bad++;
      gemm_len = 0;
    end
    gemm_q = gemm_busy;
    if (dut.u_core.u_ctrl.cop == 2'd2 && !vec_q) n_vec++;
    vec_q = (dut.u_core.u_ctrl.cop == 2'd2);
  end

  // ---------------- helpers ----------------
  function automatic instr_t mk(opcode_e op, bit bar = 0, buf_sel_e b = BUF_UBUF, bit accum = 0,
                                vfunc_e f = VF_PASS, int sh = 0, int da = 0, int ba = 0,
                                int ba2 = 0, int aa = 0, int cnt = 0);
    instr_t i;
    i = '0;
    i.op = op; i.barrier = bar; i.bsel = b; i.accumulate = accum; i.vfunc = f;
    i.shift = 5'(sh); i.dram_addr = 32'(da); i.buf_addr = 16'(ba); i.buf_addr2 = 16'(ba2);
    i.acc_addr = 16'(aa); i.count = 16'(cnt);
    return i;
  endfunction

  task automatic put(input int a, input instr_t i);
    @(negedge clk);
    ib_we = 1; ib_waddr = 6'(a); ib_wdata = i;
    @(negedge clk);
    ib_we = 0;
  endtask

  task automatic set_region(input int asid, input int base, input int limit);
    @(negedge clk);
    mmu_we = 1; mmu_asid = 4'(asid); mmu_base = 32'(base); mmu_limit = 32'(limit);
    @(negedge clk);
    mmu_we = 0;
  endtask

  task automatic submit(input int tid, input prio_e p, input longint est, input int pc, input int tpc);
    @(negedge clk);
    task_req_valid = 1;
    task_req = '{task_id: 4'(tid), prio: p, estimated: 64'(est), prog_pc: 12'(pc), trap_pc: 12'(tpc)};
    while (!task_req_ready) @(negedge clk);
    @(negedge clk);
    task_req_valid = 0;
  endtask

  // One layer through the predictor; returns its predicted cycles.
  task automatic predict(input int m, input int k, input int n, input bit rec, input int len,
                         output longint t);
    @(negedge clk);
    pred_clear = 1;
    @(negedge clk);
    pred_clear = 0; pred_layer_valid = 1; pred_m = 32'(m); pred_k = 32'(k); pred_n = 32'(n);
    pred_recurrent = rec; pred_in_len = 16'(len);
    @(negedge clk);
    pred_layer_valid = 0;
    @(negedge clk);
    t = longint'(pred_time);
  endtask

  task automatic wait_done(input int n);
    while (n_done < n) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  function automatic logic signed [15:0] el(logic [ROW_W-1:0] r, int i);
    return r[i*16 +: 16];
  endfunction

  function automatic int dot(int xa, int wa, int v, int j);
    int s = 0;
    for (int i = 0; i < SH; i++) s += int'(el(mem.mem[xa+v], i)) * int'(el(mem.mem[wa+j], i));
    return s;
  endfunction

  function automatic logic signed [15:0] requant(int s, bit relu, int sh);
    if (relu && s < 0) s = 0;
    s = s >>> sh;
    if (s > 32767) return 16'sd32767;
    if (s < -32768) return -16'sd32768;
    return 16'(s);
  endfunction

  function automatic logic [ROW_W-1:0] rnd_row();
    logic [ROW_W-1:0] r;
    for (int i = 0; i < SH; i++) r[i*16 +: 16] = 16'($signed(5'($urandom)));
    return r;
  endfunction

  task automatic check_results(input string tag);
    for (int v = 0; v < 8; v++)
      for (int j = 0; j < SW; j++) begin
        check(el(mem.mem[1050+v], j) == requant(dot(1004, 1000, v, j) + dot(1004, 1012, v, j), 1, 2),
              $sformatf("%s task 1 out[%0d][%0d]", tag, v, j));
        check(el(mem.mem[2100+v], j) == requant(NGEMM * dot(2004, 2000, v, j), 0, 0),
              $sformatf("%s task 2 out[%0d][%0d]", tag, v, j));
      end
    for (int i = 0; i < 8; i++) begin mem.mem[1050+i] = '0; mem.mem[2100+i] = '0; end
  endtask

  longint t_layer, t_rec, est1, est2;
  int gemms_before;

  initial begin
    ib_we = 0; ib_waddr = 0; ib_wdata = '0; mmu_we = 0; mmu_asid = 0; mmu_base = 0; mmu_limit = 0;
    mech_mode = MODE_CHECKPOINT; task_req_valid = 0; task_req = '0;
    pred_clear = 0; pred_layer_valid = 0; pred_m = 0; pred_k = 0; pred_n = 0; pred_recurrent = 0;
    pred_in_len = 0; lut_we = 0; lut_wlen = 0; lut_wval = 0;
    for (int i = 0; i < 20; i++) begin mem.mem[1000+i] = rnd_row(); mem.mem[2000+i] = rnd_row(); end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- programs ----
    put(0, mk(OP_LOAD_TILE, 0, BUF_WBUF, .da(1000), .ba(0), .cnt(4)));
    put(1, mk(OP_LOAD_TILE, 0, BUF_UBUF, .da(1004), .ba(0), .cnt(8)));
    put(2, mk(OP_GEMM, 1, .ba(0), .ba2(0), .aa(0), .cnt(8)));
    put(3, mk(OP_LOAD_TILE, 0, BUF_WBUF, .da(1012), .ba(4), .cnt(4)));
    put(4, mk(OP_GEMM, 1, .accum(1), .ba(0), .ba2(4), .aa(0), .cnt(8)));
    put(5, mk(OP_VECTOR, 1, .f(VF_RELU), .sh(2), .ba(16), .aa(0), .cnt(8)));
    put(6, mk(OP_STORE_TILE, 1, BUF_UBUF, .da(1050), .ba(16), .cnt(8)));
    put(7, mk(OP_HALT, 1));
    put(16, mk(OP_LOAD_TILE, 0, BUF_WBUF, .da(2000), .ba(8), .cnt(4)));
    put(17, mk(OP_LOAD_TILE, 0, BUF_UBUF, .da(2004), .ba(32), .cnt(8)));
    for (int g = 0; g < NGEMM; g++)
      put(18 + g, mk(OP_GEMM, 1, .accum(g != 0), .ba(32), .ba2(8), .aa(0), .cnt(8)));
    put(18 + NGEMM, mk(OP_VECTOR, 1, .ba(48), .aa(0), .cnt(8)));
    put(19 + NGEMM, mk(OP_STORE_TILE, 1, BUF_UBUF, .da(2100), .ba(48), .cnt(8)));
    put(20 + NGEMM, mk(OP_HALT, 1));
    put(48, mk(OP_STORE_TILE, 1, BUF_ACCQ, .da(2150), .ba(0), .cnt(16)));
    put(49, mk(OP_YIELD, 1));
    put(50, mk(OP_LOAD_TILE, 1, BUF_ACCQ, .da(2150), .ba(0), .cnt(16)));
    put(51, mk(OP_RESUME, 1));
    put(56, mk(OP_LOAD_TILE, 0, BUF_UBUF, .da(3005), .ba(0), .cnt(10)));
    put(57, mk(OP_HALT, 1));
    set_region(1, 1000, 200);
    set_region(2, 2000, 200);
    set_region(3, 3000, 10);

    // ---- predictions: one GEMM layer, and the same layer as an RNN step
    //      repeated by the length table (input length 5 -> 3 steps) ----
    @(negedge clk);
    lut_we = 1; lut_wlen = 5; lut_wval = 3;
    @(negedge clk);
    lut_we = 0;
    predict(8, 4, 4, 0, 0, t_layer);
    predict(8, 4, 4, 1, 5, t_rec);
    check(t_layer > 0, "predictor gives a time");
    check(t_rec == 3 * t_layer, $sformatf("recurrent layer repeated by table: %0d vs %0d", t_rec, t_layer));
    est1 = 2 * t_layer;
    est2 = NGEMM * t_layer;

    // ---- static CHECKPOINT ----
    mech_mode = MODE_CHECKPOINT;
    submit(2, PRIO_LOW, est2, 16, 48);
    repeat (120) @(negedge clk);
    submit(1, PRIO_HIGH, est1, 0, 0);
    wait_done(2);
    check(done_ids[0] == 1 && done_ids[1] == 2, "checkpoint: high task finished first");
    check(n_ckpt == 1, "checkpoint happened");
    check_results("ckpt");
    done_ids.delete();

    // ---- static KILL ----
    mech_mode = MODE_KILL;
    submit(2, PRIO_LOW, est2, 16, 48);
    repeat (120) @(negedge clk);
    submit(1, PRIO_HIGH, est1, 0, 0);
    wait_done(4);
    check(done_ids[0] == 1 && done_ids[1] == 2, "kill: high task finished first");
    check(n_kill == 1, "kill happened");
    check_results("kill");
    done_ids.delete();

    // ---- dynamic: the running task is cheap to finish, the newcomer long -> DRAIN ----
    mech_mode = MODE_DYNAMIC;
    submit(2, PRIO_LOW, 300, 16, 48);
    repeat (120) @(negedge clk);
    submit(1, PRIO_HIGH, 100000, 0, 0);
    wait_done(6);
    check(done_ids[0] == 2 && done_ids[1] == 1, "drain: running task finished first");
    check(n_drain >= 1, "drain happened");
    check_results("drain");
    done_ids.delete();

    // ---- MMU fault ----
    submit(3, PRIO_MED, 1000, 56, 0);
    wait_done(7);
    check(done_ids[0] == 3 && n_fault == 1, "faulting task ended with a fault");

    // ---- every mechanism happened ----
    check(n_sched > 0,  $sformatf("schedule decisions: %0d", n_sched));
    check(n_period > 0, $sformatf("period wake-ups: %0d", n_period));
    check(n_start >= 7, $sformatf("task starts: %0d", n_start));
    check(n_ckpt > 0,   $sformatf("checkpoints: %0d", n_ckpt));
    check(n_kill > 0,   $sformatf("kills: %0d", n_kill));
    check(n_drain > 0,  $sformatf("drains: %0d", n_drain));
    check(n_done == 7,  $sformatf("completions: %0d", n_done));
    check(n_fault > 0,  $sformatf("faults: %0d", n_fault));
    check(n_gemm > 0 && gemm_bad == 0, $sformatf("GEMMs: %0d, wrong length: %0d", n_gemm, gemm_bad));
    check(n_vec > 0,    $sformatf("vector ops: %0d", n_vec));
    check(mem.reads > 0 && mem.writes > 0, $sformatf("DMA rows read %0d written %0d", mem.reads, mem.writes));
    $display("sched=%0d period=%0d start=%0d ckpt=%0d kill=%0d drain=%0d done=%0d fault=%0d gemm=%0d vec=%0d rd=%0d wr=%0d",
             n_sched, n_period, n_start, n_ckpt, n_kill, n_drain, n_done, n_fault, n_gemm, n_vec, mem.reads, mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
