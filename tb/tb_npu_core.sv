// tb_npu_core: the NPU core (controller, buffers, systolic array, ACCQ,
// vector unit, DMA, MMU) running small programs from a 100-cycle memory.
//
// Array 4 x 4, ACCQ 8 rows. The checks, each against a software model:
//  - a two-layer-tile program (load weights and activations, GEMM, a second
//    weight tile loaded while the first GEMM runs, accumulating GEMM,
//    ReLU + shift on the vector unit, store) gives the right rows in memory;
//    every GEMM is busy for exactly count + SH + 2*SW cycles, and the
//    weight load overlaps a GEMM (double buffering);
//  - CHECKPOINT in the middle of a GEMM: the GEMM completes, the trap routine
//    saves ACCQ and yields with the right PCs; another task then runs and
//    overwrites ACCQ; restarting at the restore entry reloads ACCQ, RESUME
//    continues, and the final result equals an uninterrupted run;
//  - KILL during a load: killed is reported once the DMA has drained and
//    no further memory write happens;
//  - an access outside the task's MMU region ends it with done_fault.
module tb_npu_core;
  import npu_pkg::*;
  localparam int SH = 4, SW = 4, ACC = 8, ROW_W = SH * 16, LAT = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ib_we, mmu_we, start, ckpt_req, kill_req;
  logic [5:0] ib_waddr;
  instr_t ib_wdata;
  logic [3:0] mmu_asid, start_tid;
  logic [31:0] mmu_base, mmu_limit;
  logic [11:0] start_pc, start_resume_pc, start_trap_pc, yield_resume_pc, yield_restore_pc;
  logic active, done, done_fault, yielded, killed, gemm_busy;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid, mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [ROW_W-1:0] mem_rd_resp_data, mem_wr_data;

  npu_core #(.SH(SH), .SW(SW), .ACC(ACC), .UB_ROWS(64), .WB_ROWS(64), .IB_DEPTH(64)) dut (.*);
  dram_model #(.ROW_W(ROW_W), .LAT(LAT)) mem (
    .clk, .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .resp_valid(mem_rd_resp_valid), .resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- monitors ----------------
  int gemm_len = 0, gemm_count = 0, gemm_bad = 0, overlap = 0, n_done = 0, n_yield = 0, n_kill = 0;
  int last_gemm_end = 0, cycle = 0;
  always @(posedge clk) begin
    cycle++;
    if (gemm_busy) gemm_len++;
    else if (gemm_len != 0) begin
      gemm_count++;
      last_gemm_end = cycle;
      if (gemm_len != ACC + SH + 2 * SW) begin
        gemm_bad++;
        $display("GEMM took %0d cycles", gemm_len);
      end
      gemm_len = 0;
    end
    if (gemm_busy && mem_rd_valid) overlap++;
    if (rst_n && done) n_done++;
    if (rst_n && yielded) n_yield++;
    if (rst_n && killed) n_kill++;
  end

  // ---------------- program building ----------------
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

  task automatic launch(input int tid, input int pc, input int rpc, input int tpc);
    @(negedge clk);
    start = 1; start_tid = 4'(tid); start_pc = 12'(pc); start_resume_pc = 12'(rpc); start_trap_pc = 12'(tpc);
    @(negedge clk);
    start = 0;
  endtask

  task automatic wait_end();
    while (active) @(negedge clk);
    @(negedge clk);
  endtask

  // ---------------- software model ----------------
  function automatic logic signed [15:0] el(logic [ROW_W-1:0] r, int i);
    return r[i*16 +: 16];
  endfunction

  // result of x . w for activation row v and output column j
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

  int t0, cyc, wr_before;
  logic [31:0] acc_saved;

  initial begin
    ib_we = 0; ib_waddr = 0; ib_wdata = '0; mmu_we = 0; mmu_asid = 0; mmu_base = 0; mmu_limit = 0;
    start = 0; start_tid = 0; start_pc = 0; start_resume_pc = 0; start_trap_pc = 0;
    ckpt_req = 0; kill_req = 0;
    for (int i = 0; i < 20; i++) begin mem.mem[1000+i] = rnd_row(); mem.mem[2000+i] = rnd_row(); end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Task 1 (ASID 1, rows 1000..1199): O = relu(X (W1 + W2)) >> 2
    put(0, mk(OP_LOAD_TILE, 0, BUF_WBUF, .da(1000), .ba(0), .cnt(4)));
    put(1, mk(OP_LOAD_TILE, 0, BUF_UBUF, .da(1004), .ba(0), .cnt(8)));
    put(2, mk(OP_GEMM, 1, .ba(0), .ba2(0), .aa(0), .cnt(8)));
    put(3, mk(OP_LOAD_TILE, 0, BUF_WBUF, .da(1012), .ba(4), .cnt(4)));
    put(4, mk(OP_GEMM, 1, .accum(1), .ba(0), .ba2(4), .aa(0), .cnt(8)));
    put(5, mk(OP_VECTOR, 1, .f(VF_RELU), .sh(2), .ba(16), .ba2(0), .aa(0), .cnt(8)));
    put(6, mk(OP_STORE_TILE, 1, BUF_UBUF, .da(1050), .ba(16), .cnt(8)));
    put(7, mk(OP_HALT, 1));
    // Task 2 (ASID 2, rows 2000..2199): O = 3 * X W, three accumulating GEMMs
    put(16, mk(OP_LOAD_TILE, 0, BUF_WBUF, .da(2000), .ba(8), .cnt(4)));
    put(17, mk(OP_LOAD_TILE, 0, BUF_UBUF, .da(2004), .ba(32), .cnt(8)));
    put(18, mk(OP_GEMM, 1, .ba(32), .ba2(8), .aa(0), .cnt(8)));
    put(19, mk(OP_GEMM, 1, .accum(1), .ba(32), .ba2(8), .aa(0), .cnt(8)));
    put(20, mk(OP_GEMM, 1, .accum(1), .ba(32), .ba2(8), .aa(0), .cnt(8)));
    put(21, mk(OP_VECTOR, 1, .ba(48), .aa(0), .cnt(8)));
    put(22, mk(OP_STORE_TILE, 1, BUF_UBUF, .da(2100), .ba(48), .cnt(8)));
    put(23, mk(OP_HALT, 1));
    // Task 2 trap routine: save ACCQ (16 half rows), yield; restore, resume.
    put(32, mk(OP_STORE_TILE, 1, BUF_ACCQ, .da(2150), .ba(0), .cnt(16)));
    put(33, mk(OP_YIELD, 1));
    put(34, mk(OP_LOAD_TILE, 1, BUF_ACCQ, .da(2150), .ba(0), .cnt(16)));
    put(35, mk(OP_RESUME, 1));
    // Task 3 (ASID 3, rows 3000..3009) reads past its region.
    put(40, mk(OP_LOAD_TILE, 0, BUF_UBUF, .da(3005), .ba(0), .cnt(10)));
    put(41, mk(OP_HALT, 1));
    set_region(1, 1000, 200);
    set_region(2, 2000, 200);
    set_region(3, 3000, 10);

    // ---- plain run of task 1 ----
    t0 = cycle;
    launch(1, 0, 0, 0);
    wait_end();
    check(n_done == 1, $sformatf("task 1 done n_done=%0d", n_done));
    check(gemm_count == 2 && gemm_bad == 0, $sformatf("two GEMMs of %0d cycles", ACC + SH + 2 * SW));
    check(overlap > 0, "weight load overlapped a GEMM");
    for (int v = 0; v < 8; v++)
      for (int j = 0; j < SW; j++)
        check(el(mem.mem[1050+v], j) == requant(dot(1004, 1000, v, j) + dot(1004, 1012, v, j), 1, 2),
              $sformatf("task 1 out[%0d][%0d]", v, j));
    $display("task 1: %0d cycles", cycle - t0);

    // ---- task 2 checkpointed during its second GEMM ----
    gemm_count = 0;
    launch(2, 16, 0, 32);
    while (gemm_count < 1 || !gemm_busy) @(negedge clk);
    repeat (5) @(negedge clk);
    ckpt_req = 1;
    @(negedge clk);
    ckpt_req = 0;
    wait_end();
    check(n_yield == 1, "task 2 yielded");
    check(gemm_count == 2 && gemm_bad == 0, "GEMM in flight completed before the trap");
    check(yield_resume_pc == 20, $sformatf("resume pc %0d", yield_resume_pc));
    check(yield_restore_pc == 34, $sformatf("restore pc %0d", yield_restore_pc));
    for (int v = 0; v < 8; v++)
      for (int j = 0; j < SW; j++) begin
        acc_saved = mem.mem[2150 + 2*v + j/2][(j%2)*32 +: 32];
        check($signed(acc_saved) == 2 * dot(2004, 2000, v, j), $sformatf("saved ACCQ[%0d][%0d]", v, j));
      end

    // ---- task 1 runs in between (overwrites ACCQ row 0..7) ----
    for (int i = 1050; i < 1058; i++) mem.mem[i] = '0;
    launch(1, 0, 0, 0);
    wait_end();
    check(n_done == 2, "task 1 second run done");
    check(el(mem.mem[1050], 0) == requant(dot(1004, 1000, 0, 0) + dot(1004, 1012, 0, 0), 1, 2), "task 1 rerun");

    // ---- task 2 restored and resumed ----
    gemm_count = 0;
    launch(2, 34, 20, 32);
    wait_end();
    check(n_done == 3 && !done_fault, "task 2 done after resume");
    check(gemm_count == 1, "only the remaining GEMM ran after resume");
    for (int v = 0; v < 8; v++)
      for (int j = 0; j < SW; j++)
        check(el(mem.mem[2100+v], j) == requant(3 * dot(2004, 2000, v, j), 0, 0),
              $sformatf("task 2 out[%0d][%0d]", v, j));

    // ---- KILL during the first load of task 2 ----
    launch(2, 16, 0, 32);
    repeat (30) @(negedge clk);
    kill_req = 1;
    @(negedge clk);
    kill_req = 0;
    cyc = 0;
    while (active) begin @(negedge clk); cyc++; end
    @(negedge clk);
    check(n_kill == 1, "task killed");
    check(cyc <= LAT + 4, $sformatf("kill took %0d cycles", cyc));
    check(n_done == 3, "killed task not reported done");
    wr_before = mem.writes;
    repeat (200) @(negedge clk);
    check(mem.writes == wr_before && !gemm_busy, "nothing runs after kill");

    // ---- MMU fault ----
    launch(3, 40, 0, 0);
    t0 = n_done;
    while (active) begin
      @(negedge clk);
      if (done) check(done_fault, "done_fault with done");
    end
    @(negedge clk);
    check(n_done == t0 + 1, "faulting task ended");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
