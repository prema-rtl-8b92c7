// tb_prema_npu_full: the whole NPU at its default size (128 x 128 array,
// 8 MB UBUF, 4 MB WBUF, 16 task contexts) through one complete task.
//
// The host writes a five-instruction program and the task's memory region,
// dispatches the task through the preemption module, and the NPU loads a
// 128 x 128 weight tile and 128 activation rows from a 100-cycle memory,
// runs one GEMM (checked to take 128 + 128 + 2*128 cycles), applies ReLU on
// the vector unit, and stores 128 result rows, which are all compared with
// a software model. The task must be reported done without a fault.
module tb_prema_npu_full;
  import npu_pkg::*;
  localparam int N = 128, ROW_W = N * 16, LAT = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ib_we, mmu_we, task_req_valid, task_req_ready, task_done, task_done_fault;
  logic [9:0] ib_waddr;
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

  prema_npu dut (.*);
  dram_model #(.ROW_W(ROW_W), .LAT(LAT)) mem (
    .clk, .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .resp_valid(mem_rd_resp_valid), .resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int gemm_len = 0, n_gemm = 0, n_done = 0;
  bit fault_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (gemm_busy) gemm_len++;
    else if (gemm_len != 0) begin
      n_gemm++;
      check(gemm_len == N + N + 2 * N, $sformatf("GEMM took %0d cycles", gemm_len));
      gemm_len = 0;
    end
    if (task_done) begin n_done++; fault_seen |= task_done_fault; end
  end

  function automatic instr_t mk(opcode_e op, bit bar, buf_sel_e b, vfunc_e f, int da, int ba,
                                int ba2, int cnt);
    instr_t i;
    i = '0;
    i.op = op; i.barrier = bar; i.bsel = b; i.vfunc = f; i.dram_addr = 32'(da);
    i.buf_addr = 16'(ba); i.buf_addr2 = 16'(ba2); i.count = 16'(cnt);
    return i;
  endfunction

  task automatic put(input int a, input instr_t i);
    @(negedge clk);
    ib_we = 1; ib_waddr = 10'(a); ib_wdata = i;
    @(negedge clk);
    ib_we = 0;
  endtask

  function automatic logic signed [15:0] el(logic [ROW_W-1:0] r, int i);
    return r[i*16 +: 16];
  endfunction

  int s;
  logic signed [15:0] e;

  initial begin
    ib_we = 0; ib_waddr = 0; ib_wdata = '0; mmu_we = 0; mmu_asid = 0; mmu_base = 0; mmu_limit = 0;
    mech_mode = MODE_DYNAMIC; task_req_valid = 0; task_req = '0;
    pred_clear = 0; pred_layer_valid = 0; pred_m = 0; pred_k = 0; pred_n = 0; pred_recurrent = 0;
    pred_in_len = 0; lut_we = 0; lut_wlen = 0; lut_wval = 0;
    // weights rows 0..127 (row j = column j), activations rows 128..255
    for (int r = 0; r < 2 * N; r++) begin
      logic [ROW_W-1:0] row;
      for (int i = 0; i < N; i++) row[i*16 +: 16] = 16'($signed(5'($urandom)));
      mem.mem[4096 + r] = row;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    put(0, mk(OP_LOAD_TILE, 0, BUF_WBUF, VF_PASS, 4096, 0, 0, N));
    put(1, mk(OP_LOAD_TILE, 0, BUF_UBUF, VF_PASS, 4096 + N, 0, 0, N));
    put(2, mk(OP_GEMM, 1, BUF_UBUF, VF_PASS, 0, 0, 0, N));
    put(3, mk(OP_VECTOR, 1, BUF_UBUF, VF_RELU, 0, 1000, 0, N));
    put(4, mk(OP_STORE_TILE, 1, BUF_UBUF, VF_PASS, 4096 + 512, 1000, 0, N));
    put(5, mk(OP_HALT, 1, BUF_UBUF, VF_PASS, 0, 0, 0, 0));
    @(negedge clk);
    mmu_we = 1; mmu_asid = 5; mmu_base = 4096; mmu_limit = 1024;
    @(negedge clk);
    mmu_we = 0;

    @(negedge clk);
    task_req_valid = 1;
    task_req = '{task_id: 4'd5, prio: PRIO_HIGH, estimated: 64'd1000, prog_pc: 12'd0, trap_pc: 12'd0};
    while (!task_req_ready) @(negedge clk);
    @(negedge clk);
    task_req_valid = 0;

    while (n_done == 0) @(negedge clk);
    check(!fault_seen, "task finished without a fault");
    check(n_gemm == 1, "one GEMM");
    for (int v = 0; v < N; v++)
      for (int j = 0; j < N; j++) begin
        s = 0;
        for (int i = 0; i < N; i++) s += int'(el(mem.mem[4096 + N + v], i)) * int'(el(mem.mem[4096 + j], i));
        e = (s < 0) ? 16'sd0 : (s > 32767 ? 16'sd32767 : 16'(s));
        if (el(mem.mem[4096 + 512 + v], j) != e) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d][%0d] got %0d exp %0d", v, j, el(mem.mem[4096 + 512 + v], j), e);
        end
        checks++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
