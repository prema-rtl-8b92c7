// npu_core: the systolic-array NPU datapath with its controller.
//
// Structure (TPU-like): the unified activation buffer (UBUF) feeds the
// systolic data setup, which skews each row into the SH x SW systolic array
// (GEMM unit); the weight buffer (WBUF) loads the array's weight registers.
// The array's bottom-row results are de-skewed into the accumulator queue
// (ACCQ); the vector unit turns ACCQ rows into 16-bit activations and writes
// them back to the UBUF. The DMA unit moves rows between off-chip memory and
// UBUF/WBUF under the MMU's per-task check, and the controller issues the
// instructions held in the instruction buffer.
//
// One buffer row is SH 16-bit values; the vector unit writes SW values into
// a UBUF row, so SH must equal SW (true of the 128 x 128 default). An ACCQ
// row (SW 32-bit sums) is two buffer rows wide, which is how the DMA moves it.
// Task control (start, checkpoint, kill) comes from the preemption module;
// see npu_controller for the timing of each instruction.
module npu_core
  import npu_pkg::*;
#(
  parameter int unsigned SH        = 128,
  parameter int unsigned SW        = 128,
  parameter int unsigned ACC       = 128,
  parameter int unsigned UB_ROWS   = 32768,   // 8 MB
  parameter int unsigned WB_ROWS   = 16384,   // 4 MB
  parameter int unsigned IB_DEPTH  = 1024,
  parameter int unsigned NUM_TASKS = 16,
  localparam int unsigned ROW_W    = SH * DATA_W,
  localparam int unsigned IB_AW    = $clog2(IB_DEPTH),
  localparam int unsigned UB_AW    = $clog2(UB_ROWS),
  localparam int unsigned WB_AW    = $clog2(WB_ROWS),
  localparam int unsigned ACC_AW   = (ACC > 1) ? $clog2(ACC) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host: instruction buffer and MMU programming
  input  logic               ib_we,
  input  logic [IB_AW-1:0]   ib_waddr,
  input  instr_t             ib_wdata,
  input  logic               mmu_we,
  input  logic [TID_W-1:0]   mmu_asid,
  input  logic [DADDR_W-1:0] mmu_base,
  input  logic [DADDR_W-1:0] mmu_limit,
  // task control
  input  logic               start,
  input  logic [PC_W-1:0]    start_pc,
  input  logic [PC_W-1:0]    start_resume_pc,
  input  logic [PC_W-1:0]    start_trap_pc,
  input  logic [TID_W-1:0]   start_tid,
  input  logic               ckpt_req,
  input  logic               kill_req,
  output logic               active,
  output logic               done,
  output logic               done_fault,
  output logic               yielded,
  output logic [PC_W-1:0]    yield_resume_pc,
  output logic [PC_W-1:0]    yield_restore_pc,
  output logic               killed,
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
  // ---------------- instruction buffer ----------------
  logic [IB_AW-1:0] ib_raddr;
  instr_t           ib_rdata;
  instruction_buffer #(.DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .rst_n, .wr_en(ib_we), .wr_addr(ib_waddr), .wr_data(ib_wdata),
    .rd_addr(ib_raddr), .rd_data(ib_rdata));

  // ---------------- controller ----------------
  logic               dma_start, dma_is_store, dma_abort, dma_busy, dma_fault;
  buf_sel_e           dma_bsel;
  logic [DADDR_W-1:0] dma_dram_addr;
  logic [BADDR_W-1:0] dma_buf_addr;
  logic [CNT_W-1:0]   dma_count;
  logic               ub_rd_en, ub_wr_en, wb_rd_en, w_shift;
  logic [UB_AW-1:0]   ub_rd_addr, ub_wr_addr;
  logic [WB_AW-1:0]   wb_rd_addr;
  logic               acc_wr_en, acc_wr_acc, acc_rd_en;
  logic [ACC_AW-1:0]  acc_wr_addr, acc_rd_addr;
  vfunc_e             vfunc;
  logic [4:0]         vshift;
  logic [TID_W-1:0]   cur_tid;

  npu_controller #(.SH(SH), .SW(SW), .ACC(ACC), .IB_AW(IB_AW), .UB_AW(UB_AW), .WB_AW(WB_AW)) u_ctrl (
    .clk, .rst_n,
    .start, .start_pc, .start_resume_pc, .start_trap_pc, .start_tid,
    .ckpt_req, .kill_req, .active, .cur_tid, .done, .done_fault,
    .yielded, .yield_resume_pc, .yield_restore_pc, .killed,
    .ib_addr(ib_raddr), .ib_data(ib_rdata),
    .dma_start, .dma_is_store, .dma_bsel, .dma_dram_addr, .dma_buf_addr, .dma_count,
    .dma_abort, .dma_busy, .dma_fault,
    .ub_rd_en, .ub_rd_addr, .ub_wr_en, .ub_wr_addr, .wb_rd_en, .wb_rd_addr, .w_shift,
    .acc_wr_en, .acc_wr_acc, .acc_wr_addr, .acc_rd_en, .acc_rd_addr, .vfunc, .vshift,
    .gemm_busy);

  // ---------------- buffers ----------------
  logic [ROW_W-1:0] ub_rd_data, ub_wr_data, wb_rd_data;
  logic             dub_rd_en, dub_wr_en, dwb_wr_en;
  logic [UB_AW-1:0] dub_rd_addr, dub_wr_addr;
  logic [WB_AW-1:0] dwb_wr_addr;
  logic [ROW_W-1:0] dub_rd_data, dub_wr_data, dwb_wr_data;

  unified_buffer #(.ROWS(UB_ROWS), .ROW_W(ROW_W)) u_ubuf (
    .clk,
    .rd_en(ub_rd_en), .rd_addr(ub_rd_addr), .rd_data(ub_rd_data),
    .wr_en(ub_wr_en), .wr_addr(ub_wr_addr), .wr_data(ub_wr_data),
    .dma_rd_en(dub_rd_en), .dma_rd_addr(dub_rd_addr), .dma_rd_data(dub_rd_data),
    .dma_wr_en(dub_wr_en), .dma_wr_addr(dub_wr_addr), .dma_wr_data(dub_wr_data));

  weight_buffer #(.ROWS(WB_ROWS), .ROW_W(ROW_W)) u_wbuf (
    .clk, .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data),
    .wr_en(dwb_wr_en), .wr_addr(dwb_wr_addr), .wr_data(dwb_wr_data));

  // ---------------- systolic data setup, GEMM unit, de-skew ----------------
  logic [DATA_W-1:0]        act_row [SH];
  logic [DATA_W-1:0]        act_skew[SH];
  logic signed [DATA_W-1:0] x_in    [SH];
  logic signed [DATA_W-1:0] w_col   [SH];
  logic signed [PSUM_W-1:0] psum    [SW];
  logic [PSUM_W-1:0]        psum_u  [SW];
  logic [PSUM_W-1:0]        psum_al [SW];
  logic signed [PSUM_W-1:0] acc_in  [SW];

  for (genvar i = 0; i < SH; i++) begin : g_unpack
    assign act_row[i] = ub_rd_data[i*DATA_W +: DATA_W];
    assign x_in[i]    = act_skew[i];
    assign w_col[i]   = wb_rd_data[i*DATA_W +: DATA_W];
  end

  systolic_data_setup #(.LANES(SH), .WIDTH(DATA_W), .REVERSE(1'b0)) u_setup (
    .clk, .d_in(act_row), .d_out(act_skew));

  systolic_array #(.SH(SH), .SW(SW), .DATA_W(DATA_W), .PSUM_W(PSUM_W)) u_array (
    .clk, .w_shift, .w_col, .x_in, .psum_out(psum));

  for (genvar j = 0; j < SW; j++) begin : g_psum
    assign psum_u[j] = psum[j];
    assign acc_in[j] = psum_al[j];
  end

  systolic_data_setup #(.LANES(SW), .WIDTH(PSUM_W), .REVERSE(1'b1)) u_deskew (
    .clk, .d_in(psum_u), .d_out(psum_al));

  // ---------------- accumulator queue and vector unit ----------------
  logic signed [PSUM_W-1:0] acc_rd_data[SW];
  logic signed [DATA_W-1:0] vsrc[SW];
  logic signed [DATA_W-1:0] vout[SW];

  logic              daq_rd_en, daq_wr_en;
  logic [ACC_AW:0]   daq_rd_addr, daq_wr_addr;
  logic [ROW_W-1:0]  daq_rd_data, daq_wr_data;

  accumulator_queue #(.SW(SW), .ACC(ACC), .PSUM_W(PSUM_W)) u_accq (
    .clk, .wr_en(acc_wr_en), .wr_acc(acc_wr_acc), .wr_addr(acc_wr_addr), .wr_data(acc_in),
    .rd_en(acc_rd_en), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data),
    .dma_wr_en(daq_wr_en), .dma_wr_addr(daq_wr_addr), .dma_wr_data(daq_wr_data),
    .dma_rd_en(daq_rd_en), .dma_rd_addr(daq_rd_addr), .dma_rd_data(daq_rd_data));

  for (genvar j = 0; j < SW; j++) begin : g_vec
    assign vsrc[j] = ub_rd_data[j*DATA_W +: DATA_W];
    assign ub_wr_data[j*DATA_W +: DATA_W] = vout[j];
  end

  vector_unit #(.SW(SW)) u_vec (
    .func(vfunc), .shift(vshift), .acc_row(acc_rd_data), .src_row(vsrc), .out_row(vout));

  // ---------------- DMA and MMU ----------------
  logic [DADDR_W-1:0] chk_addr;
  logic               chk_ok;

  dma_unit #(.ROW_W(ROW_W), .UB_AW(UB_AW), .WB_AW(WB_AW), .AQ_AW(ACC_AW + 1)) u_dma (
    .clk, .rst_n,
    .start(dma_start), .is_store(dma_is_store), .bsel(dma_bsel), .dram_addr(dma_dram_addr),
    .buf_addr(dma_buf_addr), .count(dma_count), .abort(dma_abort), .busy(dma_busy),
    .fault(dma_fault), .chk_addr, .chk_ok,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .ub_rd_en(dub_rd_en), .ub_rd_addr(dub_rd_addr), .ub_rd_data(dub_rd_data),
    .ub_wr_en(dub_wr_en), .ub_wr_addr(dub_wr_addr), .ub_wr_data(dub_wr_data),
    .wb_wr_en(dwb_wr_en), .wb_wr_addr(dwb_wr_addr), .wb_wr_data(dwb_wr_data),
    .aq_rd_en(daq_rd_en), .aq_rd_addr(daq_rd_addr), .aq_rd_data(daq_rd_data),
    .aq_wr_en(daq_wr_en), .aq_wr_addr(daq_wr_addr), .aq_wr_data(daq_wr_data));

  mmu #(.NUM_TASKS(NUM_TASKS)) u_mmu (
    .clk, .rst_n, .cfg_we(mmu_we), .cfg_asid(mmu_asid), .cfg_base(mmu_base),
    .cfg_limit(mmu_limit), .asid(cur_tid), .addr(chk_addr), .ok(chk_ok));

  initial begin
    assert (SH == SW) else $error("npu_core: SH must equal SW (UBUF row = vector-unit row)");
  end
endmodule
