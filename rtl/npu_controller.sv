// npu_controller: instruction issue, compute sequencing and the preemption
// mechanisms of the NPU core.
//
// Issue. The controller fetches the instruction at its PC from the
// instruction buffer and issues it in order. DMA instructions (LOAD_TILE,
// STORE_TILE) go to the DMA unit, compute instructions (GEMM_OP, CONV_OP,
// VECTOR_OP) to the compute sequencer below; each waits only for its own
// unit, so a load of the next tile overlaps the current GEMM (double
// buffering). An instruction with its barrier bit set waits until both units
// are idle; the compiler sets it where a true dependency exists.
//
// GEMM_OP / CONV_OP (CONV is lowered to a GEMM by the compiler and executes
// identically) take count + SH + 2*SW cycles, counted by `cyc`:
//   cyc 0 .. SW-1      read WBUF rows wbase+SW-1 .. wbase (one array column each)
//   cyc 1 .. SW        shift those columns into the array
//   cyc SW-1 ..        read `count` UBUF activation rows, one per cycle
//   cyc 2SW+SH ..      write (or accumulate) the `count` result rows into ACCQ
// The first UBUF read overlaps the last WBUF read, so the total equals
// ACC + SH + 2*SW for a full tile: the compute time C1 of the design's
// latency model. The streaming part alone (SW + SH + count) is the figure
// the design quotes for a GEMM once the weights are latched.
// VECTOR_OP reads ACCQ row acc_addr+i and UBUF row buf_addr2+i in cycle i and
// writes UBUF row buf_addr+i in cycle i+1 (count + 1 cycles).
//
// Preemption.
//   CHECKPOINT (ckpt_req): no further instruction issues; once the GEMM or
//     DMA in flight has completed (the preemption point is an instruction
//     boundary, after the GEMM commits to ACCQ), the PC is saved and the
//     controller jumps to the task's trap routine, which saves the ACCQ
//     (STORE_TILE with bsel = ACCQ) and any live UBUF rows to the task's
//     memory and ends with YIELD. `yielded` then reports the saved PC and the restore entry
//     (the instruction after YIELD). A later start at the restore entry
//     reloads the context and RESUME jumps back to the saved PC.
//   KILL (kill_req): the compute sequencer stops at once, the DMA aborts,
//     and `killed` is pulsed when the DMA has drained; the work is lost.
//   DRAIN needs no hardware action: the scheduler simply does not interrupt.
// The three mechanisms and the trap-routine approach follow the design
// description; opcodes YIELD/RESUME and the handshake are this design's own.
// An MMU fault from the DMA ends the task like KILL and reports done with
// done_fault set.
//
// Lint note: the assertions below are disabled during reset with
// `disable iff (!rst_n)`, which makes lint report rst_n as used both
// synchronously and asynchronously (SYNCASYNCNET). The assertion is not
// logic; every flop in this module resets asynchronously only.
module npu_controller
  import npu_pkg::*;
#(
  parameter int unsigned SH      = 128,
  parameter int unsigned SW      = 128,
  parameter int unsigned ACC     = 128,
  parameter int unsigned IB_AW   = 10,
  parameter int unsigned UB_AW   = 15,
  parameter int unsigned WB_AW   = 14,
  localparam int unsigned ACC_AW = (ACC > 1) ? $clog2(ACC) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // task control (from the preemption module)
  input  logic                start,
  input  logic [PC_W-1:0]     start_pc,
  input  logic [PC_W-1:0]     start_resume_pc,
  input  logic [PC_W-1:0]     start_trap_pc,
  input  logic [TID_W-1:0]    start_tid,
  input  logic                ckpt_req,
  input  logic                kill_req,
  output logic                active,
  output logic [TID_W-1:0]    cur_tid,
  output logic                done,
  output logic                done_fault,
  output logic                yielded,
  output logic [PC_W-1:0]     yield_resume_pc,
  output logic [PC_W-1:0]     yield_restore_pc,
  output logic                killed,
  // instruction buffer
  output logic [IB_AW-1:0]    ib_addr,
  input  instr_t              ib_data,
  // DMA
  output logic                dma_start,
  output logic                dma_is_store,
  output buf_sel_e            dma_bsel,
  output logic [DADDR_W-1:0]  dma_dram_addr,
  output logic [BADDR_W-1:0]  dma_buf_addr,
  output logic [CNT_W-1:0]    dma_count,
  output logic                dma_abort,
  input  logic                dma_busy,
  input  logic                dma_fault,
  // compute datapath control
  output logic                ub_rd_en,
  output logic [UB_AW-1:0]    ub_rd_addr,
  output logic                ub_wr_en,
  output logic [UB_AW-1:0]    ub_wr_addr,
  output logic                wb_rd_en,
  output logic [WB_AW-1:0]    wb_rd_addr,
  output logic                w_shift,
  output logic                acc_wr_en,
  output logic                acc_wr_acc,
  output logic [ACC_AW-1:0]   acc_wr_addr,
  output logic                acc_rd_en,
  output logic [ACC_AW-1:0]   acc_rd_addr,
  output vfunc_e              vfunc,
  output logic [4:0]          vshift,
  output logic                gemm_busy
);
  typedef enum logic [2:0] {M_RUN, M_CKPT_WAIT, M_TRAP, M_KILL_WAIT} mode_e;
  typedef enum logic [1:0] {C_NONE, C_GEMM, C_VECTOR} cop_e;

  localparam int unsigned WR_START = 2 * SW + SH;

  mode_e            mode;
  logic [PC_W-1:0]  pc, saved_pc, resume_pc_q, trap_pc_q;
  logic             fault_q;

  // compute sequencer state
  cop_e             cop;
  logic [CNT_W+1:0] cyc, last_cyc;
  instr_t           cins;

  // DMA command is registered: dma_start_q covers the cycle before busy rises.
  logic             dma_start_q;
  logic [TID_W-1:0] cur_tid_q;

  instr_t ins;
  assign ins     = ib_data;
  assign ib_addr = IB_AW'(pc);

  logic comp_busy, all_idle, may_issue, stall, issue;
  logic is_dma, is_comp;
  assign comp_busy = (cop != C_NONE);
  assign all_idle  = !comp_busy && !dma_busy && !dma_start_q;
  assign may_issue = active && (mode == M_RUN || mode == M_TRAP) &&
                     !(ckpt_req && mode == M_RUN) && !kill_req && !dma_fault;
  assign is_dma    = (ins.op == OP_LOAD_TILE) || (ins.op == OP_STORE_TILE);
  assign is_comp   = (ins.op == OP_GEMM) || (ins.op == OP_CONV) || (ins.op == OP_VECTOR);

  always_comb begin
    stall = 1'b0;
    if (ins.barrier && !all_idle) stall = 1'b1;
    else if (is_dma  && (dma_busy || dma_start_q)) stall = 1'b1;
    else if (is_comp && comp_busy) stall = 1'b1;
    else if ((ins.op == OP_HALT || ins.op == OP_YIELD) && (!all_idle || dma_start_q)) stall = 1'b1;
  end
  assign issue = may_issue && !stall;

  assign dma_start = dma_start_q;
  assign cur_tid   = cur_tid_q;
  assign dma_abort = (mode == M_KILL_WAIT);
  assign gemm_busy = (cop == C_GEMM);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active           <= 1'b0;
      mode             <= M_RUN;
      pc               <= '0;
      saved_pc         <= '0;
      resume_pc_q      <= '0;
      trap_pc_q        <= '0;
      cur_tid_q        <= '0;
      fault_q          <= 1'b0;
      done             <= 1'b0;
      done_fault       <= 1'b0;
      yielded          <= 1'b0;
      killed           <= 1'b0;
      yield_resume_pc  <= '0;
      yield_restore_pc <= '0;
      dma_start_q      <= 1'b0;
      dma_is_store     <= 1'b0;
      dma_bsel         <= BUF_UBUF;
      dma_dram_addr    <= '0;
      dma_buf_addr     <= '0;
      dma_count        <= '0;
      cop              <= C_NONE;
      cyc              <= '0;
      last_cyc         <= '0;
      cins             <= '0;
    end else begin
      done        <= 1'b0;
      done_fault  <= 1'b0;
      yielded     <= 1'b0;
      killed      <= 1'b0;
      dma_start_q <= 1'b0;

      // ---------------- compute sequencer ----------------
      if (cop != C_NONE) begin
        if (cyc == last_cyc) cop <= C_NONE;
        cyc <= cyc + 1'b1;
      end

      // ---------------- task control ----------------
      if (!active) begin
        if (start) begin
          active      <= 1'b1;
          mode        <= M_RUN;
          pc          <= start_pc;
          resume_pc_q <= start_resume_pc;
          trap_pc_q   <= start_trap_pc;
          cur_tid_q   <= start_tid;
          fault_q     <= 1'b0;
        end
      end else if (kill_req || dma_fault) begin
        if (mode != M_KILL_WAIT) begin
          mode    <= M_KILL_WAIT;
          fault_q <= dma_fault && !kill_req;
          cop     <= C_NONE;
        end
      end else begin
        unique case (mode)
          M_RUN, M_TRAP: begin
            if (mode == M_RUN && ckpt_req) begin
              mode <= M_CKPT_WAIT;
            end else if (issue) begin
              unique case (ins.op)
                OP_LOAD_TILE, OP_STORE_TILE: begin
                  dma_start_q   <= 1'b1;
                  dma_is_store  <= (ins.op == OP_STORE_TILE);
                  dma_bsel      <= ins.bsel;
                  dma_dram_addr <= ins.dram_addr;
                  dma_buf_addr  <= ins.buf_addr;
                  dma_count     <= ins.count;
                  pc            <= pc + 1'b1;
                end
                OP_GEMM, OP_CONV: begin
                  cop      <= C_GEMM;
                  cins     <= ins;
                  cyc      <= '0;
                  last_cyc <= (CNT_W+2)'(ins.count) + (CNT_W+2)'(SH + 2 * SW) - 1'b1;
                  pc       <= pc + 1'b1;
                end
                OP_VECTOR: begin
                  cop      <= C_VECTOR;
                  cins     <= ins;
                  cyc      <= '0;
                  last_cyc <= (CNT_W+2)'(ins.count);
                  pc       <= pc + 1'b1;
                end
                OP_HALT: begin
                  if (mode == M_RUN) begin
                    done   <= 1'b1;
                    active <= 1'b0;
                  end else begin
                    pc <= pc + 1'b1;    // HALT is not meaningful in a trap routine
                  end
                end
                OP_YIELD: begin
                  if (mode == M_TRAP) begin
                    yielded          <= 1'b1;
                    yield_resume_pc  <= saved_pc;
                    yield_restore_pc <= pc + 1'b1;
                    active           <= 1'b0;
                  end else begin
                    pc <= pc + 1'b1;
                  end
                end
                OP_RESUME: pc <= resume_pc_q;
                default:   pc <= pc + 1'b1;  // NOP
              endcase
            end
          end
          M_CKPT_WAIT: begin
            if (all_idle && !dma_start_q) begin
              saved_pc <= pc;
              pc       <= trap_pc_q;
              mode     <= M_TRAP;
            end
          end
          M_KILL_WAIT: begin
            if (!dma_busy && !dma_start_q) begin
              active <= 1'b0;
              mode   <= M_RUN;
              if (fault_q) begin
                done       <= 1'b1;
                done_fault <= 1'b1;
              end else begin
                killed <= 1'b1;
              end
            end
          end
          default: mode <= M_RUN;
        endcase
      end
    end
  end

  // ---------------- compute datapath control (combinational) ----------------
  always_comb begin
    ub_rd_en    = 1'b0;
    ub_rd_addr  = '0;
    ub_wr_en    = 1'b0;
    ub_wr_addr  = '0;
    wb_rd_en    = 1'b0;
    wb_rd_addr  = '0;
    w_shift     = 1'b0;
    acc_wr_en   = 1'b0;
    acc_wr_acc  = cins.accumulate;
    acc_wr_addr = '0;
    acc_rd_en   = 1'b0;
    acc_rd_addr = '0;
    vfunc       = cins.vfunc;
    vshift      = cins.shift;
    if (cop == C_GEMM) begin
      if (cyc < (CNT_W+2)'(SW)) begin
        wb_rd_en   = 1'b1;
        wb_rd_addr = WB_AW'(cins.buf_addr2) + WB_AW'(SW - 1) - WB_AW'(cyc);
      end
      w_shift = (cyc >= 1) && (cyc <= (CNT_W+2)'(SW));
      if (cyc >= (CNT_W+2)'(SW - 1) && cyc < (CNT_W+2)'(SW - 1) + (CNT_W+2)'(cins.count)) begin
        ub_rd_en   = 1'b1;
        ub_rd_addr = UB_AW'(cins.buf_addr) + UB_AW'(cyc - (CNT_W+2)'(SW - 1));
      end
      if (cyc >= (CNT_W+2)'(WR_START) && cyc < (CNT_W+2)'(WR_START) + (CNT_W+2)'(cins.count)) begin
        acc_wr_en   = 1'b1;
        acc_wr_addr = ACC_AW'(cins.acc_addr) + ACC_AW'(cyc - (CNT_W+2)'(WR_START));
      end
    end else if (cop == C_VECTOR) begin
      if (cyc < (CNT_W+2)'(cins.count)) begin
        acc_rd_en   = 1'b1;
        acc_rd_addr = ACC_AW'(cins.acc_addr) + ACC_AW'(cyc);
        ub_rd_en    = 1'b1;
        ub_rd_addr  = UB_AW'(cins.buf_addr2) + UB_AW'(cyc);
      end
      if (cyc >= 1) begin
        ub_wr_en   = 1'b1;
        ub_wr_addr = UB_AW'(cins.buf_addr) + UB_AW'(cyc - 1'b1);
      end
    end
  end

  // The sequencer never runs while the controller is idle.
  a_idle_no_compute: assert property (@(posedge clk) disable iff (!rst_n)
    (!active && !$past(active)) |-> (cop == C_NONE));
endmodule
