// dma_unit: moves rows between off-chip memory and the on-chip buffers.
//
// LOAD_TILE: issues `count` row reads starting at dram_addr and writes the
// returning rows, in order, to UBUF or WBUF from buf_addr upwards.
// With bsel = ACCQ a transfer moves accumulator-queue half rows instead
// (two DMA rows per ACCQ row), so a checkpoint can save and restore the
// 32-bit partial sums without rounding.
// STORE_TILE: reads `count` UBUF (or ACCQ) rows from buf_addr and writes them to
// off-chip memory from dram_addr upwards. The checkpoint trap routine uses
// STORE_TILE (and the restore routine LOAD_TILE) to save and restore a
// preempted task's activations, as the design description prescribes.
//
// Every address is first checked by the MMU (chk_addr -> chk_ok) against the
// running task's region; a denied access raises `fault` for one cycle and
// ends the transfer. `abort` (KILL) stops issuing at once. In both cases the
// unit stays busy, discarding data, until every outstanding read response has
// returned, so no stale row is written later.
//
// Memory interface (this design's choice): valid/ready read requests, read
// responses returned in order one cycle or more later with no back-pressure,
// valid/ready writes. Throughput is one row (SH x 16 bits) per cycle in each
// direction. Outstanding reads are bounded by MAX_OUTSTANDING.
//
// Lint note: the assertions below are disabled during reset with
// `disable iff (!rst_n)`, which makes lint report rst_n as used both
// synchronously and asynchronously (SYNCASYNCNET). The assertion is not
// logic; every flop in this module resets asynchronously only.
module dma_unit
  import npu_pkg::*;
#(
  parameter int unsigned ROW_W           = 2048,
  parameter int unsigned UB_AW           = 15,
  parameter int unsigned WB_AW           = 14,
  parameter int unsigned AQ_AW           = 8,
  parameter int unsigned MAX_OUTSTANDING = 255
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               start,
  input  logic               is_store,
  input  buf_sel_e           bsel,
  input  logic [DADDR_W-1:0] dram_addr,
  input  logic [BADDR_W-1:0] buf_addr,
  input  logic [CNT_W-1:0]   count,
  input  logic               abort,
  output logic               busy,
  output logic               fault,
  // MMU
  output logic [DADDR_W-1:0] chk_addr,
  input  logic               chk_ok,
  // off-chip memory
  output logic               mem_rd_valid,
  input  logic               mem_rd_ready,
  output logic [DADDR_W-1:0] mem_rd_addr,
  input  logic               mem_rd_resp_valid,
  input  logic [ROW_W-1:0]   mem_rd_resp_data,
  output logic               mem_wr_valid,
  input  logic               mem_wr_ready,
  output logic [DADDR_W-1:0] mem_wr_addr,
  output logic [ROW_W-1:0]   mem_wr_data,
  // buffers
  output logic               ub_rd_en,
  output logic [UB_AW-1:0]   ub_rd_addr,
  input  logic [ROW_W-1:0]   ub_rd_data,
  output logic               ub_wr_en,
  output logic [UB_AW-1:0]   ub_wr_addr,
  output logic [ROW_W-1:0]   ub_wr_data,
  output logic               wb_wr_en,
  output logic [WB_AW-1:0]   wb_wr_addr,
  output logic [ROW_W-1:0]   wb_wr_data,
  output logic               aq_rd_en,
  output logic [AQ_AW-1:0]   aq_rd_addr,
  input  logic [ROW_W-1:0]   aq_rd_data,
  output logic               aq_wr_en,
  output logic [AQ_AW-1:0]   aq_wr_addr,
  output logic [ROW_W-1:0]   aq_wr_data
);
  typedef enum logic [1:0] {D_IDLE, D_LOAD, D_STORE, D_DRAIN} dstate_e;

  dstate_e            st;
  buf_sel_e           bsel_q;
  logic [DADDR_W-1:0] daddr_q;
  logic [BADDR_W-1:0] baddr_q;
  logic [CNT_W-1:0]   cnt_q;
  logic [CNT_W-1:0]   req_cnt;    // reads issued / UBUF rows read (store)
  logic [CNT_W-1:0]   resp_cnt;   // rows written to buffer / memory
  logic [8:0]         outstanding;
  logic               wr_pend;    // a store row is presented on mem_wr_*

  logic rd_fire, wr_fire, resp;
  assign rd_fire = mem_rd_valid && mem_rd_ready;
  assign wr_fire = mem_wr_valid && mem_wr_ready;
  assign resp    = mem_rd_resp_valid;

  // Address to check: next read request, or the store row being presented.
  always_comb begin
    if (st == D_STORE) chk_addr = daddr_q + DADDR_W'(resp_cnt);
    else               chk_addr = daddr_q + DADDR_W'(req_cnt);
  end

  assign mem_rd_valid = (st == D_LOAD) && (req_cnt < cnt_q) && chk_ok &&
                        (outstanding < 9'(MAX_OUTSTANDING)) && !abort;
  assign mem_rd_addr  = chk_addr;
  assign mem_wr_valid = (st == D_STORE) && wr_pend && chk_ok && !abort;
  assign mem_wr_addr  = chk_addr;
  assign mem_wr_data  = (bsel_q == BUF_ACCQ) ? aq_rd_data : ub_rd_data;

  // Store: read the next UBUF row when the presented row leaves (or none is).
  logic store_adv;
  assign store_adv  = (st == D_STORE) && !abort && (!wr_pend || wr_fire) && (req_cnt < cnt_q);
  assign ub_rd_en   = store_adv && (bsel_q != BUF_ACCQ);
  assign ub_rd_addr = UB_AW'(baddr_q + req_cnt);
  assign aq_rd_en   = store_adv && (bsel_q == BUF_ACCQ);
  assign aq_rd_addr = AQ_AW'(baddr_q + req_cnt);

  // Load: write returning rows to the selected buffer (dropped when draining).
  logic load_wr;
  assign load_wr    = resp && (st == D_LOAD);
  assign ub_wr_en   = load_wr && (bsel_q == BUF_UBUF);
  assign wb_wr_en   = load_wr && (bsel_q == BUF_WBUF);
  assign aq_wr_en   = load_wr && (bsel_q == BUF_ACCQ);
  assign aq_wr_addr = AQ_AW'(baddr_q + resp_cnt);
  assign aq_wr_data = mem_rd_resp_data;
  assign ub_wr_addr = UB_AW'(baddr_q + resp_cnt);
  assign wb_wr_addr = WB_AW'(baddr_q + resp_cnt);
  assign ub_wr_data = mem_rd_resp_data;
  assign wb_wr_data = mem_rd_resp_data;

  assign busy = (st != D_IDLE);

  logic deny;
  assign deny = ((st == D_LOAD)  && (req_cnt < cnt_q) && !chk_ok) ||
                ((st == D_STORE) && wr_pend && !chk_ok);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= D_IDLE;
      bsel_q      <= BUF_UBUF;
      daddr_q     <= '0;
      baddr_q     <= '0;
      cnt_q       <= '0;
      req_cnt     <= '0;
      resp_cnt    <= '0;
      outstanding <= '0;
      wr_pend     <= 1'b0;
      fault       <= 1'b0;
    end else begin
      fault       <= 1'b0;
      outstanding <= outstanding + 9'(rd_fire) - 9'(resp);
      unique case (st)
        D_IDLE: if (start && !abort) begin
          st       <= is_store ? D_STORE : D_LOAD;
          bsel_q   <= bsel;
          daddr_q  <= dram_addr;
          baddr_q  <= buf_addr;
          cnt_q    <= count;
          req_cnt  <= '0;
          resp_cnt <= '0;
          wr_pend  <= 1'b0;
        end
        D_LOAD: begin
          if (rd_fire) req_cnt  <= req_cnt + 1'b1;
          if (resp)    resp_cnt <= resp_cnt + 1'b1;
          if (abort || deny) begin
            fault <= deny && !abort;
            st    <= D_DRAIN;
          end else if (resp_cnt + CNT_W'(resp) == cnt_q) begin
            st <= D_IDLE;
          end
        end
        D_STORE: begin
          if (store_adv) req_cnt <= req_cnt + 1'b1;
          if (wr_fire)   resp_cnt <= resp_cnt + 1'b1;
          if (store_adv) wr_pend <= 1'b1;
          else if (wr_fire) wr_pend <= 1'b0;
          if (abort || deny) begin
            fault <= deny && !abort;
            st    <= D_DRAIN;
          end else if (resp_cnt + CNT_W'(wr_fire) == cnt_q) begin
            st <= D_IDLE;
          end
        end
        D_DRAIN: begin
          wr_pend <= 1'b0;
          if (outstanding - 9'(resp) == 0) st <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  // Responses never outnumber requests.
  a_no_spurious_resp: assert property (@(posedge clk) disable iff (!rst_n)
    resp |-> (outstanding != 0));
endmodule
