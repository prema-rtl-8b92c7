// accumulator_queue: the accumulator queue (ACCQ) behind the systolic array.
//
// Holds one output tile of ACC rows, each row SW 32-bit partial sums (one
// activation vector's results). A GEMM writes one row per cycle; with
// wr_acc set the new row is added element-wise to the stored row, so a
// tiled matrix product can accumulate over several GEMM_OPs while the tile
// stays in place. The vector unit reads rows through the rd_* port (1-cycle
// latency, data holds while rd_en is low).
//
// A third port lets the DMA save and restore the queue when a task is
// checkpointed: an ACCQ row is 2*DROW_W bits, so DMA row r maps to ACCQ row
// r/2, low half (elements 0 .. SW/2-1) when r is even, high half when odd.
// dma_rd_* has 1-cycle latency; a DMA write and a GEMM write to the same row
// in one cycle must not happen (software keeps them apart).
//
// The ACCQ and the accumulate-or-overwrite behaviour follow the design
// description; its depth ACC is not given there and 128 is assumed.
module accumulator_queue #(
  parameter int unsigned SW     = 128,
  parameter int unsigned ACC    = 128,
  parameter int unsigned PSUM_W = 32,
  localparam int unsigned AW    = (ACC > 1) ? $clog2(ACC) : 1,
  localparam int unsigned HALF  = SW / 2,
  localparam int unsigned DROW_W = HALF * PSUM_W
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic                     wr_acc,
  input  logic [AW-1:0]            wr_addr,
  input  logic signed [PSUM_W-1:0] wr_data[SW],
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output logic signed [PSUM_W-1:0] rd_data[SW],
  input  logic                     dma_wr_en,
  input  logic [AW:0]              dma_wr_addr,
  input  logic [DROW_W-1:0]        dma_wr_data,
  input  logic                     dma_rd_en,
  input  logic [AW:0]              dma_rd_addr,
  output logic [DROW_W-1:0]        dma_rd_data
);
  logic signed [PSUM_W-1:0] mem [ACC][SW];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int j = 0; j < SW; j++)
        mem[wr_addr][j] <= wr_acc ? mem[wr_addr][j] + wr_data[j] : wr_data[j];
    end
    if (dma_wr_en) begin
      for (int j = 0; j < HALF; j++)
        mem[dma_wr_addr[AW:1]][dma_wr_addr[0] ? HALF + j : j] <= dma_wr_data[j*PSUM_W +: PSUM_W];
    end
    if (rd_en) rd_data <= mem[rd_addr];
    if (dma_rd_en) begin
      for (int j = 0; j < HALF; j++)
        dma_rd_data[j*PSUM_W +: PSUM_W] <= mem[dma_rd_addr[AW:1]][dma_rd_addr[0] ? HALF + j : j];
    end
  end
endmodule
