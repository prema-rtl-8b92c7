// unified_buffer: the unified activation buffer (UBUF), 8 MB by default.
//
// Holds input and output activations. One row is ROW_W bits (SH 16-bit
// activations). Three ports serve the three users:
//   * rd_*  : compute read (GEMM streaming, VECTOR operand), 1-cycle latency
//   * wr_*  : compute write (vector-unit results)
//   * dma_* : DMA read or write (LOAD_TILE / STORE_TILE / checkpoint)
// Read data is registered and holds its value while the read enable is low.
// If the compute and DMA write ports hit the same row in one cycle the
// compute write wins; software is expected never to do this.
//
// The 8 MB capacity comes from the design description; the row organisation
// and port set are this design's choices. The array stands in for the SRAM
// macros of a real chip.
module unified_buffer #(
  parameter int unsigned ROWS  = 32768,          // 8 MB / 256 B
  parameter int unsigned ROW_W = 2048,
  localparam int unsigned AW   = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [ROW_W-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [ROW_W-1:0] wr_data,
  input  logic             dma_rd_en,
  input  logic [AW-1:0]    dma_rd_addr,
  output logic [ROW_W-1:0] dma_rd_data,
  input  logic             dma_wr_en,
  input  logic [AW-1:0]    dma_wr_addr,
  input  logic [ROW_W-1:0] dma_wr_data
);
  logic [ROW_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (dma_wr_en && !(wr_en && wr_addr == dma_wr_addr)) mem[dma_wr_addr] <= dma_wr_data;
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
    if (dma_rd_en) dma_rd_data <= mem[dma_rd_addr];
  end
endmodule
