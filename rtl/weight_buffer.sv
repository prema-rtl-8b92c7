// weight_buffer: the weight buffer (WBUF), 4 MB by default.
//
// Weights are staged here from off-chip memory by LOAD_TILE and read by the
// GEMM sequencer one array column (SH weights) per cycle while the weight
// tile is shifted into the systolic array. Weights never change during
// inference, so the buffer is never checkpointed.
//
// One write port (DMA) and one read port (GEMM) with 1-cycle read latency;
// read data holds while rd_en is low. Capacity from the design description;
// row organisation assumed.
module weight_buffer #(
  parameter int unsigned ROWS  = 16384,          // 4 MB / 256 B
  parameter int unsigned ROW_W = 2048,
  localparam int unsigned AW   = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [ROW_W-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [ROW_W-1:0] wr_data
);
  logic [ROW_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
