// dram_model: behavioural model of the off-chip memory (not synthesizable).
//
// Fixed-latency, fixed-bandwidth memory as used in the design's evaluation:
// every read request is accepted (ready is always high) and its row is
// returned LAT cycles later, in order, one row per cycle at most; writes are
// accepted every cycle and take effect at once. Rows are kept in an
// associative array, so any 32-bit row address may be used; unwritten rows
// read as zero. Testbenches preload and inspect rows through `mem`.
module dram_model #(
  parameter int unsigned ROW_W = 2048,
  parameter int unsigned LAT   = 100
) (
  input  logic             clk,
  input  logic             rd_valid,
  output logic             rd_ready,
  input  logic [31:0]      rd_addr,
  output logic             resp_valid,
  output logic [ROW_W-1:0] resp_data,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [31:0]      wr_addr,
  input  logic [ROW_W-1:0] wr_data
);
  logic [ROW_W-1:0] mem [int unsigned];
  logic             pv [LAT];
  logic [ROW_W-1:0] pd [LAT];
  int unsigned      reads = 0, writes = 0;

  assign rd_ready   = 1'b1;
  assign wr_ready   = 1'b1;
  assign resp_valid = pv[LAT-1];
  assign resp_data  = pd[LAT-1];

  initial for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= rd_valid;
    pd[0] <= mem.exists(rd_addr) ? mem[rd_addr] : '0;
    if (rd_valid) reads++;
    if (wr_valid) begin
      mem[wr_addr] = wr_data;
      writes++;
    end
  end
endmodule
