// instruction_buffer: holds the CISC programs of all resident tasks.
//
// The host writes compiled instructions (npu_pkg::instr_t) into the buffer
// before dispatching a task; each task's program, checkpoint trap routine and
// restore routine live at addresses the host chooses. The controller reads
// the instruction at its program counter combinationally (register-file
// style), so a new PC is seen in the same cycle.
//
// The buffer and its host fill follow the design description; depth and the
// asynchronous read are this design's choices. Contents are cleared to NOP
// at reset.
module instruction_buffer
  import npu_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  instr_t        wr_data,
  input  logic [AW-1:0] rd_addr,
  output instr_t        rd_data
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (wr_en) begin
      mem[wr_addr] <= wr_data;
    end
  end

  assign rd_data = mem[rd_addr];
endmodule
