// task_queue: FIFO of inference requests sent by the host CPU.
//
// The host pushes a task descriptor (TaskID, priority level, predicted
// execution time, program entry points); the preemption module pops it into
// a free context-table entry. Standard valid/ready FIFO: push is accepted
// when in_ready is high, out_valid shows a descriptor is at the head, and
// pop removes it. Same-cycle push and pop are allowed when neither full nor
// empty blocks them. Its place at the entry of the preemption module follows
// the design description; the depth is this design's choice.
//
// Lint note: the assertions below are disabled during reset with
// `disable iff (!rst_n)`, which makes lint report rst_n as used both
// synchronously and asynchronously (SYNCASYNCNET). The assertion is not
// logic; every flop in this module resets asynchronously only.
module task_queue
  import npu_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  task_req_t in_data,
  output logic      out_valid,
  input  logic      pop,
  output task_req_t out_data
);
  task_req_t     mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          push_ok, pop_ok;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign out_data  = mem[rd_ptr];
  assign push_ok   = in_valid && in_ready;
  assign pop_ok    = pop && out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push_ok) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop_ok)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push_ok) - (AW+1)'(pop_ok);
    end
  end

  always_ff @(posedge clk) begin
    if (push_ok) mem[wr_ptr] <= in_data;
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid);
endmodule
