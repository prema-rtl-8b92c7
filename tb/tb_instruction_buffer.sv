// tb_instruction_buffer: checks reset to NOP, then writes random instructions
// and reads them back combinationally at random addresses.
module tb_instruction_buffer;
  import npu_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en; logic [5:0] wr_addr, rd_addr; instr_t wr_data, rd_data;
  instr_t ref_mem[D];

  instruction_buffer #(.DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = '0; rd_addr = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < D; i++) begin
      rd_addr = 6'(i); #1;
      checks++; if (rd_data !== '0) begin failures++; $display("FAIL reset %0d", i); end
      ref_mem[i] = '0;
    end
    for (int t = 0; t < 1000; t++) begin
      wr_en = 1'($urandom); wr_addr = 6'($urandom);
      wr_data = instr_t'({$urandom, $urandom, $urandom, $urandom});
      @(posedge clk); #1;
      if (wr_en) ref_mem[wr_addr] = wr_data;
      wr_en = 0;
      rd_addr = 6'($urandom); #1;
      checks++; if (rd_data !== ref_mem[rd_addr]) begin failures++; $display("FAIL rd %0d", rd_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
