// tb_weight_buffer: random writes and reads of a small WBUF compared with a
// reference array (1-cycle read latency, data held while rd_en is low).
module tb_weight_buffer;
  localparam int ROWS = 32, W = 48;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en, wr_en;
  logic [4:0] rd_addr, wr_addr;
  logic [W-1:0] rd_data, wr_data, ref_mem[ROWS], exp_rd;

  weight_buffer #(.ROWS(ROWS), .ROW_W(W)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; rd_addr = 0;
    for (int i = 0; i < ROWS; i++) begin
      wr_en = 1; wr_addr = 5'(i); wr_data = W'({$urandom, $urandom}); ref_mem[i] = wr_data;
      @(posedge clk); #1;
    end
    for (int t = 0; t < 2000; t++) begin
      rd_en = 1'($urandom); wr_en = 1'($urandom);
      rd_addr = 5'($urandom); wr_addr = 5'($urandom); wr_data = W'({$urandom, $urandom});
      if (t == 0) rd_en = 1;
      if (rd_en) exp_rd = ref_mem[rd_addr];
      if (wr_en) ref_mem[wr_addr] = wr_data;
      @(posedge clk); #1;
      if (t > 0) begin
        checks++;
        if (rd_data !== exp_rd) begin failures++; $display("FAIL rd t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
