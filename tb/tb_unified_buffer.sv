// tb_unified_buffer: random traffic on all three ports of a small UBUF,
// compared with a reference array: 1-cycle read latency on both read ports,
// read data holding while the enable is low, and the compute write winning
// over a DMA write to the same row.
module tb_unified_buffer;
  localparam int ROWS = 64, W = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en, wr_en, drd_en, dwr_en;
  logic [5:0] rd_addr, wr_addr, drd_addr, dwr_addr;
  logic [W-1:0] rd_data, wr_data, drd_data, dwr_data;
  logic [W-1:0] ref_mem[ROWS];
  logic [W-1:0] exp_rd, exp_drd;

  unified_buffer #(.ROWS(ROWS), .ROW_W(W)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data,
    .dma_rd_en(drd_en), .dma_rd_addr(drd_addr), .dma_rd_data(drd_data),
    .dma_wr_en(dwr_en), .dma_wr_addr(dwr_addr), .dma_wr_data(dwr_data));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; drd_en = 0; dwr_en = 0;
    rd_addr = 0; wr_addr = 0; drd_addr = 0; dwr_addr = 0; wr_data = 0; dwr_data = 0;
    // initialise all rows through the DMA port
    for (int i = 0; i < ROWS; i++) begin
      dwr_en = 1; dwr_addr = 6'(i); dwr_data = {$urandom, $urandom}; ref_mem[i] = dwr_data;
      @(posedge clk); #1;
    end
    dwr_en = 0;
    exp_rd = 'x; exp_drd = 'x;
    for (int t = 0; t < 2000; t++) begin
      rd_en = 1'($urandom); drd_en = 1'($urandom); wr_en = 1'($urandom); dwr_en = 1'($urandom);
      rd_addr = 6'($urandom); drd_addr = 6'($urandom); wr_addr = 6'($urandom);
      if (t == 0) begin rd_en = 1; drd_en = 1; end
      dwr_addr = (t % 7 == 0) ? wr_addr : 6'($urandom);
      wr_data = {$urandom, $urandom}; dwr_data = {$urandom, $urandom};
      if (rd_en) exp_rd = ref_mem[rd_addr];
      if (drd_en) exp_drd = ref_mem[drd_addr];
      if (dwr_en) ref_mem[dwr_addr] = dwr_data;
      if (wr_en) ref_mem[wr_addr] = wr_data;
      @(posedge clk); #1;
      if (t > 0) begin
        checks += 2;
        if (rd_data !== exp_rd) begin failures++; $display("FAIL rd t=%0d", t); end
        if (drd_data !== exp_drd) begin failures++; $display("FAIL dma rd t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
