// tb_accumulator_queue: random overwrite and accumulate writes and reads of a
// small ACCQ, compared element by element with a reference array. The DMA
// port (half-row save/restore) is driven at the same time, on other rows.
module tb_accumulator_queue;
  localparam int SW = 4, ACC = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, wr_acc, rd_en;
  logic [2:0] wr_addr, rd_addr;
  logic signed [31:0] wr_data[SW], rd_data[SW];
  logic signed [31:0] ref_mem[ACC][SW], exp_rd[SW];
  logic dma_wr_en, dma_rd_en;
  logic [3:0] dma_wr_addr, dma_rd_addr;
  logic [63:0] dma_wr_data, dma_rd_data, exp_dma;

  accumulator_queue #(.SW(SW), .ACC(ACC)) dut (.clk, .wr_en, .wr_acc, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data,
    .dma_wr_en, .dma_wr_addr, .dma_wr_data, .dma_rd_en, .dma_rd_addr, .dma_rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; rd_addr = 0; dma_wr_en = 0; dma_rd_en = 0; dma_wr_addr = 0; dma_rd_addr = 0; dma_wr_data = 0;
    for (int i = 0; i < ACC; i++) begin
      wr_en = 1; wr_acc = 0; wr_addr = 3'(i);
      for (int j = 0; j < SW; j++) begin wr_data[j] = 32'($urandom); ref_mem[i][j] = wr_data[j]; end
      @(posedge clk); #1;
    end
    for (int t = 0; t < 2000; t++) begin
      wr_en = 1'($urandom); wr_acc = 1'($urandom); rd_en = 1'($urandom);
      wr_addr = 3'($urandom); rd_addr = 3'($urandom);
      for (int j = 0; j < SW; j++) wr_data[j] = 32'($urandom);
      dma_wr_en = 1'($urandom); dma_rd_en = 1'($urandom); dma_wr_data = {$urandom, $urandom};
      dma_wr_addr = 4'($urandom); dma_rd_addr = 4'($urandom);
      if (wr_en && dma_wr_addr[3:1] == wr_addr) dma_wr_en = 0;
      if (t == 0) begin rd_en = 1; dma_rd_en = 1; end
      if (rd_en) exp_rd = ref_mem[rd_addr];
      if (dma_rd_en) for (int j = 0; j < 2; j++) exp_dma[j*32 +: 32] = ref_mem[dma_rd_addr[3:1]][2*dma_rd_addr[0] + j];
      if (dma_wr_en) for (int j = 0; j < 2; j++) ref_mem[dma_wr_addr[3:1]][2*dma_wr_addr[0] + j] = dma_wr_data[j*32 +: 32];
      if (wr_en) for (int j = 0; j < SW; j++)
        ref_mem[wr_addr][j] = wr_acc ? ref_mem[wr_addr][j] + wr_data[j] : wr_data[j];
      @(posedge clk); #1;
      if (t > 0) for (int j = 0; j < SW; j++) begin
        checks++;
        if (rd_data[j] !== exp_rd[j]) begin failures++; $display("FAIL t=%0d j=%0d", t, j); end
      end
      if (t > 0) begin
        checks++;
        if (dma_rd_data !== exp_dma) begin failures++; $display("FAIL dma rd t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
