// tb_dma_unit: DMA transfers against a 100-cycle off-chip memory model.
//
// The buffers are modelled in the testbench (1-cycle read like the real
// ones). It runs loads into UBUF, WBUF and ACCQ, stores from UBUF and ACCQ,
// a load that runs off the end of the task's MMU region (fault), and a load
// aborted half-way (KILL). Every row moved is compared with the source, and
// the length of each complete transfer is checked against count + latency.
module tb_dma_unit;
  import npu_pkg::*;
  localparam int ROW_W = 64, LAT = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, is_store, abort, busy, fault, chk_ok;
  buf_sel_e bsel;
  logic [31:0] dram_addr, chk_addr;
  logic [15:0] buf_addr, count;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid, mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [ROW_W-1:0] mem_rd_resp_data, mem_wr_data;
  logic ub_rd_en, ub_wr_en, wb_wr_en, aq_rd_en, aq_wr_en;
  logic [5:0] ub_rd_addr, ub_wr_addr, wb_wr_addr, aq_rd_addr, aq_wr_addr;
  logic [ROW_W-1:0] ub_rd_data, ub_wr_data, wb_wr_data, aq_rd_data, aq_wr_data;
  logic [31:0] lo, hi;

  logic [ROW_W-1:0] ub[64], wb[64], aq[64];
  int unsigned buf_writes = 0;

  dma_unit #(.ROW_W(ROW_W), .UB_AW(6), .WB_AW(6), .AQ_AW(6)) dut (.*);
  dram_model #(.ROW_W(ROW_W), .LAT(LAT)) mem (
    .clk, .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .resp_valid(mem_rd_resp_valid), .resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  assign chk_ok = (chk_addr >= lo) && (chk_addr < hi);

  always_ff @(posedge clk) begin
    if (ub_rd_en) ub_rd_data <= ub[ub_rd_addr];
    if (aq_rd_en) aq_rd_data <= aq[aq_rd_addr];
    if (ub_wr_en) ub[ub_wr_addr] <= ub_wr_data;
    if (wb_wr_en) wb[wb_wr_addr] <= wb_wr_data;
    if (aq_wr_en) aq[aq_wr_addr] <= aq_wr_data;
    if (ub_wr_en || wb_wr_en || aq_wr_en) buf_writes++;
  end

  int faults = 0;
  always @(posedge clk) if (fault) faults++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Start a transfer and return the number of cycles busy was high.
  task automatic run(input bit st, input buf_sel_e b, input int da, input int ba, input int n,
                     output int cycles);
    @(negedge clk);
    start = 1; is_store = st; bsel = b; dram_addr = 32'(da); buf_addr = 16'(ba); count = 16'(n);
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  int cyc;
  logic [ROW_W-1:0] saved[64];

  initial begin
    start = 0; is_store = 0; abort = 0; bsel = BUF_UBUF; dram_addr = 0; buf_addr = 0; count = 0;
    lo = 100; hi = 400;
    for (int i = 0; i < 64; i++) begin ub[i] = '0; wb[i] = '0; aq[i] = '0; end
    for (int i = 0; i < 512; i++) mem.mem[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Loads into each buffer: rows and duration (count + memory latency).
    run(0, BUF_UBUF, 100, 5, 10, cyc);
    for (int i = 0; i < 10; i++) check(ub[5+i] == mem.mem[100+i], $sformatf("ub load row %0d", i));
    check(cyc >= 10 + LAT && cyc <= 10 + LAT + 3, $sformatf("ub load took %0d cycles", cyc));
    run(0, BUF_WBUF, 200, 0, 16, cyc);
    for (int i = 0; i < 16; i++) check(wb[i] == mem.mem[200+i], $sformatf("wb load row %0d", i));
    check(cyc >= 16 + LAT && cyc <= 16 + LAT + 3, $sformatf("wb load took %0d cycles", cyc));
    run(0, BUF_ACCQ, 120, 8, 6, cyc);
    for (int i = 0; i < 6; i++) check(aq[8+i] == mem.mem[120+i], $sformatf("aq load row %0d", i));

    // Stores from UBUF and ACCQ: one row per cycle, no memory latency.
    for (int i = 0; i < 64; i++) begin ub[i] = {$urandom, $urandom}; aq[i] = {$urandom, $urandom}; end
    run(1, BUF_UBUF, 300, 20, 12, cyc);
    for (int i = 0; i < 12; i++) check(mem.mem[300+i] == ub[20+i], $sformatf("ub store row %0d", i));
    check(cyc >= 12 && cyc <= 12 + 3, $sformatf("store took %0d cycles", cyc));
    run(1, BUF_ACCQ, 350, 0, 16, cyc);
    for (int i = 0; i < 16; i++) check(mem.mem[350+i] == aq[i], $sformatf("aq store row %0d", i));

    // Load that crosses the end of the region: fault is raised once and no
    // row from outside the region reaches the buffer (rows still in flight
    // are dropped too, since the task is being terminated).
    saved = ub;
    faults = 0;
    run(0, BUF_UBUF, 395, 30, 10, cyc);
    check(faults == 1, "one fault on out-of-region load");
    for (int i = 5; i < 10; i++) check(ub[30+i] == saved[30+i], $sformatf("no row after fault %0d", i));
    // Store whose first row is outside the region.
    faults = 0;
    saved[0] = mem.mem[50];
    run(1, BUF_UBUF, 50, 0, 4, cyc);
    check(faults == 1, "fault on out-of-region store");
    check(mem.mem[50] == saved[0] && mem.writes == 28, "denied store wrote nothing");

    // Abort half-way through a load: the unit drains and writes nothing late.
    @(negedge clk);
    start = 1; is_store = 0; bsel = BUF_WBUF; dram_addr = 100; buf_addr = 40; count = 20;
    @(negedge clk);
    start = 0;
    repeat (10) @(negedge clk);
    abort = 1;
    @(negedge clk);
    abort = 0;
    buf_writes = 0;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    check(buf_writes == 0, "no buffer write after abort");
    check(cyc <= LAT + 2, $sformatf("abort drained in %0d cycles", cyc));
    repeat (LAT + 5) @(negedge clk);
    check(buf_writes == 0, "no late write after abort");
    // The unit works again afterwards.
    run(0, BUF_WBUF, 140, 40, 4, cyc);
    for (int i = 0; i < 4; i++) check(wb[40+i] == mem.mem[140+i], $sformatf("load after abort %0d", i));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
