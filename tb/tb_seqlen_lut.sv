// tb_seqlen_lut: fills the table with a reference curve and checks lookups,
// including lengths beyond the table, which must return the last entry.
module tb_seqlen_lut;
  localparam int E = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en; logic [3:0] wr_len; logic [15:0] wr_val, in_len, out_len;
  logic [15:0] ref_tab[E];

  seqlen_lut #(.ENTRIES(E)) dut (.clk, .rst_n, .wr_en, .wr_len, .wr_val, .in_len, .out_len);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_len = 0; wr_val = 0; in_len = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < E; i++) begin
      wr_en = 1; wr_len = 4'(i); wr_val = 16'(i + i / 3 + $urandom_range(0, 2)); ref_tab[i] = wr_val;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int t = 0; t < 500; t++) begin
      in_len = 16'($urandom_range(0, 3 * E));
      #1;
      checks++;
      if (out_len !== ref_tab[(in_len >= E) ? E - 1 : in_len]) begin failures++; $display("FAIL len %0d", in_len); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
