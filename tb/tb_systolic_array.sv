// tb_systolic_array: loads a random SH x SW weight tile by shifting columns
// (column SW-1 first), streams NV random activation vectors with the row
// skew applied by the testbench, and checks every column's result against a
// software matrix product at the cycle the design's timing predicts:
// vector v entering row 0 at cycle t appears on column j at t + SH + j + 1.
module tb_systolic_array;
  localparam int SH = 5, SW = 3, NV = 20;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_shift;
  logic signed [15:0] w_col[SH], x_in[SH];
  logic signed [31:0] psum_out[SW];
  logic signed [15:0] W[SH][SW];
  logic signed [15:0] X[NV][SH];

  systolic_array #(.SH(SH), .SW(SW)) dut (.clk, .w_shift, .w_col, .x_in, .psum_out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    for (int i = 0; i < SH; i++) for (int j = 0; j < SW; j++) W[i][j] = 16'(int'($urandom_range(0, 400)) - 200);
    for (int v = 0; v < NV; v++) for (int i = 0; i < SH; i++) X[v][i] = 16'(int'($urandom_range(0, 400)) - 200);
    for (int i = 0; i < SH; i++) x_in[i] = 0;
    // weight load
    for (int c = 0; c < SW; c++) begin
      w_shift = 1;
      for (int i = 0; i < SH; i++) w_col[i] = W[i][SW-1-c];
      @(posedge clk); #1;
    end
    w_shift = 0;
    for (int i = 0; i < SH; i++) w_col[i] = 16'($urandom);
    // stream: cycle t (t=0..), row i gets X[t-i][i]
    for (t = 0; t < NV + SH + SW + 3; t++) begin
      for (int i = 0; i < SH; i++)
        x_in[i] = (t - i >= 0 && t - i < NV) ? X[t-i][i] : 16'($urandom);
      #1;
      // results visible now: column j shows vector v = t - SH - j (registered at t-1 edge)
      for (int j = 0; j < SW; j++) begin
        int v;
        logic signed [31:0] exp;
        v = t - SH - j - 1;
        if (v >= 0 && v < NV) begin
          exp = 0;
          for (int i = 0; i < SH; i++) exp += 32'(X[v][i] * W[i][j]);
          checks++;
          if (psum_out[j] !== exp) begin
            failures++;
            $display("FAIL v=%0d col=%0d got %0d exp %0d", v, j, psum_out[j], exp);
          end
        end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
