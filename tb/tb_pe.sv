// tb_pe: checks the processing element against a cycle model: weight shift,
// activation forwarding (one-cycle delay) and the registered MAC
// psum_out = psum_in + w * x, using random signed values.
module tb_pe;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        w_shift;
  logic signed [15:0] w_in, w_out, x_in, x_out;
  logic signed [31:0] psum_in, psum_out;

  pe dut (.clk, .w_shift, .w_in, .w_out, .x_in, .x_out, .psum_in, .psum_out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] w, x, x_prev;
    logic signed [31:0] p, exp;
    w_shift = 1; w_in = 16'sd0; x_in = 0; psum_in = 0;
    for (int t = 0; t < 200; t++) begin
      w = 16'($urandom);
      w_shift = 1; w_in = w;
      @(posedge clk); #1;
      w_shift = 0; w_in = 16'($urandom);
      check(w_out == w, "weight load");
      x = 16'($urandom); p = 32'($urandom);
      x_in = x;
      @(posedge clk); #1;
      check(x_out == x, "activation forward");
      psum_in = p; x_in = 16'($urandom);
      @(posedge clk); #1;
      exp = p + 32'(x * w);
      check(psum_out == exp, $sformatf("mac %0d*%0d+%0d got %0d exp %0d", x, w, p, psum_out, exp));
      check(w_out == w, "weight stationary");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
