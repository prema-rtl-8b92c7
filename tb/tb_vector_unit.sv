// tb_vector_unit: random accumulator and operand rows through every function
// (pass, ReLU, add, add+ReLU) and shift, compared with an independent model
// of add / ReLU / arithmetic shift / 16-bit saturation.
module tb_vector_unit;
  import npu_pkg::*;
  localparam int SW = 8;
  int checks = 0, failures = 0;
  vfunc_e func;
  logic [4:0] shift;
  logic signed [31:0] acc_row[SW];
  logic signed [15:0] src_row[SW], out_row[SW];

  vector_unit #(.SW(SW)) dut (.func, .shift, .acc_row, .src_row, .out_row);

  function automatic logic signed [15:0] model(vfunc_e f, logic [4:0] sh, longint a, longint s);
    longint v;
    v = a;
    if (f == VF_ADD || f == VF_ADD_RELU) v = 64'(signed'(32'(v + s)));
    if ((f == VF_RELU || f == VF_ADD_RELU) && v < 0) v = 0;
    v = v >>> sh;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return 16'(v);
  endfunction

  initial begin
    for (int t = 0; t < 3000; t++) begin
      func  = vfunc_e'($urandom_range(0, 3));
      shift = (t % 3 == 0) ? 5'd0 : 5'($urandom_range(0, 20));
      for (int j = 0; j < SW; j++) begin
        acc_row[j] = (t % 2) ? 32'($urandom) : 32'(int'($urandom_range(0, 80000)) - 40000);
        src_row[j] = 16'($urandom);
      end
      #1;
      for (int j = 0; j < SW; j++) begin
        logic signed [15:0] e;
        e = model(func, shift, longint'(acc_row[j]), longint'(src_row[j]));
        checks++;
        if (out_row[j] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL f=%0d sh=%0d a=%0d s=%0d got %0d exp %0d", func, shift, acc_row[j], src_row[j], out_row[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
