// vector_unit: element-wise post-processing of accumulator rows.
//
// Takes one ACCQ row (SW 32-bit partial sums) per cycle, optionally adds an
// operand row from the unified buffer (vector addition, e.g. residual
// connections), optionally applies ReLU, and requantises to 16 bits by an
// arithmetic right shift followed by saturation. The result is written back
// to the unified buffer, which is how activation layers are fused with the
// preceding GEMM/CONV.
//
// The design description names ReLU, sigmoid, tanh and vector additions;
// this unit provides pass, ReLU, add and add+ReLU only. The shift-and-
// saturate requantisation is this design's choice. Purely combinational:
// the caller registers the output.
module vector_unit
  import npu_pkg::*;
#(
  parameter int unsigned SW = 128
) (
  input  vfunc_e                   func,
  input  logic [4:0]               shift,
  input  logic signed [PSUM_W-1:0] acc_row[SW],
  input  logic signed [DATA_W-1:0] src_row[SW],
  output logic signed [DATA_W-1:0] out_row[SW]
);
  localparam logic signed [PSUM_W-1:0] MAXV = PSUM_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [PSUM_W-1:0] MINV = -PSUM_W'(1 << (DATA_W - 1));

  always_comb begin
    for (int j = 0; j < SW; j++) begin
      logic signed [PSUM_W-1:0] v;
      v = acc_row[j];
      if (func == VF_ADD || func == VF_ADD_RELU) v = v + PSUM_W'(src_row[j]);
      if (func == VF_RELU || func == VF_ADD_RELU) v = (v < 0) ? '0 : v;
      v = v >>> shift;
      if (v > MAXV)      out_row[j] = MAXV[DATA_W-1:0];
      else if (v < MINV) out_row[j] = MINV[DATA_W-1:0];
      else               out_row[j] = v[DATA_W-1:0];
    end
  end
endmodule
