// systolic_array: the GEMM unit, an SH x SW grid of PEs (weight stationary).
//
// Row i of the grid receives activation element i on x_in from the left;
// activations travel right one column per cycle. Column j accumulates its
// dot product top to bottom; the bottom row emits SW partial sums on
// psum_out. Each PE holds one weight, so the array holds one SH x SW weight
// tile, as in the TPU-style GEMM unit the design is built on.
//
// Weight loading: w_col carries one column of SH weights. While w_shift is
// high the weights move one column to the right each cycle, so after SW
// shifts the column presented first sits in column SW-1. The caller feeds
// column SW-1 first.
//
// Timing: if row i sees its activation for vector v at cycle t+i (the skew
// done by systolic_data_setup), column j's result for v appears on
// psum_out[j] at cycle t+SH+j+1. The top row's partial-sum input is zero.
module systolic_array #(
  parameter int unsigned SH     = 128,
  parameter int unsigned SW     = 128,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned PSUM_W = 32
) (
  input  logic                     clk,
  input  logic                     w_shift,
  input  logic signed [DATA_W-1:0] w_col   [SH],
  input  logic signed [DATA_W-1:0] x_in    [SH],
  output logic signed [PSUM_W-1:0] psum_out[SW]
);
  // Inter-PE wires; index [row][col] and one extra column / row at the edge.
  logic signed [DATA_W-1:0] xw [SH][SW+1];
  logic signed [DATA_W-1:0] ww [SH][SW+1];
  logic signed [PSUM_W-1:0] pw [SH+1][SW];

  for (genvar i = 0; i < SH; i++) begin : g_row
    assign xw[i][0] = x_in[i];
    assign ww[i][0] = w_col[i];
    for (genvar j = 0; j < SW; j++) begin : g_col
      pe #(.DATA_W(DATA_W), .PSUM_W(PSUM_W)) u_pe (
        .clk     (clk),
        .w_shift (w_shift),
        .w_in    (ww[i][j]),
        .w_out   (ww[i][j+1]),
        .x_in    (xw[i][j]),
        .x_out   (xw[i][j+1]),
        .psum_in (pw[i][j]),
        .psum_out(pw[i+1][j])
      );
    end
  end

  for (genvar j = 0; j < SW; j++) begin : g_edge
    assign pw[0][j]    = '0;
    assign psum_out[j] = pw[SH][j];
  end
endmodule
