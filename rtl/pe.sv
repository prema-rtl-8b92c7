// pe: one processing element of the weight-stationary systolic array.
//
// The PE holds a 16-bit weight in its weight register, latches the incoming
// activation in its input register, multiplies the two and adds the partial
// sum arriving from the PE above; the sum is stored in the output register
// and passed down. The input register is also forwarded to the PE on the
// right, so activations move one column per cycle and partial sums one row
// per cycle. This register structure (weight, input and output registers,
// one multiplier and one adder) follows the design description.
//
// Weights are loaded by shifting: while w_shift is high the weight register
// takes w_in and its old value leaves on w_out towards the next column. This
// shift path is this design's own choice of how the weight buffer stages
// weights into the array.
//
// Timing: x_out is x_in delayed by one cycle; psum_out = psum_in +
// w * x_out, registered, i.e. it uses the activation one cycle after it was
// presented on x_in. The accumulation width (PSUM_W) is assumed; the product
// is sign-extended and the sum wraps.
module pe #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned PSUM_W = 32
) (
  input  logic                     clk,
  input  logic                     w_shift,
  input  logic signed [DATA_W-1:0] w_in,
  output logic signed [DATA_W-1:0] w_out,
  input  logic signed [DATA_W-1:0] x_in,
  output logic signed [DATA_W-1:0] x_out,
  input  logic signed [PSUM_W-1:0] psum_in,
  output logic signed [PSUM_W-1:0] psum_out
);
  logic signed [DATA_W-1:0]   weight_q;
  logic signed [DATA_W-1:0]   input_q;
  logic signed [PSUM_W-1:0]   output_q;
  logic signed [2*DATA_W-1:0] product;

  assign product = input_q * weight_q;

  always_ff @(posedge clk) begin
    if (w_shift) weight_q <= w_in;
    input_q  <= x_in;
    output_q <= psum_in + PSUM_W'(product);
  end

  assign w_out    = weight_q;
  assign x_out    = input_q;
  assign psum_out = output_q;
endmodule
