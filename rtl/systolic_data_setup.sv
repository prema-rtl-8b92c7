// systolic_data_setup: the skew stage between a buffer and the systolic array.
//
// Activations read from the unified buffer arrive as a whole row per cycle,
// but the weight-stationary array needs row i of the array to see its element
// i cycles after row 0 (the staircase in which activations enter the array).
// Lane i is therefore delayed by i cycles (REVERSE = 0). The same structure
// with REVERSE = 1 delays lane j by LANES-1-j cycles and is used at the
// bottom of the array to line the skewed column results up again into one
// accumulator-queue row.
//
// The function follows the design description ("Systolic Data Setup"); the
// triangular register delay line that implements it is this design's choice.
// Lane 0 (or lane LANES-1 when reversed) has no delay and is combinational.
module systolic_data_setup #(
  parameter int unsigned LANES   = 128,
  parameter int unsigned WIDTH   = 16,
  parameter bit          REVERSE = 1'b0
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d_in [LANES],
  output logic [WIDTH-1:0] d_out[LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int unsigned DELAY = REVERSE ? (LANES - 1 - l) : l;
    if (DELAY == 0) begin : g_direct
      assign d_out[l] = d_in[l];
    end else begin : g_delay
      logic [WIDTH-1:0] stage[DELAY];
      always_ff @(posedge clk) begin
        stage[0] <= d_in[l];
        for (int s = 1; s < DELAY; s++) stage[s] <= stage[s-1];
      end
      assign d_out[l] = stage[DELAY-1];
    end
  end
endmodule
