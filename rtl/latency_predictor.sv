// latency_predictor: hardware form of the architecture-aware inference-time
// prediction model for the systolic-array NPU.
//
// The host streams the layers of a network, one (m, k, n) GEMM shape per
// cycle (an m x k weight times a k x n activation), and time_estimated
// accumulates
//   C1 = ACC + SH + 2*SW                  M1 = (SH*SW + SH*ACC) / BW
//   r  = n - floor(n/ACC)*ACC             C2 = r + SH + 2*SW
//   M2 = (SH*SW + SH*r) / BW              phi = (r != 0)
//   T  = floor(m/SW)*floor(k/SH)*floor(n/ACC) * max(C1, M1)
//      + floor(m/SW)*floor(k/SH)*phi        * max(C2, M2)
// times `reps`, the number of times the node executes. For a recurrent layer
// the host sets `recurrent` and reps comes from the sequence-length lookup
// table (predicted time-unrolled length); otherwise reps = 1.
// C is the compute time of a GEMM tile and M the time to fetch the next
// tile's operands, which overlaps it. The formulas are the design's, copied
// as given, including floor() for the m and k tile counts (so a layer with
// m < SW or k < SH predicts zero). BW is off-chip bandwidth in 16-bit
// elements per cycle: 358 GB/s / 700 MHz / 2 B = 255 (the unit is this
// design's reading). Divisions by the constants SW, SH, ACC and BW are by
// parameters. clear resets the sum; the sum is registered (1-cycle latency).
module latency_predictor
  import npu_pkg::*;
#(
  parameter int unsigned SH  = 128,
  parameter int unsigned SW  = 128,
  parameter int unsigned ACC = 128,
  parameter int unsigned BW  = 255
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              layer_valid,
  input  logic [31:0]       m,
  input  logic [31:0]       k,
  input  logic [31:0]       n,
  input  logic [15:0]       reps,
  output logic [TIME_W-1:0] time_estimated
);
  localparam longint unsigned C1 = longint'(ACC) + longint'(SH) + 2 * longint'(SW);
  localparam longint unsigned M1 = (longint'(SH) * SW + longint'(SH) * ACC) / longint'(BW);
  localparam longint unsigned T_INNER = (C1 > M1) ? C1 : M1;

  logic [TIME_W-1:0] mt, kt, nt, r, c2, m2, t_outer, layer_t;

  always_comb begin
    mt      = TIME_W'(m / SW);
    kt      = TIME_W'(k / SH);
    nt      = TIME_W'(n / ACC);
    r       = TIME_W'(n) - nt * ACC;
    c2      = r + TIME_W'(SH + 2 * SW);
    m2      = (TIME_W'(SH) * TIME_W'(SW) + TIME_W'(SH) * r) / TIME_W'(BW);
    t_outer = (c2 > m2) ? c2 : m2;
    layer_t = mt * kt * nt * T_INNER + ((r != 0) ? mt * kt * t_outer : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           time_estimated <= '0;
    else if (clear)       time_estimated <= '0;
    else if (layer_valid) time_estimated <= time_estimated + layer_t * TIME_W'(reps);
  end
endmodule
