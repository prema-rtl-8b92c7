// seqlen_lut: profile-driven regression table for RNN output length.
//
// For sequence-to-sequence RNNs (translation, speech recognition) the number
// of time-unrolled decoder steps depends on the input, but it correlates
// with the input sequence length, which is known before inference. The host
// fills this table from profiling runs: entry L holds the geometric mean of
// the observed output lengths for input length L. A lookup returns the
// predicted output length; input lengths beyond the table use its last
// entry. The table and its meaning follow the design description, which
// keeps it in software and notes that a hardware version is small; the size
// and the clamping are this design's choices. Read is combinational; the
// table is cleared at reset.
module seqlen_lut #(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned VAL_W   = 16,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_len,
  input  logic [VAL_W-1:0] wr_val,
  input  logic [15:0]      in_len,
  output logic [VAL_W-1:0] out_len
);
  logic [VAL_W-1:0] tab[ENTRIES];
  logic [AW-1:0]    idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
    end else if (wr_en) begin
      tab[wr_len] <= wr_val;
    end
  end

  assign idx     = (32'(in_len) >= ENTRIES) ? AW'(ENTRIES - 1) : AW'(in_len);
  assign out_len = tab[idx];
endmodule
