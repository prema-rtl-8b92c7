// seq_divider: unsigned radix-2 restoring divider, one quotient bit per cycle.
//
// Used by the PREMA scheduler to form Waited / Estimated once per task and
// scheduling period, where time is plentiful (a period is many thousands of
// cycles), so one small iterative divider replaces a wide combinational one.
// start loads the operands; done pulses W cycles later with quotient valid
// until the next start. A zero divisor returns all ones.
module seq_divider #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0]         rem, dsr;
  logic [$clog2(W+1)-1:0] n;
  logic [W+1:0]         trial;

  assign trial = {1'b0, rem, quotient[W-1]} - {2'b0, dsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem      <= '0;
      dsr      <= '0;
      quotient <= '0;
      n        <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem      <= '0;
        dsr      <= divisor;
        quotient <= dividend;
        n        <= '0;
        busy     <= 1'b1;
      end else if (busy) begin
        // shift (rem, quotient) left by one; subtract if it fits
        if (!trial[W+1]) begin
          rem      <= trial[W-1:0];
          quotient <= {quotient[W-2:0], 1'b1};
        end else begin
          rem      <= {rem[W-2:0], quotient[W-1]};
          quotient <= {quotient[W-2:0], 1'b0};
        end
        n <= n + 1'b1;
        if (n == $bits(n)'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
