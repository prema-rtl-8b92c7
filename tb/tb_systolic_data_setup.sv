// tb_systolic_data_setup: drives random rows every cycle and checks that lane
// l of the output equals lane l of the input delayed by l cycles (skew) and,
// for the reversed instance, by LANES-1-l cycles (de-skew).
module tb_systolic_data_setup;
  localparam int L = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] din[L], dskew[L], ddesk[L];
  logic [15:0] hist[$][L];

  systolic_data_setup #(.LANES(L), .WIDTH(16), .REVERSE(1'b0)) dut (.clk, .d_in(din), .d_out(dskew));
  systolic_data_setup #(.LANES(L), .WIDTH(16), .REVERSE(1'b1)) dut_r (.clk, .d_in(din), .d_out(ddesk));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] row[L];
    for (int t = 0; t < 300; t++) begin
      for (int l = 0; l < L; l++) row[l] = 16'($urandom);
      din = row;
      hist.push_front(row);
      #1;
      if (t >= L) begin
        for (int l = 0; l < L; l++) begin
          checks++;
          if (dskew[l] !== hist[l][l]) begin failures++; $display("FAIL skew t=%0d lane %0d", t, l); end
          checks++;
          if (ddesk[l] !== hist[L-1-l][l]) begin failures++; $display("FAIL deskew t=%0d lane %0d", t, l); end
        end
      end
      @(posedge clk);
      #1;
      if (hist.size() > L + 2) void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
