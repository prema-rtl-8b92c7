// tb_task_queue: random pushes and pops compared with a SystemVerilog queue
// model, including full (in_ready low) and empty (out_valid low) behaviour.
module tb_task_queue;
  import npu_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fulls = 0;
  logic in_valid, in_ready, out_valid, pop;
  task_req_t in_data, out_data;
  task_req_t model[$];

  task_queue #(.DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .pop, .out_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; pop = 0; in_data = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      in_valid = ($urandom_range(0, 99) < ((t / 500) % 2 ? 30 : 70));
      in_data  = task_req_t'({$urandom, $urandom, $urandom, $urandom});
      #1;
      checks += 2;
      if (in_ready !== (model.size() < D)) begin failures++; $display("FAIL ready t=%0d", t); end
      if (out_valid !== (model.size() > 0)) begin failures++; $display("FAIL valid t=%0d", t); end
      if (model.size() > 0) begin
        checks++;
        if (out_data !== model[0]) begin failures++; $display("FAIL data t=%0d", t); end
      end
      if (!in_ready) fulls++;
      pop = out_valid && $urandom_range(0, 1);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      #1;
      pop = 0;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL queue never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
