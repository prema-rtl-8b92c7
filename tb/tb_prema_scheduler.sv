// tb_prema_scheduler: drives a table of tasks directly and checks
//  * the candidate choice (threshold = largest of 9/3/1 not above the largest
//    token, candidates at or above it, shortest Estimated among them),
//    including the worked example: largest token 8 -> threshold 3;
//  * the periodic token update Token += Priority * floor(Waited*256/Estimated)
//    written back for every valid entry.
// The testbench applies the scheduler's token writes to its table, as the
// context table would.
module tb_prema_scheduler;
  import npu_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ctx_entry_t entries[N];
  logic wake, period, busy, result, cand_valid, tok_we;
  logic [2:0] cand_idx, tok_idx;
  logic [63:0] tok_val;

  prema_scheduler #(.NUM_TASKS(N)) dut (.clk, .rst_n, .entries, .wake, .period, .busy, .result,
    .cand_valid, .cand_idx, .tok_we, .tok_idx, .tok_val);

  always @(posedge clk) if (tok_we) entries[tok_idx].token <= tok_val;

  function automatic int ref_pick();
    longint mx, th, be; int b;
    mx = 0; b = -1; be = 0;
    for (int i = 0; i < N; i++) if (entries[i].state.valid && longint'(entries[i].token) > mx) mx = entries[i].token;
    th = (mx >= 9 * 256) ? 9 * 256 : (mx >= 3 * 256) ? 3 * 256 : 256;
    for (int i = 0; i < N; i++)
      if (entries[i].state.valid && longint'(entries[i].token) >= th && (b < 0 || longint'(entries[i].estimated) < be)) begin
        b = i; be = entries[i].estimated;
      end
    return b;
  endfunction

  task automatic run(bit per);
    int cyc;
    @(posedge clk); #1; wake = 1; period = per;
    @(posedge clk); #1; wake = 0; period = 0;
    cyc = 0;
    while (!result && cyc < 20000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (!result) begin failures++; $display("FAIL no result"); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_c;
    longint exp_tok[N];
    wake = 0; period = 0;
    for (int i = 0; i < N; i++) entries[i] = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // worked example: tokens 8 (est 900), 3 (est 100), 1 (est 10)
    entries[0].state.valid = 1; entries[0].token = 8 * 256; entries[0].estimated = 900; entries[0].prio_tokens = 1;
    entries[1].state.valid = 1; entries[1].token = 3 * 256; entries[1].estimated = 100; entries[1].prio_tokens = 3;
    entries[2].state.valid = 1; entries[2].token = 1 * 256; entries[2].estimated = 10;  entries[2].prio_tokens = 1;
    run(0);
    checks++; if (!(cand_valid && cand_idx == 1)) begin failures++; $display("FAIL example: %0d", cand_idx); end
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) begin
        entries[i].state.valid = $urandom_range(0, 3) != 0;
        entries[i].prio_tokens = (i % 3 == 0) ? 9 : (i % 3 == 1) ? 3 : 1;
        entries[i].token = $urandom_range(256, 12 * 256);
        entries[i].estimated = $urandom_range(1, 100000);
        entries[i].waited = $urandom_range(0, 300000);
      end
      if (t % 2 == 0) begin
        exp_c = ref_pick();
        run(0);
      end else begin
        for (int i = 0; i < N; i++)
          exp_tok[i] = entries[i].state.valid ?
            longint'(entries[i].token) + longint'(entries[i].prio_tokens) * ((longint'(entries[i].waited) * 256) / longint'(entries[i].estimated))
            : longint'(entries[i].token);
        run(1);
        for (int i = 0; i < N; i++) begin
          checks++;
          if (longint'(entries[i].token) != exp_tok[i]) begin failures++; $display("FAIL token %0d got %0d exp %0d", i, entries[i].token, exp_tok[i]); end
        end
        exp_c = ref_pick();   // selection uses the updated tokens
      end
      checks++;
      if (exp_c < 0) begin
        if (cand_valid) begin failures++; $display("FAIL cand on empty table"); end
      end else if (!cand_valid || cand_idx != 3'(exp_c)) begin
        failures++; $display("FAIL t=%0d cand got %0d exp %0d", t, cand_idx, exp_c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
