// tb_context_table: allocates entries from random requests and checks the
// initial fields (tokens 1/3/9 per priority level), the per-cycle Executed /
// Waited accounting, token and state writes, KILL's Executed clear, freeing
// and the lowest-free-entry search, against a reference model.
module tb_context_table;
  import npu_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic alloc, free, tok_we, st_we, st_set_pcs, st_clear_exec, run_valid, any_free;
  logic [1:0] alloc_idx, free_idx_in, tok_idx, st_idx, run_idx, free_idx;
  task_req_t alloc_req; logic [63:0] tok_val; task_status_e st_status;
  logic [11:0] st_resume_pc, st_restore_pc;
  ctx_entry_t entries[N];

  context_table #(.NUM_TASKS(N)) dut (.clk, .rst_n, .alloc, .alloc_idx, .alloc_req, .free, .free_idx_in,
    .tok_we, .tok_idx, .tok_val, .st_we, .st_idx, .st_status, .st_set_pcs, .st_resume_pc, .st_restore_pc,
    .st_clear_exec, .run_valid, .run_idx, .entries, .any_free, .free_idx);

  // reference
  bit          v[N];
  longint      ex[N], wt[N], es[N], pr[N], tk[N];
  int          stt[N];

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc = 0; free = 0; tok_we = 0; st_we = 0; st_set_pcs = 0; st_clear_exec = 0; run_valid = 0;
    alloc_idx = 0; free_idx_in = 0; tok_idx = 0; st_idx = 0; run_idx = 0; alloc_req = '0; tok_val = 0;
    st_status = ST_READY; st_resume_pc = 0; st_restore_pc = 0;
    for (int i = 0; i < N; i++) begin v[i] = 0; ex[i] = 0; wt[i] = 0; es[i] = 0; pr[i] = 0; tk[i] = 0; stt[i] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int fi;
      // expected lowest free
      fi = -1;
      for (int i = N - 1; i >= 0; i--) if (!v[i]) fi = i;
      chk(any_free == (fi >= 0), "any_free");
      if (fi >= 0) chk(free_idx == 2'(fi), "free_idx");
      // random operations (distinct entries)
      alloc = (fi >= 0) && ($urandom_range(0, 3) == 0);
      alloc_idx = 2'(fi);
      alloc_req = task_req_t'({$urandom, $urandom, $urandom, $urandom});
      alloc_req.prio = prio_e'($urandom_range(0, 2));
      run_valid = $urandom_range(0, 1); run_idx = 2'($urandom);
      tok_we = $urandom_range(0, 1); tok_idx = 2'($urandom); tok_val = {$urandom, $urandom};
      st_we = $urandom_range(0, 1); st_idx = 2'($urandom); st_status = task_status_e'($urandom_range(0, 2));
      st_clear_exec = $urandom_range(0, 1); st_set_pcs = $urandom_range(0, 1);
      free = ($urandom_range(0, 7) == 0); free_idx_in = 2'($urandom);
      if (alloc && (tok_idx == alloc_idx)) tok_we = 0;
      if (alloc && (st_idx == alloc_idx)) st_we = 0;
      if (alloc && (free_idx_in == alloc_idx)) free = 0;
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (alloc && alloc_idx == 2'(i)) begin
          v[i] = 1; ex[i] = 0; wt[i] = 0; es[i] = alloc_req.estimated;
          pr[i] = (alloc_req.prio == PRIO_HIGH) ? 9 : (alloc_req.prio == PRIO_MED) ? 3 : 1;
          tk[i] = pr[i] * 256; stt[i] = ST_READY;
        end else if (v[i]) begin
          if (run_valid && run_idx == 2'(i)) ex[i]++; else wt[i]++;
          if (tok_we && tok_idx == 2'(i)) tk[i] = tok_val;
          if (st_we && st_idx == 2'(i)) begin stt[i] = st_status; if (st_clear_exec) ex[i] = 0; end
          if (free && free_idx_in == 2'(i)) v[i] = 0;
        end
      end
      #1;
      for (int i = 0; i < N; i++) begin
        chk(entries[i].state.valid == v[i], $sformatf("valid %0d", i));
        if (v[i]) begin
          chk(entries[i].executed == 64'(ex[i]), $sformatf("executed %0d", i));
          chk(entries[i].waited == 64'(wt[i]), $sformatf("waited %0d", i));
          chk(entries[i].estimated == 64'(es[i]), "estimated");
          chk(entries[i].prio_tokens == 64'(pr[i]), "priority");
          chk(entries[i].token == 64'(tk[i]), "token");
          chk(int'(entries[i].state.status) == stt[i], "status");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
