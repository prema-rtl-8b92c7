// tb_mechanism_select: random current/candidate times checked against the
// division form of the degradation comparison (real arithmetic), plus the
// static modes and two hand cases: a current task near its end facing a long
// candidate drains; a short candidate facing a long current task preempts.
module tb_mechanism_select;
  import npu_pkg::*;
  int checks = 0, failures = 0;
  mech_mode_e mode; logic [63:0] ce, cx, de, dx; mech_e mech;

  mechanism_select dut (.mode, .cur_estimated(ce), .cur_executed(cx), .cand_estimated(de), .cand_executed(dx), .mech);

  task automatic expect_m(mech_e e, string what);
    #1; checks++;
    if (mech !== e) begin failures++; $display("FAIL %s: got %0d exp %0d", what, mech, e); end
  endtask

  initial begin
    mode = MODE_DYNAMIC;
    ce = 1000; cx = 950; de = 5000; dx = 0; expect_m(MECH_DRAIN, "near end");
    ce = 100000; cx = 1000; de = 500; dx = 0; expect_m(MECH_CHECKPOINT, "short candidate");
    for (int t = 0; t < 3000; t++) begin
      real rc, rd, dc, dd;
      ce = $urandom_range(1, 2000000); cx = $urandom_range(0, 2100000);
      de = $urandom_range(1, 2000000); dx = (t % 2) ? 0 : $urandom_range(0, 2100000);
      rc = (cx >= ce) ? 0.0 : real'(ce - cx);
      rd = (dx >= de) ? 0.0 : real'(de - dx);
      dc = rd / real'(ce);   // Degradation_current
      dd = rc / real'(de);   // Degradation_candidate
      mode = MODE_DYNAMIC;
      if (dc != dd) expect_m((dc > dd) ? MECH_DRAIN : MECH_CHECKPOINT, "dynamic");
      mode = MODE_CHECKPOINT; expect_m(MECH_CHECKPOINT, "static ckpt");
      mode = MODE_KILL;       expect_m(MECH_KILL, "static kill");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
