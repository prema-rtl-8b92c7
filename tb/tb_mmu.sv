// tb_mmu: programs random base/limit regions for all 16 ASIDs and checks
// random addresses (including the region edges) against a reference check;
// also checks that reset leaves every ASID without access.
module tb_mmu;
  import npu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_we; logic [3:0] cfg_asid, asid; logic [31:0] cfg_base, cfg_limit, addr; logic ok;
  logic [31:0] b[16], l[16];

  mmu dut (.clk, .rst_n, .cfg_we, .cfg_asid, .cfg_base, .cfg_limit, .asid, .addr, .ok);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_asid = 0; cfg_base = 0; cfg_limit = 0; asid = 0; addr = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int a = 0; a < 16; a++) begin
      asid = 4'(a); addr = $urandom; #1;
      checks++; if (ok) begin failures++; $display("FAIL reset asid %0d", a); end
    end
    for (int a = 0; a < 16; a++) begin
      cfg_we = 1; cfg_asid = 4'(a); cfg_base = $urandom_range(0, 100000); cfg_limit = $urandom_range(0, 5000);
      b[a] = cfg_base; l[a] = cfg_limit;
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int t = 0; t < 3000; t++) begin
      bit e;
      asid = 4'($urandom);
      case (t % 4)
        0: addr = b[asid];
        1: addr = b[asid] + l[asid];
        2: addr = b[asid] + l[asid] - 1;
        default: addr = $urandom_range(0, 110000);
      endcase
      #1;
      e = (addr >= b[asid]) && (longint'(addr) < longint'(b[asid]) + longint'(l[asid]));
      checks++;
      if (ok !== e) begin failures++; $display("FAIL asid %0d addr %0d", asid, addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
