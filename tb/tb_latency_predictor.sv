// tb_latency_predictor: feeds random layer shapes (with and without partial
// edge tiles, and repeated recurrent nodes) and checks the accumulated
// estimate against an independent evaluation of the prediction formulas,
// plus two hand-computed cases for the default 128 x 128 x 128 geometry:
// one 128x128x128 layer = 1 inner tile = 128+128+256 = 512 cycles, and
// n = 200 adds one outer tile of 72+128+256 = 456 cycles.
module tb_latency_predictor;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, layer_valid; logic [31:0] m, k, n; logic [15:0] reps; logic [63:0] time_estimated;

  latency_predictor dut (.clk, .rst_n, .clear, .layer_valid, .m, .k, .n, .reps, .time_estimated);

  function automatic longint model(longint mm, longint kk, longint nn, longint rr);
    longint SH = 128, SW = 128, ACC = 128, BW = 255;
    longint c1, m1, ti, r, c2, m2, to, phi;
    c1 = ACC + SH + 2 * SW; m1 = (SH * SW + SH * ACC) / BW; ti = (c1 > m1) ? c1 : m1;
    r = nn % ACC; c2 = r + SH + 2 * SW; m2 = (SH * SW + SH * r) / BW; to = (c2 > m2) ? c2 : m2;
    phi = (r != 0);
    return rr * ((mm / SW) * (kk / SH) * (nn / ACC) * ti + (mm / SW) * (kk / SH) * phi * to);
  endfunction

  task automatic push(longint mm, longint kk, longint nn, longint rr);
    m = 32'(mm); k = 32'(kk); n = 32'(nn); reps = 16'(rr); layer_valid = 1;
    @(posedge clk); #1; layer_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp;
    clear = 0; layer_valid = 0; m = 0; k = 0; n = 0; reps = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    push(128, 128, 128, 1);
    checks++; if (time_estimated != 512) begin failures++; $display("FAIL 1 tile: %0d", time_estimated); end
    clear = 1; @(posedge clk); #1 clear = 0;
    push(128, 128, 200, 1);
    checks++; if (time_estimated != 512 + 456) begin failures++; $display("FAIL edge tile: %0d", time_estimated); end
    for (int net = 0; net < 50; net++) begin
      clear = 1; @(posedge clk); #1 clear = 0;
      exp = 0;
      for (int l = 0; l < 10; l++) begin
        longint mm, kk, nn, rr;
        mm = $urandom_range(1, 4096); kk = $urandom_range(1, 4096); nn = $urandom_range(1, 50000);
        rr = (l % 3 == 0) ? $urandom_range(1, 60) : 1;
        push(mm, kk, nn, rr);
        exp += model(mm, kk, nn, rr);
      end
      checks++;
      if (time_estimated != 64'(exp)) begin failures++; $display("FAIL net %0d got %0d exp %0d", net, time_estimated, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
