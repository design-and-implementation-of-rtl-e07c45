// tb_oddr2_model -- checks the output DDR register model: D0 appears for the
// half period after the C0 edge and D1 for the half after the C1 edge, CE
// holds, R and S force; with D0 = D1 it behaves as a plain output register.
`timescale 1ns / 1ps
module tb_oddr2_model;
  logic clk = 0, d0 = 0, d1 = 0, ce = 1, r = 0, s = 0, q;
  int checks = 0, failures = 0;

  oddr2_model dut (.D0(d0), .D1(d1), .C0(clk), .C1(~clk), .CE(ce), .R(r), .S(s), .Q(q));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic a, b;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 50; i++) begin
      a = 1'($urandom); b = 1'($urandom);
      @(negedge clk); #1 d0 = a; d1 = b;
      @(posedge clk); #2 check(q == a, $sformatf("first half: %0d expected %0d", q, a));
      @(negedge clk); #2 check(q == b, $sformatf("second half: %0d expected %0d", q, b));
    end
    // clock forwarding
    d0 = 1; d1 = 0;
    repeat (5) begin @(posedge clk); #2 check(q == 1, "forwarded clock high"); @(negedge clk); #2 check(q == 0, "forwarded clock low"); end
    // CE low holds the last captured values
    @(posedge clk); #1 ce = 0; d0 = 0; d1 = 1;
    repeat (3) begin @(posedge clk); #2 check(q == 1, "CE low: D0 held"); @(negedge clk); #2 check(q == 0, "CE low: D1 held"); end
    ce = 1;
    // R and S
    r = 1; @(posedge clk); #2 check(q == 0, "reset"); @(negedge clk); #2 check(q == 0, "reset");
    r = 0; s = 1; @(posedge clk); #2 check(q == 1, "set"); @(negedge clk); #2 check(q == 1, "set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
