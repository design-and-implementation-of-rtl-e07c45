// tb_iddr2_model -- checks the input DDR register model: a line changing
// every half period is captured as a pair per C0 clock, Q1 the sample taken
// at the C1 edge before, Q0 the sample at the C0 edge.
`timescale 1ns / 1ps
module tb_iddr2_model;
  logic clk = 0, d = 0, ce = 1, r = 0, q0, q1;
  int checks = 0, failures = 0;
  bit hb [$];

  iddr2_model dut (.D(d), .C0(clk), .C1(~clk), .CE(ce), .R(r), .Q0(q0), .Q1(q1));
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

  // line: a new half-bit 2.5 ns after each clock edge, so each is sampled mid-bit
  initial begin
    bit a, b;
    @(posedge clk);
    for (int i = 0; i < 60; i++) begin
      a = 1'($urandom); b = 1'($urandom);
      #2.5 d = a;            // half-bit sampled by the C1 (falling) edge
      @(negedge clk);
      #2.5 d = b;            // half-bit sampled by the next C0 (rising) edge
      @(posedge clk); #1;
      if (i > 0) check(q1 == a && q0 == b, $sformatf("pair %0d: %0d%0d expected %0d%0d", i, q1, q0, a, b));
    end
    r = 1; @(posedge clk); #1 check(q0 == 0 && q1 == 0, "reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
