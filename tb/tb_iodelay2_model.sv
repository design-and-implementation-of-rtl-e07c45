// tb_iodelay2_model -- checks the delay-line model: tap stepping (RST to the
// initial value, INC/DEC with CE, saturation at 0 and 255) and that each
// output edge appears tap * 200 ps after the input edge.
`timescale 1ns / 1ps
module tb_iodelay2_model;
  logic clk = 0, ce = 0, inc = 0, rst = 0, din = 0, dout, tout, busy;
  logic [7:0] tap;
  int checks = 0, failures = 0;

  iodelay2_model #(.ODELAY_VALUE(3), .TAP_PS(200)) dut (.ODATAIN(din), .T(1'b0), .CLK(clk), .CE(ce), .INC(inc),
                                                        .RST(rst), .CAL(1'b0), .DOUT(dout), .TOUT(tout), .BUSY(busy),
                                                        .TAP_VALUE(tap));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic stepn(input int n, input bit up);
    repeat (n) begin @(negedge clk); ce = 1; inc = up; @(negedge clk); ce = 0; end
  endtask

  // measure the delay of a rising and a falling edge, in ps
  task automatic measure(input int exp_ps);
    realtime t0, t1;
    @(negedge clk); #1;
    din = 1; t0 = $realtime;
    @(posedge dout); t1 = $realtime;
    check(int'((t1 - t0) * 1000.0) == exp_ps, $sformatf("rise delay %0.3f ns, expected %0d ps", t1 - t0, exp_ps));
    #40;
    din = 0; t0 = $realtime;
    @(negedge dout); t1 = $realtime;
    check(int'((t1 - t0) * 1000.0) == exp_ps, $sformatf("fall delay %0.3f ns, expected %0d ps", t1 - t0, exp_ps));
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    check(tap == 3, "initial tap");
    measure(600);
    stepn(10, 1); check(tap == 13, "10 steps up");
    measure(2600);
    stepn(5, 0); check(tap == 8, "5 steps down");
    measure(1600);
    @(negedge clk); rst = 1; @(negedge clk); rst = 0;
    check(tap == 3, "RST back to ODELAY_VALUE");
    stepn(10, 0); check(tap == 0, "saturates at 0");
    measure(0);
    stepn(260, 1); check(tap == 255, "saturates at 255");
    measure(51000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
