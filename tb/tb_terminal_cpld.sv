// tb_terminal_cpld -- checks both terminal variants: the standard unit
// (2 inputs, one output each, fibre re-send from the electrical inputs) and
// the high-fanout unit (1 input to 10 outputs, fibre re-send of the input).
// Outputs must follow the inputs with no clock involved; the LED must light
// within a few clocks of a rising input edge and go out LED_HOLD clocks later.
`timescale 1ns / 1ps
module tb_terminal_cpld;
  localparam int HOLD = 20;
  logic clk = 0, rst_n = 0;
  logic [1:0] s_fin = 0, s_lin = 0, s_lout, s_fout;
  logic f_fin = 0, f_fout, s_led, f_led;
  logic [9:0] f_lout;
  int checks = 0, failures = 0;

  terminal_cpld #(.N_IN(2), .FANOUT(1), .REPEAT_ELECTRICAL(1'b1), .LED_HOLD(HOLD)) std_u (
    .clk, .rst_n, .fiber_in(s_fin), .lemo_in(s_lin), .lemo_out(s_lout), .fiber_out(s_fout), .led(s_led));
  terminal_cpld #(.N_IN(1), .FANOUT(10), .REPEAT_ELECTRICAL(1'b0), .LED_HOLD(HOLD)) fan_u (
    .clk, .rst_n, .fiber_in(f_fin), .lemo_in(1'b0), .lemo_out(f_lout), .fiber_out(f_fout), .led(f_led));

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int on_at, off_at, n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // combinational paths, at arbitrary times between clock edges
    for (int i = 0; i < 100; i++) begin
      #($urandom_range(1, 7));
      s_fin = 2'($urandom); s_lin = 2'($urandom); f_fin = 1'($urandom);
      #0.1;
      check(s_lout == s_fin && s_fout == s_lin, "standard unit 1:1 and re-send");
      check(f_lout == {10{f_fin}} && f_fout == f_fin, "fanout unit 1:10 and re-send");
    end
    s_fin = 0; f_fin = 0;
    repeat (HOLD + 10) @(negedge clk);
    check(!s_led && !f_led, "LEDs off when quiet");
    // LED pulse stretch
    s_fin[1] = 1; f_fin = 1; @(negedge clk); s_fin[1] = 0; f_fin = 0;
    n = 0;
    while (!s_led && n < 10) begin @(negedge clk); n++; end
    check(n <= 3, $sformatf("LED lights %0d clocks after the edge", n));
    n = 0;
    while (s_led && n < 100) begin @(negedge clk); n++; end
    check(n >= HOLD - 1 && n <= HOLD + 1, $sformatf("LED held %0d clocks, expected %0d", n, HOLD));
    check(!f_led, "fanout LED went out too");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
