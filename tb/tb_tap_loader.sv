// tb_tap_loader -- checks loading of calibrated delay taps.
// The loader drives a delay-line model (the IODELAY2 model), so the tap the
// line ends up at is observed directly. For random tap values the line must
// end exactly at the value, the sequence must start with one RST, use CE and
// INC together, take 2 + 2N clocks, and report done only at the end. A load
// issued during a sequence restarts it with the new value.
`timescale 1ns / 1ps
module tb_tap_loader;
  import timing_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, dly_rst, dly_ce, dly_inc, done;
  logic [TAPW-1:0] tap = 0;
  logic dout, tout, busy;
  logic [7:0] tap_now;
  int checks = 0, failures = 0, nrst, nce;

  tap_loader dut (.clk, .rst_n, .load, .tap, .dly_rst, .dly_ce, .dly_inc, .done);
  iodelay2_model #(.ODELAY_VALUE(0)) line (.ODATAIN(1'b0), .T(1'b0), .CLK(clk), .CE(dly_ce), .INC(dly_inc),
                                           .RST(dly_rst), .CAL(1'b0), .DOUT(dout), .TOUT(tout), .BUSY(busy),
                                           .TAP_VALUE(tap_now));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    nrst += dly_rst; nce += dly_ce;
    if (dly_ce && !dly_inc) begin failures++; $display("FAIL: CE without INC"); end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, t;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(done, "idle after reset");
    for (int i = 0; i < 40; i++) begin
      n = (i == 0) ? 0 : (i == 1) ? 255 : $urandom_range(0, 255);
      // start from a non-zero tap so the RST is needed
      tap = TAPW'(n); nrst = 0; nce = 0;
      load = 1; @(negedge clk); load = 0;
      t = 1;
      while (!done) begin @(negedge clk); t++; end
      check(tap_now == 8'(n), $sformatf("line at tap %0d, expected %0d", tap_now, n));
      check(nrst == 1 && nce == n, $sformatf("%0d RST, %0d steps for tap %0d", nrst, nce, n));
      check(t == 2 + 2 * n, $sformatf("load of %0d took %0d clocks, expected %0d", n, t, 2 + 2 * n));
      repeat (3) @(negedge clk);
    end
    // restart in the middle
    tap = 200; load = 1; @(negedge clk); load = 0;
    repeat (50) @(negedge clk);
    tap = 17; load = 1; @(negedge clk); load = 0;
    while (!done) @(negedge clk);
    check(tap_now == 17, "restarted load ends at the new value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
