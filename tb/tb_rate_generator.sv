// tb_rate_generator -- checks the repetition-rate divider.
// Runs with a 1 kHz "core clock" so that every menu rate is a short period
// (1 Hz = 1000 clocks ... 100 Hz = 10 clocks). For each rate select the
// spacing of consecutive ticks is measured against 1000/f; the custom period,
// the re-phasing by sync (first tick exactly one period after the sync
// cycle) and a period shortened mid-count are checked too.
`timescale 1ns / 1ps
module tb_rate_generator;
  import timing_pkg::*;

  localparam int unsigned CLK_HZ = 1000;

  logic clk = 0, rst_n = 0, sync = 0, tick;
  rate_cfg_t cfg;
  logic [PW-1:0] period;
  int checks = 0, failures = 0;
  longint cyc = 0;

  rate_generator #(.CLK_HZ(CLK_HZ)) dut (.clk, .rst_n, .cfg, .sync, .tick, .period);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // wait for the next tick, return the cycle number it was seen in
  task automatic next_tick(output longint at);
    do @(posedge clk); while (!tick);
    at = cyc;
    @(negedge clk);
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1, t2, s;
    int hz [7] = '{1, 5, 10, 20, 25, 50, 100};
    cfg = '{sel: RATE_100HZ, custom_period: '0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // first tick P-1 clocks after reset release
    s = cyc;
    next_tick(t0);
    check(t0 - s == 9, $sformatf("first tick after reset at +%0d, expected +9", t0 - s));
    for (int i = 0; i < 7; i++) begin
      cfg.sel = rate_sel_e'(i);
      next_tick(t0);            // period boundary under the new setting
      next_tick(t1);
      next_tick(t2);
      check(t1 - t0 == CLK_HZ / hz[i] && t2 - t1 == CLK_HZ / hz[i],
            $sformatf("rate %0d Hz: spacing %0d/%0d, expected %0d", hz[i], t1 - t0, t2 - t1, CLK_HZ / hz[i]));
      check(period == PW'(CLK_HZ / hz[i]), "period read-back");
    end
    // custom period
    cfg = '{sel: RATE_CUSTOM, custom_period: 37};
    next_tick(t0); next_tick(t1); next_tick(t2);
    check(t1 - t0 == 37 && t2 - t1 == 37, $sformatf("custom period %0d", t2 - t1));
    // sync re-phase
    repeat (11) @(negedge clk);
    sync = 1; s = cyc; @(negedge clk); sync = 0;
    next_tick(t0);
    check(t0 - s == 37, $sformatf("tick %0d clocks after sync, expected 37", t0 - s));
    // shorten the period while the count is beyond the new end
    cfg = '{sel: RATE_CUSTOM, custom_period: 200};
    repeat (50) @(negedge clk);
    check(!tick, "no tick mid-period");
    cfg.custom_period = 20;
    #1 check(tick, "period shortened below the count ends the period at once");
    next_tick(t0); next_tick(t1);
    check(t1 - t0 == 20, "shortened period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
