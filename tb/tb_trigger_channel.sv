// tb_trigger_channel -- checks delay, width, gating and burst counting.
// A reference model written from the timing rule alone (with the tick in
// cycle t the output is high in cycles t+1+delay .. t+delay+width, and the
// latest tick decides) predicts the output in every cycle; random delays,
// widths and tick spacings, including ticks that cut a pulse short, are
// compared cycle by cycle. Burst mode must give exactly burst_count pulses
// per arm, off mode none, and the pulse counter must match.
`timescale 1ns / 1ps
module tb_trigger_channel;
  import timing_pkg::*;

  logic clk = 0, rst_n = 0, tick = 0, arm = 0, trig;
  ch_cfg_t cfg;
  logic [31:0] pulses;
  int checks = 0, failures = 0, mism = 0;
  longint cyc = 0;

  // reference model state
  longint last_tick = -1000;
  bit     last_fired = 0;
  int     ref_budget = 0;
  int     ref_pulses = 0;

  trigger_channel dut (.clk, .rst_n, .cfg, .tick, .arm, .trig, .pulses);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one clock: apply tick/arm, update the model, compare the output
  task automatic step(input bit t, input bit a = 0);
    bit fire;
    tick = t; arm = a;
    fire = t && cfg.width != 0 &&
           (cfg.mode == CH_CONT || (cfg.mode == CH_BURST && ref_budget > 0));
    @(posedge clk);
    cyc++;
    if (a) begin ref_budget = cfg.burst_count; ref_pulses = 0; end
    if (t) begin
      last_tick  = cyc - 1;
      last_fired = fire;
      if (fire) begin
        ref_pulses++;
        if (cfg.mode == CH_BURST && !a) ref_budget--;
      end
    end
    #1;
    begin
      bit exp_out;
      exp_out = last_fired && cfg.mode != CH_OFF &&
                (cyc >= last_tick + 1 + cfg.delay) && (cyc <= last_tick + cfg.delay + cfg.width);
      if (trig !== exp_out) begin
        mism++;
        if (mism < 10) $display("FAIL: cycle %0d trig=%0d expected %0d (d=%0d w=%0d tick@%0d)",
                                cyc, trig, exp_out, cfg.delay, cfg.width, last_tick);
      end
    end
    tick = 0; arm = 0;
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, w, gap, np;
    cfg = '{delay: 0, width: 0, mode: CH_OFF, burst_count: 0, group: 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // directed: delay 0 width 1, delay 3 width 4, width 0
    cfg.mode = CH_CONT;
    cfg.delay = 0; cfg.width = 1; step(1); repeat (5) step(0);
    cfg.delay = 3; cfg.width = 4; step(1); repeat (10) step(0);
    cfg.width = 0; step(1); repeat (6) step(0);

    // random continuous pulses; spacing sometimes shorter than delay + width
    for (int i = 0; i < 300; i++) begin
      d = $urandom_range(0, 40); w = $urandom_range(0, 40); gap = $urandom_range(1, 100);
      cfg.delay = DW'(d); cfg.width = DW'(w);
      step(1);
      for (int k = 0; k < gap; k++) step(0);
    end
    checks++;
    if (mism != 0) begin failures++; $display("FAIL: %0d cycle mismatches in continuous mode", mism); end

    // burst of 3: five ticks, three pulses
    mism = 0;
    cfg.delay = 2; cfg.width = 3; cfg.mode = CH_BURST; cfg.burst_count = 3;
    step(0, 1);
    np = 0;
    for (int i = 0; i < 5; i++) begin
      step(1);
      for (int k = 0; k < 9; k++) begin step(0); if (k == 3 && trig) np++; end
    end
    check(np == 3, $sformatf("burst of 3 gave %0d pulses", np));
    check(pulses == 32'(ref_pulses) && pulses == 3, $sformatf("pulse counter %0d", pulses));
    // re-arm gives another burst
    cfg.burst_count = 2;
    step(0, 1);
    np = 0;
    for (int i = 0; i < 4; i++) begin
      step(1);
      for (int k = 0; k < 9; k++) begin step(0); if (k == 3 && trig) np++; end
    end
    check(np == 2, $sformatf("re-armed burst of 2 gave %0d pulses", np));
    check(pulses == 2, "pulse counter after re-arm");
    check(mism == 0, $sformatf("%0d cycle mismatches in burst mode", mism));

    // off mode: ticks give nothing, and switching off kills a pending pulse
    mism = 0;
    cfg.mode = CH_CONT; cfg.delay = 5; cfg.width = 20; step(1); repeat (8) step(0);
    cfg.mode = CH_OFF;
    np = 0;
    for (int i = 0; i < 5; i++) begin
      step(1);
      for (int k = 0; k < 30; k++) begin step(0); np += trig; end
    end
    check(np == 0, "off mode is silent");
    check(mism == 0, "off mode model agreement");

    // long pulse at full scale: 10 ms width = 1,000,000 ticks at 10 ns
    cfg.mode = CH_CONT; cfg.delay = 0; cfg.width = 1_000_000;
    step(1); np = int'(trig);
    for (int k = 0; k < 1_000_010; k++) begin step(0); np += trig; end
    check(np == 1_000_000, $sformatf("10 ms pulse is %0d ticks", np));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
