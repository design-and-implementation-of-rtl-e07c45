// tb_timing_system_full -- end-to-end test of two linked core logic boards at the
// design's default size (80 channels each, 100 MHz core clock, 115200 baud),
// with the boards' parameters left at their defaults.
//
// Board A is the master, board B the slave of the board-to-board link; B's
// forwarded clock is A's clock, so both run on one clock here, and the two
// fibres are modelled as fixed delays. A serial-line model in the testbench
// configures both boards byte by byte, exactly as the control system would.
// Checked at the output pins, against times worked out from the register
// values alone:
//   - rise = tick edge + (delay + 0.5) clocks + tap * 200 ps, width exact;
//   - two channels with equal delay differ by their tap difference (fine delay);
//   - a 100 Hz train with 9.9 ms width (the paper's long-gate demonstration);
//   - a pulse longer than the period is cut at the next tick (restart);
//   - a burst of 2, read back over the serial port;
//   - an off channel stays silent;
//   - the second rate group at its own (custom) period, and a rate switch;
//   - after a sync sent over the link, B's ticks sit at a fixed offset from
//     A's whatever their phase before, for two syncs from different phases;
//   - the remote terminals, fed from A's outputs over a fibre delay, repeat
//     every pulse (1:1 and 1:10).
// Each mechanism is counted and one that never happened counts a failure.
`timescale 1ns / 1ps
module tb_timing_system_full;
  import timing_pkg::*;

  localparam int unsigned CLK_HZ = 100_000_000;
  localparam int unsigned BAUD   = 115_200;
  localparam int unsigned NCH    = 80;
  localparam realtime TCLK = 1.0e9 / CLK_HZ;       // core clock period, ns
  localparam realtime TBIT = 1.0e9 / BAUD;         // serial bit time, ns
  localparam int P100 = CLK_HZ / 100;              // 100 Hz period in ticks
  localparam int CH_HI = NCH - 1;                  // highest channel
  localparam realtime FIBRE = 23.7;                // fibre + transceivers, ns

  logic clk = 0, rst_a = 0, rst_b = 0, term_clk = 0;
  logic [1:0] urx = 2'b11, utx;
  logic rf_a, rf_b, tx_a, tx_b, ok_a, ok_b;
  logic rx_a = 0, rx_b = 0;
  logic [(NCH+15)/16-1:0][15:0] j2_a, j2_b;
  logic [1:0] std_in = 0, std_lout, std_fout, b_std_lout, b_std_fout;
  logic fan_in = 0, fan_fout, b_fan_fout, std_led, fan_led, b_std_led, b_fan_led;
  logic [9:0] fan_lout, b_fan_lout;

  int checks = 0, failures = 0;

  timing_system dut_a (
    .clk, .rst_n(rst_a), .uart_rx(urx[0]), .uart_tx(utx[0]), .rf_clk_sel(rf_a), .j2_out(j2_a),
    .sfp_tx(tx_a), .sfp_rx(rx_a), .sfp_link_ok(ok_a), .term_clk,
    .term_std_fiber_in(std_in), .term_std_lemo_in(2'b00), .term_std_lemo_out(std_lout),
    .term_std_fiber_out(std_fout), .term_std_led(std_led), .term_fan_fiber_in(fan_in),
    .term_fan_lemo_out(fan_lout), .term_fan_fiber_out(fan_fout), .term_fan_led(fan_led));

  timing_system dut_b (
    .clk, .rst_n(rst_b), .uart_rx(urx[1]), .uart_tx(utx[1]), .rf_clk_sel(rf_b), .j2_out(j2_b),
    .sfp_tx(tx_b), .sfp_rx(rx_b), .sfp_link_ok(ok_b), .term_clk,
    .term_std_fiber_in(2'b00), .term_std_lemo_in(2'b00), .term_std_lemo_out(b_std_lout),
    .term_std_fiber_out(b_std_fout), .term_std_led(b_std_led), .term_fan_fiber_in(1'b0),
    .term_fan_lemo_out(b_fan_lout), .term_fan_fiber_out(b_fan_fout), .term_fan_led(b_fan_led));

  always #(TCLK / 2) clk = ~clk;
  always #10 term_clk = ~term_clk;

  // fibres: A's reset stream to B, B's clock stream to A; A's output 0 and 1
  // to the remote terminals
  always @(tx_a) rx_b <= #(FIBRE) tx_a;
  always @(tx_b) rx_a <= #(FIBRE) tx_b;
  always @(j2_a[0][0]) std_in[0] <= #(FIBRE) j2_a[0][0];
  always @(j2_a[0][1]) fan_in    <= #(FIBRE) j2_a[0][1];

  function automatic bit near(input realtime a, input realtime b);
    return (a - b < 0.001) && (b - a < 0.001);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- serial line model ----------------
  logic [7:0] rxq [2][$];

  task automatic uart_send(input int b, input logic [7:0] v);
    urx[b] = 0; #(TBIT);
    for (int i = 0; i < 8; i++) begin urx[b] = v[i]; #(TBIT); end
    urx[b] = 1; #(TBIT);
  endtask

  for (genvar b = 0; b < 2; b++) begin : g_mon
    initial forever begin
      logic [7:0] v;
      @(negedge utx[b]);
      #(TBIT * 1.5);
      for (int i = 0; i < 8; i++) begin v[i] = utx[b]; #(TBIT); end
      rxq[b].push_back(v);
    end
  end

  int n_writes = 0, n_reads = 0;

  task automatic wr(input int b, input logic [15:0] a, input logic [31:0] d);
    rxq[b].delete();
    uart_send(b, CMD_WRITE); uart_send(b, a[15:8]); uart_send(b, a[7:0]);
    uart_send(b, d[31:24]); uart_send(b, d[23:16]); uart_send(b, d[15:8]); uart_send(b, d[7:0]);
    #(TBIT * 12);
    check(rxq[b].size() == 1 && rxq[b][0] == RSP_ACK, $sformatf("board %0d write %04h acknowledged", b, a));
    n_writes++;
  endtask

  task automatic rd(input int b, input logic [15:0] a, output logic [31:0] d);
    rxq[b].delete();
    uart_send(b, CMD_READ); uart_send(b, a[15:8]); uart_send(b, a[7:0]);
    #(TBIT * 45);
    check(rxq[b].size() == 4, "read reply length");
    d = {rxq[b][0], rxq[b][1], rxq[b][2], rxq[b][3]};
    n_reads++;
  endtask

  function automatic logic [15:0] cha(input int c, input int off);
    return 16'(A_CH_BASE + 8 * c + off);
  endfunction

  // ---------------- observation ----------------
  realtime tick_a [2], tick_b [2];    // time of the clock edge ending the latest tick cycle
  int n_tick_a [2] = '{0, 0}, n_tick_b = 0;
  always @(posedge clk) begin
    for (int g = 0; g < 2; g++) if (dut_a.tick[g]) begin tick_a[g] = $realtime; n_tick_a[g]++; end
    if (dut_b.tick[0]) begin tick_b[0] = $realtime; n_tick_b++; end
  end

  // pin edges of the channels under test
  localparam int NW = 8;
  int      wch [NW] = '{0, 1, 5, 6, 17, 30, CH_HI, 2};
  realtime rise [NW], fall [NW], rise_tick [NW];
  realtime wid [NW], rdel [NW];                    // last completed pulse: width, rise after tick
  int      nrise [NW] = '{default: 0};

  for (genvar k = 0; k < NW; k++) begin : g_watch
    initial forever begin
      @(posedge j2_a[wch[k] / 16][wch[k] % 16]);
      rise[k] = $realtime; rise_tick[k] = tick_a[dut_a.u_regs.ch_cfg[wch[k]].group];
      if ($realtime > 100.0 * TCLK) nrise[k]++;   // ignore power-up values before reset has acted
      @(negedge j2_a[wch[k] / 16][wch[k] % 16]);
      fall[k] = $realtime;
      wid[k]  = fall[k] - rise[k];
      rdel[k] = rise[k] - rise_tick[k];
    end
  end

  // expected rise time of channel slot k after its tick edge
  // (the output DDR register forwards the channel's register half a clock later)
  function automatic realtime exp_rise(input int d, input int tap);
    return (d + 0.5) * TCLK + tap * 0.2;
  endfunction

  // terminal repeats
  int n_std = 0, n_fan = 0, n_src0 = 0, n_src1 = 0;
  always @(posedge j2_a[0][0]) n_src0++;
  always @(posedge j2_a[0][1]) n_src1++;
  always @(posedge std_lout[0]) n_std++;
  always @(posedge fan_lout[9]) n_fan++;
  always @(fan_lout) if (fan_lout != {10{fan_lout[0]}}) begin failures++; $display("FAIL: fanout outputs differ"); end

  // ---------------- watchdog ----------------
  initial begin
    #300_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test ----------------
  int n_fine = 0, n_long = 0, n_cut = 0, n_burst = 0, n_off = 0, n_group = 0, n_switch = 0,
      n_sync = 0, n_taps = 0, n_pulse = 0;

  task automatic wait_ticks(input int n);
    repeat (n) @(posedge clk iff dut_a.tick[0]);
  endtask

  initial begin
    logic [31:0] d;
    realtime off1, off2, offp;
    int r0;

    #(TCLK * 3.3) rst_a = 1;
    #(TCLK * 1234) rst_b = 1;         // B starts out of phase with A

    // --- configuration, both boards in parallel
    fork
      begin   // board B: slave, 100 Hz, channel 0 as a reference output
        wr(1, A_CTRL, 32'h0);
        wr(1, A_GRP_BASE, RATE_100HZ);
        wr(1, cha(0, O_DELAY), 300); wr(1, cha(0, O_WIDTH), 40); wr(1, cha(0, O_MODE), CH_CONT);
      end
      begin   // board A
        wr(0, A_GRP_BASE, RATE_100HZ);
        wr(0, cha(0, O_DELAY), 100);  wr(0, cha(0, O_WIDTH), 50);  wr(0, cha(0, O_MODE), CH_CONT);
        wr(0, cha(1, O_DELAY), 100);  wr(0, cha(1, O_WIDTH), 50);  wr(0, cha(1, O_TAP), 5);
        wr(0, cha(1, O_MODE), CH_CONT);
        wr(0, cha(5, O_WIDTH), P100 / 100 * 99); wr(0, cha(5, O_MODE), CH_CONT);   // 9.9 ms at 100 Hz
        wr(0, cha(6, O_DELAY), P100 / 20); wr(0, cha(6, O_WIDTH), P100 / 100 * 99); wr(0, cha(6, O_MODE), CH_CONT);
        wr(0, cha(17, O_DELAY), 7); wr(0, cha(17, O_WIDTH), 3); wr(0, cha(17, O_BURST), 2);
        wr(0, cha(17, O_MODE), CH_BURST);
        wr(0, cha(30, O_DELAY), 10); wr(0, cha(30, O_WIDTH), 10);                 // left off
        wr(0, A_GRP_BASE + 3, 5000); wr(0, A_GRP_BASE + 2, RATE_CUSTOM);          // group 1: 20 kHz custom
        wr(0, cha(CH_HI, O_GROUP), 1); wr(0, cha(CH_HI, O_DELAY), 1234); wr(0, cha(CH_HI, O_WIDTH), 77);
        wr(0, cha(CH_HI, O_TAP), 12); wr(0, cha(CH_HI, O_MODE), CH_CONT);
        wr(0, A_CTRL, 32'b1001);                                                  // master, load taps
      end
    join
    rd(0, A_STATUS, d);
    check(d[0], "taps loaded");
    check(dut_a.g_ch[1].u_dly.TAP_VALUE == 5 && dut_a.g_ch[CH_HI].u_dly.TAP_VALUE == 12 &&
          dut_a.g_ch[0].u_dly.TAP_VALUE == 0, "delay lines hold the loaded taps");
    n_taps++;

    // --- link up, phases before the sync
    check(ok_a && ok_b, "both link supervisors see the clock stream");
    wait_ticks(1); #1;
    @(posedge clk iff dut_b.tick[0]); #1;
    offp = tick_b[0] - tick_a[0];

    // --- sync from A
    wr(0, A_CTRL, 32'b0101);
    wait_ticks(2); @(posedge clk iff dut_b.tick[0]); #1;
    off1 = tick_b[0] - tick_a[0];
    check(off1 >= 0 && off1 <= 10 * TCLK, $sformatf("B tick %0.1f ns after A's after sync (was %0.1f)", off1, offp));
    rd(1, A_STATUS, d); check(d[1], "B saw the sync");
    n_sync++;

    // --- pulses under test, over two periods
    r0 = nrise[2];
    wait_ticks(3); #(TCLK * 10);
    check(nrise[0] >= 2 && nrise[1] >= 2, "channels 0 and 1 pulse");
    check(near(rdel[0], exp_rise(100, 0)), $sformatf("ch 0 rise %0.3f ns after tick", rdel[0]));
    check(near(wid[0], 50 * TCLK), $sformatf("ch 0 width %0.3f ns", wid[0]));
    check(near(rdel[1], exp_rise(100, 5)), $sformatf("ch 1 rise %0.3f ns after tick", rdel[1]));
    check(near(rise[1] - rise[0], 1.0), $sformatf("ch 1 - ch 0 = %0.3f ns (5 taps)", rise[1] - rise[0]));
    n_fine++; n_pulse++;
    check(near(rdel[2], exp_rise(0, 0)) && near(wid[2], 9_900_000.0),
          $sformatf("ch 5: 9.9 ms gate, width %0.1f ns", wid[2]));
    check(nrise[2] - r0 >= 2, "ch 5 repeats at 100 Hz");
    n_long++;
    check(near(wid[3], (P100 - P100 / 20) * TCLK),
          $sformatf("ch 6 cut at the next tick: %0.1f ns", wid[3]));
    n_cut++;
    check(nrise[4] == 2, $sformatf("ch 17 burst gave %0d pulses", nrise[4]));
    rd(0, cha(17, O_PULSES), d); check(d == 2, "ch 17 pulse counter read back");
    n_burst++;
    check(nrise[5] == 0, "off channel silent");
    n_off++;
    check(n_tick_a[1] > 10 && near(rdel[6], exp_rise(1234, 12)) && near(wid[6], 77 * TCLK),
          $sformatf("group 1 channel %0d: %0d ticks, rise %0.3f", CH_HI, n_tick_a[1], rdel[6]));
    n_group++;

    // --- rate switch on group 0 and a second sync from a new phase
    wr(1, A_GRP_BASE, RATE_CUSTOM); wr(1, A_GRP_BASE + 1, P100 / 9 * 7 + 3);   // B drifts off A's phase
    wr(1, A_GRP_BASE, RATE_100HZ);
    wr(0, A_GRP_BASE + 1, P100 / 5); wr(0, A_GRP_BASE, RATE_CUSTOM);    // A to 500 Hz
    wait_ticks(1); begin realtime t0; t0 = tick_a[0]; wait_ticks(1);
      check(near(tick_a[0] - t0, P100 / 5 * TCLK), $sformatf("rate switch: period %0.1f ns", tick_a[0] - t0)); end
    n_switch++;
    wr(0, A_GRP_BASE, RATE_100HZ);
    wr(0, A_CTRL, 32'b0101);
    wait_ticks(2); @(posedge clk iff dut_b.tick[0]); #1;
    off2 = tick_b[0] - tick_a[0];
    check(near(off2, off1), $sformatf("second sync: offset %0.1f ns, first %0.1f ns", off2, off1));
    n_sync++;

    // --- terminals
    check(n_src0 > 0 && n_std == n_src0 && n_fan == n_src1, $sformatf("terminals repeated %0d/%0d and %0d/%0d pulses",
          n_std, n_src0, n_fan, n_src1));

    // --- mechanisms seen
    check(n_writes > 0 && n_reads > 0, "serial writes and reads");
    $display("mechanisms: writes=%0d reads=%0d pulse=%0d fine_delay=%0d long_gate=%0d cut=%0d burst=%0d off=%0d group=%0d rate_switch=%0d sync=%0d tap_load=%0d terminal=%0d",
             n_writes, n_reads, n_pulse, n_fine, n_long, n_cut, n_burst, n_off, n_group, n_switch, n_sync, n_taps, n_std);
    check(n_pulse > 0 && n_fine > 0 && n_long > 0 && n_cut > 0 && n_burst > 0 && n_off > 0 &&
          n_group > 0 && n_switch > 0 && n_sync > 1 && n_taps > 0 && n_std > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
