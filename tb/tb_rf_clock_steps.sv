// tb_rf_clock_steps -- one core logic board running from the RF-derived
// clock: the 648 MHz reference divided by four, 162 MHz, a 6.17 ns period.
//
// The board is configured over its serial port at the standard 115200 baud
// (the UART divider is set from CLK_HZ = 162 MHz). Group 0 runs on the custom
// period, 162,000 clocks (1 ms), because the menu rates are defined for the
// crystal. Four channels get delays d, d+1, d+2, d+3 and a fifth a long delay
// of 150,000 clocks. Checked at the pins, for two shots:
//   - each rise sits (delay + 0.5) core clocks after the tick edge;
//   - one count of delay moves the output by one clock period, about
//     6.18 ns, the step seen when the system is locked to the RF;
//   - the widths are exact and the ticks are one custom period apart.
// The clock period is measured in the simulation, so the comparisons do not
// depend on how the simulator rounds the half period.
`timescale 1ns / 1ps
module tb_rf_clock_steps;
  import timing_pkg::*;

  localparam int unsigned CLK_HZ = 162_000_000;   // 648 MHz / 4
  localparam int unsigned BAUD   = 115_200;
  localparam int unsigned NCH    = 16;
  localparam realtime TBIT = 1.0e9 / BAUD;
  localparam int PERIOD = 162_000;                // custom period, 1 ms
  localparam int D0 = 1000, WID = 20, DLONG = 150_000;
  localparam int NW = 5;

  logic clk = 0, rst_n = 0, term_clk = 0;
  logic urx = 1'b1, utx, rf_sel, sfp_tx, link_ok;
  logic [0:0][15:0] j2;
  logic [1:0] std_lout, std_fout;
  logic [9:0] fan_lout;
  logic fan_fout, std_led, fan_led;

  int checks = 0, failures = 0;

  timing_system #(.NCH(NCH), .CLK_HZ(CLK_HZ), .BAUD(BAUD), .LED_HOLD(1000)) dut (
    .clk, .rst_n, .uart_rx(urx), .uart_tx(utx), .rf_clk_sel(rf_sel), .j2_out(j2),
    .sfp_tx, .sfp_rx(1'b0), .sfp_link_ok(link_ok), .term_clk,
    .term_std_fiber_in(2'b00), .term_std_lemo_in(2'b00), .term_std_lemo_out(std_lout),
    .term_std_fiber_out(std_fout), .term_std_led(std_led), .term_fan_fiber_in(1'b0),
    .term_fan_lemo_out(fan_lout), .term_fan_fiber_out(fan_fout), .term_fan_led(fan_led));

  always #(1.0e9 / CLK_HZ / 2) clk = ~clk;
  always #10 term_clk = ~term_clk;

  function automatic bit near(input realtime a, input realtime b, input realtime tol);
    return (a - b < tol) && (b - a < tol);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- serial line ----------------
  logic [7:0] rxq [$];

  task automatic uart_send(input logic [7:0] v);
    urx = 0; #(TBIT);
    for (int i = 0; i < 8; i++) begin urx = v[i]; #(TBIT); end
    urx = 1; #(TBIT);
  endtask

  initial forever begin
    logic [7:0] v;
    @(negedge utx);
    #(TBIT * 1.5);
    for (int i = 0; i < 8; i++) begin v[i] = utx; #(TBIT); end
    rxq.push_back(v);
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    rxq.delete();
    uart_send(CMD_WRITE); uart_send(a[15:8]); uart_send(a[7:0]);
    uart_send(d[31:24]); uart_send(d[23:16]); uart_send(d[15:8]); uart_send(d[7:0]);
    #(TBIT * 12);
    check(rxq.size() == 1 && rxq[0] == RSP_ACK, $sformatf("write %04h acknowledged", a));
  endtask

  function automatic logic [15:0] cha(input int c, input int off);
    return 16'(A_CH_BASE + 8 * c + off);
  endfunction

  // ---------------- observation ----------------
  realtime tclk, last_edge = 0;
  always @(posedge clk) begin
    if (last_edge > 0) tclk = $realtime - last_edge;
    last_edge = $realtime;
  end

  realtime tick_t = 0, tick_prev = 0;
  int n_tick = 0;
  always @(posedge clk) if (dut.tick[0]) begin tick_prev = tick_t; tick_t = $realtime; n_tick++; end

  int      dly [NW] = '{D0, D0 + 1, D0 + 2, D0 + 3, DLONG};
  realtime rdel [NW], wid [NW];
  int      nrise [NW] = '{default: 0};

  for (genvar k = 0; k < NW; k++) begin : g_watch
    initial forever begin
      realtime r;
      @(posedge j2[0][k]);
      r = $realtime;
      @(negedge j2[0][k]);
      if (r > 100.0 * 6.2) begin          // ignore power-up values before reset has acted
        rdel[k] = r - tick_t;
        wid[k]  = $realtime - r;
        nrise[k]++;
      end
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    #40_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test ----------------
  int n_step = 0, n_long = 0, n_period = 0;

  initial begin
    #20 rst_n = 1;
    wr(A_GRP_BASE + 1, PERIOD);
    wr(A_GRP_BASE, RATE_CUSTOM);
    for (int k = 0; k < NW; k++) begin
      wr(cha(k, O_DELAY), dly[k]); wr(cha(k, O_WIDTH), WID); wr(cha(k, O_MODE), CH_CONT);
    end
    // let any shot that started during configuration finish
    @(posedge clk iff dut.tick[0]);
    #(real'(DLONG + WID + 10) * tclk);
    for (int k = 0; k < NW; k++) nrise[k] = 0;

    for (int shot = 0; shot < 2; shot++) begin
      @(posedge clk iff dut.tick[0]);
      #(real'(DLONG + WID + 10) * tclk);
      check(tclk > 6.16 && tclk < 6.18, $sformatf("core clock period %.3f ns", tclk));
      for (int k = 0; k < NW; k++) begin
        check(nrise[k] == shot + 1, $sformatf("shot %0d channel %0d pulse count %0d", shot, k, nrise[k]));
        check(near(rdel[k], (dly[k] + 0.5) * tclk, 0.002),
              $sformatf("channel %0d rise %.3f ns after tick, want %.3f", k, rdel[k], (dly[k] + 0.5) * tclk));
        check(near(wid[k], WID * tclk, 0.002), $sformatf("channel %0d width %.3f ns", k, wid[k]));
      end
      for (int k = 1; k < 4; k++) begin
        check(near(rdel[k] - rdel[k - 1], tclk, 0.002) && near(rdel[k] - rdel[k - 1], 6.18, 0.02),
              $sformatf("delay step %0d: %.3f ns", k, rdel[k] - rdel[k - 1]));
        n_step++;
      end
      if (near(rdel[4], (DLONG + 0.5) * tclk, 0.002)) n_long++;
      check(near(tick_t - tick_prev, PERIOD * tclk, 0.01),
            $sformatf("tick spacing %.3f ns", tick_t - tick_prev));
      n_period++;
    end

    $display("mechanisms: rf_steps=%0d long_delay=%0d custom_period=%0d", n_step, n_long, n_period);
    check(n_step > 0, "one-count delay steps measured");
    check(n_long > 0, "long delay measured");
    check(n_period > 0, "custom period measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
