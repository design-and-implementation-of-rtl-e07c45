// rate_generator -- repetition-rate tick for one rate group.
//
// A free-running period counter divides the core clock down to the selected
// trigger repetition rate. The rate is picked from the operator menu
// (1, 5, 10, 20, 25, 50 or 100 Hz; the period in clock ticks is CLK_HZ/f,
// computed at elaboration) or set directly as a custom period, which is how
// the rates are obtained when the core clock is the divided RF reference
// instead of the 100 MHz crystal. `tick` is high for exactly one clock at the
// end of every period (a compare on the registered count) and starts all trigger channels of the group.
//
// `sync` is the synchronous re-phasing input fed by the board-to-board reset
// link: it clears the counter, so the first tick follows exactly one period
// after the sync cycle on every board that received the same sync. A period
// change takes effect at once: if the counter is already past the new
// terminal count the period ends on the next clock.
//
// Follows the paper: frequency division by synchronous counters, the rate
// menu, a reset that aligns boards. Own choices: the custom-period register,
// one-cycle tick, the "period ends at once" rule. Latency: tick at
// cycles P-1, 2P-1, ... after reset release or after a sync cycle.
`timescale 1ns / 1ps
module rate_generator
  import timing_pkg::*;
#(
  parameter int unsigned CLK_HZ = 100_000_000  // core clock frequency
) (
  input  logic                clk,
  input  logic                rst_n,
  input  rate_cfg_t           cfg,
  input  logic                sync,    // re-phase: restart the period
  output logic                tick,    // one clock per period
  output logic [PW-1:0]       period   // current period in clock ticks (read-back)
);

  // menu periods, computed at elaboration (no divider in the circuit)
  localparam logic [PW-1:0] MENU [7] = '{
    rate_period(RATE_1HZ,   longint'(CLK_HZ)), rate_period(RATE_5HZ,  longint'(CLK_HZ)),
    rate_period(RATE_10HZ,  longint'(CLK_HZ)), rate_period(RATE_20HZ, longint'(CLK_HZ)),
    rate_period(RATE_25HZ,  longint'(CLK_HZ)), rate_period(RATE_50HZ, longint'(CLK_HZ)),
    rate_period(RATE_100HZ, longint'(CLK_HZ))};

  logic [PW-1:0] cnt;
  logic [PW-1:0] term;

  always_comb begin
    if (cfg.sel == RATE_CUSTOM) period = (cfg.custom_period < PW'(2)) ? PW'(2) : cfg.custom_period;
    else                        period = MENU[cfg.sel];
    term = period - PW'(1);
  end

  // tick is a compare on the registered count: high for the one clock in
  // which the count sits at (or, after a period change, beyond) its end
  assign tick = (cnt >= term);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cnt <= '0;
    else if (sync)  cnt <= '0;
    else if (tick)  cnt <= '0;
    else            cnt <= cnt + PW'(1);
  end

endmodule
