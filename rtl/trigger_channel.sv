// trigger_channel -- delay / width pulse generator for one output channel.
//
// Each rate tick (re)starts the channel: a down-counter first runs out the
// programmed delay, then is reloaded with the width and holds the output
// high until it runs out again. Counting is in core clock ticks, so the
// resolution is 10 ns on the 100 MHz crystal or one divided RF period when
// RF-locked. A tick that arrives while a pulse is still pending restarts the
// counters (synchronous reset), so delay + width longer than the period is
// cut short rather than overlapping.
//
// Gating: CH_OFF holds the output low; CH_CONT fires on every tick; CH_BURST
// fires on the next `burst_count` ticks after the channel is armed and then
// stays quiet until armed again. `arm` (a register write to the mode or burst
// count) reloads the burst budget and clears the pulse counter. A width of 0
// produces no pulse.
//
// Timing: with the tick high in cycle t, `trig` is high in cycles
// t+1+delay .. t+delay+width (one clock of fixed pipeline latency).
// `pulses` counts pulses started since the last arm, for status read-back.
//
// Follows the paper: synchronous counters with synchronous reset governing
// delay and width, 0..10 ms ranges at one-tick resolution, pulse count and
// gating modes on the operator panel. Own choices: the restart-on-tick rule,
// the burst semantics and the fixed one-clock latency.
`timescale 1ns / 1ps
module trigger_channel
  import timing_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  ch_cfg_t     cfg,
  input  logic        tick,    // rate tick of the channel's group
  input  logic        arm,     // reload burst budget, clear pulse counter
  output logic        trig,    // trigger output (registered)
  output logic [31:0] pulses   // pulses started since arm
);

  typedef enum logic [1:0] {S_IDLE, S_DELAY, S_HIGH} state_e;

  state_e          state;
  logic [DW-1:0]   cnt;
  logic [CNTW-1:0] budget;    // burst pulses left
  logic            fire;      // this tick starts a pulse

  always_comb begin
    unique case (cfg.mode)
      CH_CONT:  fire = tick && (cfg.width != '0);
      CH_BURST: fire = tick && (cfg.width != '0) && (budget != '0);
      default:  fire = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cnt    <= '0;
      trig   <= 1'b0;
      budget <= '0;
      pulses <= '0;
    end else begin
      if (arm) begin
        budget <= cfg.burst_count;
        pulses <= '0;
      end

      if (!(cfg.mode inside {CH_CONT, CH_BURST})) begin
        state <= S_IDLE;
        trig  <= 1'b0;
      end else if (fire) begin
        // synchronous restart of the counters by the rate tick
        pulses <= (arm ? 32'd0 : pulses) + 32'd1;
        if (cfg.mode == CH_BURST && !arm) budget <= budget - CNTW'(1);
        if (cfg.delay == '0) begin
          state <= S_HIGH;
          trig  <= 1'b1;
          cnt   <= cfg.width - DW'(1);
        end else begin
          state <= S_DELAY;
          trig  <= 1'b0;
          cnt   <= cfg.delay - DW'(1);
        end
      end else if (tick) begin
        // tick without a pulse (width 0 or burst spent) still cancels a pending one
        state <= S_IDLE;
        trig  <= 1'b0;
      end else begin
        unique case (state)
          S_DELAY: if (cnt == '0 && cfg.width == '0) begin
                     state <= S_IDLE;   // width cleared while waiting
                   end else if (cnt == '0) begin
                     state <= S_HIGH;
                     trig  <= 1'b1;
                     cnt   <= cfg.width - DW'(1);
                   end else cnt <= cnt - DW'(1);
          S_HIGH:  if (cnt == '0) begin
                     state <= S_IDLE;
                     trig  <= 1'b0;
                   end else cnt <= cnt - DW'(1);
          default: trig <= 1'b0;
        endcase
      end
    end
  end

endmodule
