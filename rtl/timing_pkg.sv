// timing_pkg -- types and constants shared by the trigger generator.
//
// The core clock is 100 MHz (crystal) or a divided RF reference; one count
// of every delay, width and period counter is one core clock period (10 ns
// on the crystal). The widths below cover 0..10 ms of delay and width and a
// 1 Hz repetition period at clocks up to about 160 MHz, the RF-locked case.
// The rate menu is the one the operator panel offers (1/5/10/20/25/50/100 Hz)
// plus a free "custom" period. Register addresses and the serial command
// bytes are this design's own; nothing about them comes from a published
// protocol.
`timescale 1ns / 1ps
package timing_pkg;

  // counter widths
  localparam int unsigned DW   = 24;  // delay / width counters (10 ms at 162 MHz = 1.62e6 < 2^24)
  localparam int unsigned PW   = 28;  // repetition period counter (1 Hz at 162 MHz < 2^28)
  localparam int unsigned CNTW = 16;  // burst pulse count
  localparam int unsigned TAPW = 8;   // IODELAY2 tap value (0..255)

  // repetition-rate selection
  typedef enum logic [2:0] {
    RATE_1HZ   = 3'd0,
    RATE_5HZ   = 3'd1,
    RATE_10HZ  = 3'd2,
    RATE_20HZ  = 3'd3,
    RATE_25HZ  = 3'd4,
    RATE_50HZ  = 3'd5,
    RATE_100HZ = 3'd6,
    RATE_CUSTOM = 3'd7
  } rate_sel_e;

  // per-channel gating mode
  typedef enum logic [1:0] {
    CH_OFF   = 2'd0,   // output held low
    CH_CONT  = 2'd1,   // one pulse per rate tick, forever
    CH_BURST = 2'd2    // one pulse per rate tick until burst_count pulses were sent
  } ch_mode_e;

  // per-channel configuration
  typedef struct packed {
    logic [DW-1:0]   delay;        // ticks from rate tick to rising edge
    logic [DW-1:0]   width;        // ticks the output stays high (0 = no pulse)
    ch_mode_e        mode;
    logic [CNTW-1:0] burst_count;  // pulses in CH_BURST mode
    logic            group;        // which rate group drives the channel
  } ch_cfg_t;

  // per-group rate configuration
  typedef struct packed {
    rate_sel_e     sel;
    logic [PW-1:0] custom_period;  // ticks per period when sel == RATE_CUSTOM
  } rate_cfg_t;

  // serial command bytes
  localparam logic [7:0] CMD_WRITE = 8'h57;  // 'W' A1 A0 D3 D2 D1 D0 -> 'K'
  localparam logic [7:0] CMD_READ  = 8'h52;  // 'R' A1 A0             -> D3 D2 D1 D0
  localparam logic [7:0] RSP_ACK   = 8'h4B;  // 'K'
  localparam logic [7:0] RSP_NAK   = 8'h45;  // 'E' unknown command byte

  // register map (16-bit word addresses)
  localparam logic [15:0] A_CTRL     = 16'h0000; // [0] master [1] rf_clk_sel [2] sync (self-clearing) [3] tap load (self-clearing)
  localparam logic [15:0] A_ID       = 16'h0001; // read-only: channel count
  localparam logic [15:0] A_STATUS   = 16'h0002; // read-only: [0] taps loaded [1] sync seen (sticky)
  localparam logic [15:0] A_GRP_BASE = 16'h0010; // +2g: rate select, +2g+1: custom period
  localparam logic [15:0] A_CH_BASE  = 16'h0100; // + 8*ch + offset below
  localparam logic [2:0]  O_DELAY = 3'd0, O_WIDTH = 3'd1, O_MODE = 3'd2, O_BURST = 3'd3,
                          O_GROUP = 3'd4, O_TAP   = 3'd5, O_PULSES = 3'd6;

  // period in core clock ticks of a menu rate
  function automatic logic [PW-1:0] rate_period(input rate_sel_e sel, input longint clk_hz);
    longint hz;
    case (sel)
      RATE_1HZ:   hz = 1;
      RATE_5HZ:   hz = 5;
      RATE_10HZ:  hz = 10;
      RATE_20HZ:  hz = 20;
      RATE_25HZ:  hz = 25;
      RATE_50HZ:  hz = 50;
      default:    hz = 100;
    endcase
    return PW'(clk_hz / hz);
  endfunction

endpackage
