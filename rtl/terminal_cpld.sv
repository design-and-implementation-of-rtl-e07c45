// terminal_cpld -- logic of the remote signal terminal (MAX II CPLD).
//
// The terminal turns optical triggers back into electrical ones far from the
// crate. The trigger path through the CPLD is purely combinational, from
// input pin to output pins, so its delay is the device's fixed pin-to-pin
// propagation delay and no clock phase enters it. Two build variants:
//   standard unit  (N_IN = 2, FANOUT = 1):  each optical input drives one
//                  electrical output; one such CPLD board per two channels,
//                  two boards per 1U box.
//   high-fanout    (N_IN = 1, FANOUT = 10): one optical input drives ten
//                  electrical outputs.
// Each input is also re-sent on the unit's fibre transmitter for daisy
// chaining: the received fibre signal (REPEAT_ELECTRICAL = 0) or the local
// electrical input (REPEAT_ELECTRICAL = 1, the "send" half of the standard
// unit's send-receive pair).
// The local CLOCK only runs the front-panel LED: a two-flop synchroniser
// watches the inputs and lights the LED for LED_HOLD clocks after any
// rising edge, so single 10 ns triggers at 1 Hz are still visible.
//
// Follows the paper: 1:1 standard and 1:10 fanout variants, fibre ports for
// daisy chaining, CPLD chosen for its deterministic pin-to-pin delay, and the
// CLOCK and LED connections of the terminal block diagram. Own choices: the
// LED behaviour and the repeat selection.
`timescale 1ns / 1ps
module terminal_cpld #(
  parameter int unsigned N_IN              = 2,
  parameter int unsigned FANOUT            = 1,
  parameter bit          REPEAT_ELECTRICAL = 1'b0,
  parameter int unsigned LED_HOLD          = 5_000_000   // 100 ms at 50 MHz
) (
  input  logic                    clk,         // local oscillator (LED only)
  input  logic                    rst_n,
  input  logic [N_IN-1:0]         fiber_in,    // from HFBR-2412T receivers
  input  logic [N_IN-1:0]         lemo_in,     // local electrical inputs
  output logic [N_IN*FANOUT-1:0]  lemo_out,    // to the TTL output drivers
  output logic [N_IN-1:0]         fiber_out,   // to HFBR-1414T transmitters
  output logic                    led
);

  // trigger path: combinational fan-out
  always_comb begin
    for (int i = 0; i < N_IN; i++)
      for (int k = 0; k < FANOUT; k++)
        lemo_out[i*FANOUT + k] = fiber_in[i];
  end

  assign fiber_out = REPEAT_ELECTRICAL ? lemo_in : fiber_in;

  // activity LED
  localparam int unsigned LW = $clog2(LED_HOLD + 1);
  logic [N_IN-1:0] s1, s2, s3;
  logic [LW-1:0]   hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1   <= '0;
      s2   <= '0;
      s3   <= '0;
      hold <= '0;
    end else begin
      s1 <= fiber_in;
      s2 <= s1;
      s3 <= s2;
      if ((s2 & ~s3) != '0) hold <= LW'(LED_HOLD);
      else if (hold != '0)  hold <= hold - LW'(1);
    end
  end

  assign led = (hold != '0);

endmodule
