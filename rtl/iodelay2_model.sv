// iodelay2_model -- behavioural model of the Spartan-6 IODELAY2 delay line in
// output (ODELAY) use, variable mode. This is a simulation model of a vendor
// primitive, not logic to synthesise.
//
// DOUT follows ODATAIN after tap * TAP_PS picoseconds (transport delay, each
// edge delayed on its own). The tap count starts at ODELAY_VALUE, returns to
// it on RST and moves one tap per CLK edge with CE high, up with INC high and
// down with INC low, within 0..255. TAP_PS = 200 is the nominal tap size the
// delay line is used with; the real line's taps are not uniform and drift
// with process, voltage and temperature, which this model ignores.
// Only the ports used by an output delay are modelled (no input path, no
// calibration: CAL is ignored and BUSY is low); TOUT follows T.
// Lint notes: the edge delay is zero at tap 0, which is intended, so the
// warning that the delay may be #0 stands. A synthesis tool drops the delay,
// so it sees DOUT and TOUT wired to inputs and BUSY constant; the model is
// meant for simulation only.
`timescale 1ns / 1ps
module iodelay2_model #(
  parameter int ODELAY_VALUE = 0,
  parameter int TAP_PS       = 200
) (
  input  logic ODATAIN,
  input  logic T,
  input  logic CLK,
  input  logic CE,
  input  logic INC,
  input  logic RST,
  input  logic CAL,
  output logic DOUT,
  output logic TOUT,
  output logic BUSY,
  output logic [7:0] TAP_VALUE   // model-only observation port
);

  logic [7:0] tap = 8'(ODELAY_VALUE);

  always_ff @(posedge CLK) begin
    if (RST)                       tap <= 8'(ODELAY_VALUE);
    else if (CE && INC && tap != 8'hFF) tap <= tap + 8'd1;
    else if (CE && !INC && tap != 8'h00) tap <= tap - 8'd1;
  end

  assign TAP_VALUE = tap;
  assign BUSY      = 1'b0;
  assign TOUT      = T;

  initial DOUT = 1'b0;
  always @(ODATAIN) begin
    DOUT <= #(real'(tap) * real'(TAP_PS) * 1.0e-3) ODATAIN;
  end

endmodule
