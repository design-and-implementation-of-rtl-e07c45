// oddr2_model -- behavioural model of the Spartan-6 ODDR2 output DDR register.
// This is a simulation model of a vendor primitive, not logic to synthesise:
// on the FPGA the primitive itself is used.
//
// D0 is registered on the rising edge of C0 and D1 on the rising edge of C1
// (C1 is the inverted C0), and Q shows whichever was captured last. With
// D0 = D1 the primitive is a plain output register placed in the I/O tile,
// which is how every trigger output leaves the FPGA; with D0/D1 = 1/0 it
// forwards the clock, and with two line bits per cycle it sends the
// 200 Mb/s board-to-board stream. Modelled: D0, D1, C0, C1, CE, R
// (synchronous to C0/C1, SRTYPE "SYNC"), S and INIT; DDR_ALIGNMENT "NONE".
`timescale 1ns / 1ps
module oddr2_model #(
  parameter bit INIT = 1'b0
) (
  input  logic D0,
  input  logic D1,
  input  logic C0,
  input  logic C1,
  input  logic CE,
  input  logic R,
  input  logic S,
  output logic Q
);

  logic r0 = INIT, r1 = INIT;   // captured data
  logic t0 = 1'b0, t1 = 1'b0;   // edge toggles: t0 ^ t1 says which edge was last

  always_ff @(posedge C0) begin
    if (R)       r0 <= 1'b0;
    else if (S)  r0 <= 1'b1;
    else if (CE) r0 <= D0;
    t0 <= ~t0;
  end

  always_ff @(posedge C1) begin
    if (R)       r1 <= 1'b0;
    else if (S)  r1 <= 1'b1;
    else if (CE) r1 <= D1;
    t1 <= ~t1;
  end

  assign Q = (t0 ^ t1) ? r0 : r1;

endmodule
