// iddr2_model -- behavioural model of the Spartan-6 IDDR2 input DDR register
// with DDR_ALIGNMENT "C0". This is a simulation model of a vendor
// primitive, not logic to synthesise.
//
// D is sampled on the rising edge of C1 (the inverted C0) and on the rising
// edge of C0; both samples are presented together after the C0 edge, Q1 the
// earlier (C1) sample and Q0 the later (C0) one. The board-to-board link
// receiver uses it to take two half-bit samples per core clock.
// Modelled: D, C0, C1, CE, R (synchronous), Q0, Q1.
`timescale 1ns / 1ps
module iddr2_model (
  input  logic D,
  input  logic C0,
  input  logic C1,
  input  logic CE,
  input  logic R,
  output logic Q0,
  output logic Q1
);

  logic s1 = 1'b0;

  always_ff @(posedge C1) if (CE) s1 <= D;

  always_ff @(posedge C0) begin
    if (R) begin
      Q0 <= 1'b0;
      Q1 <= 1'b0;
    end else if (CE) begin
      Q0 <= D;
      Q1 <= s1;
    end
  end

endmodule
