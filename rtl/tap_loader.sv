// tap_loader -- loads one channel's calibrated fine-delay tap value.
//
// The output delay line of each channel (an IODELAY2 in variable mode,
// about 200 ps per tap) is set by a short command sequence on its control
// port: one clock of RST returns the line to tap 0, then `tap` clocks with
// CE and INC high step it up one tap each, separated by one idle clock.
// `done` is low while a load is under way and high afterwards; a load
// starts on `load` (one clock) and a new `load` during a sequence restarts
// it. With tap value N a load takes 2 + 2N clocks.
//
// Follows the paper: per-channel tap values computed during commissioning
// and loaded into each delay primitive during initialisation. Own choices:
// reset-then-increment loading and the idle clock between steps.
`timescale 1ns / 1ps
module tap_loader
  import timing_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [TAPW-1:0] tap,
  output logic            dly_rst,   // to IODELAY2 RST
  output logic            dly_ce,    // to IODELAY2 CE
  output logic            dly_inc,   // to IODELAY2 INC
  output logic            done
);

  logic [TAPW-1:0] left;
  logic            busy;
  logic            gap;

  assign done    = !busy;
  assign dly_inc = dly_ce;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      left    <= '0;
      gap     <= 1'b0;
      dly_rst <= 1'b0;
      dly_ce  <= 1'b0;
    end else begin
      dly_rst <= 1'b0;
      dly_ce  <= 1'b0;
      if (load) begin
        busy    <= 1'b1;
        left    <= tap;
        gap     <= 1'b1;
        dly_rst <= 1'b1;
      end else if (busy) begin
        if (gap) begin
          gap <= 1'b0;
          if (left == '0) busy <= 1'b0;
        end else begin
          dly_ce <= 1'b1;
          left   <= left - TAPW'(1);
          gap    <= 1'b1;
        end
      end
    end
  end

endmodule
