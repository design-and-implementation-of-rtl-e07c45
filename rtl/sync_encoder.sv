// sync_encoder -- reset pulse embedded in the 100 MHz clock stream of the
// board-to-board SFP link.
//
// The link carries two line bits per core clock (first half, second half),
// sent by a DDR output register, i.e. a 200 Mb/s line. At rest the pattern
// is 1,0 in every cycle, which is simply the core clock forwarded onto the
// fibre. A reset is sent as the code word 11 11 00 00 over four cycles:
// four ones then four zeros. It carries as many ones as zeros (the word is
// DC-balanced) and its longest run is four half-bits (20 ns), so the optical
// module sees the same balance and transition density as the idle clock.
// A run of two equal half-bits never occurs at rest, so the receiver can
// find the word in any phase.
//
// `sync_req` (one clock) starts a code word when this board is the master;
// requests during a word are ignored. `sync_local` is the one-clock re-phase
// pulse for this board's own rate generators and fires in the cycle the
// first code half-bit pair is sent (cycle t+1 for a request in cycle t).
// A slave board (master = 0) never embeds a reset: its stream is the plain
// forwarded clock of the 'CLK' link.
//
// The paper gives the idea (reset pulse encoded by FPGA logic into the
// continuous 100 MHz clock stream as a quasi-balanced code meeting the
// optical module's DC-balance and transition-density limits, recovered by
// synchronous decoding); the code word and the DDR line rate are this
// design's own.
`timescale 1ns / 1ps
module sync_encoder (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       master,
  input  logic       sync_req,
  output logic [1:0] line,        // {first half-bit, second half-bit} to the DDR register
  output logic       sync_local   // re-phase pulse for this board
);

  logic [2:0] phase;   // 0: idle, 1..4: code word cycle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= '0;
      line       <= 2'b10;
      sync_local <= 1'b0;
    end else begin
      sync_local <= 1'b0;
      if (phase == '0) begin
        if (master && sync_req) begin
          phase      <= 3'd1;
          line       <= 2'b11;
          sync_local <= 1'b1;
        end else begin
          line <= 2'b10;
        end
      end else begin
        phase <= (phase == 3'd4) ? '0 : phase + 3'd1;
        unique case (phase)
          3'd1:    line <= 2'b11;
          3'd2:    line <= 2'b00;
          3'd3:    line <= 2'b00;
          default: line <= 2'b10;
        endcase
      end
    end
  end

endmodule
