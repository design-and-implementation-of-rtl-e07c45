// sync_decoder -- recovers the reset pulse from the received SFP stream.
//
// Input is the pair of line samples an input DDR register takes each core
// clock (`pair[1]` the earlier, `pair[0]` the later half-bit). The last nine
// received half-bits form a history in which the code word 1111 0000 is
// searched at both half-bit offsets, so the receiver works whichever half
// of its clock the incoming stream's edges happen to fall in; for a given
// board pair that phase is fixed, so the recovery latency is fixed too.
//
// `link_ok` rises after 16 consecutive idle cycles (a pair of unequal bits
// repeated) and falls after 8 consecutive cycles that are not idle; a code
// word is only accepted while the link is up, so a dead or noisy fibre never
// re-phases the board. `sync` is one clock long, 1 clock after the pair that
// completes the code word (the history is registered).
//
// Follows the paper: synchronous decoding at the receiver with lossless
// recovery of the pulse. Own choices: the code, the history length, the link
// supervision thresholds.
`timescale 1ns / 1ps
module sync_decoder (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] pair,     // {earlier, later} half-bit samples
  output logic       sync,     // recovered reset pulse
  output logic       link_ok   // idle clock stream seen
);

  localparam logic [7:0] CODE = 8'b1111_0000;

  logic [8:0] hist;      // hist[8] oldest half-bit
  logic [4:0] good_cnt;
  logic [3:0] bad_cnt;
  logic       hit;

  always_comb hit = (hist[7:0] == CODE) || (hist[8:1] == CODE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist     <= 9'b0_1010_1010;
      good_cnt <= '0;
      bad_cnt  <= '0;
      link_ok  <= 1'b0;
      sync     <= 1'b0;
    end else begin
      hist <= {hist[6:0], pair};
      sync <= hit && link_ok;

      if (pair[1] != pair[0]) begin
        bad_cnt <= '0;
        if (good_cnt != 5'd16) good_cnt <= good_cnt + 5'd1;
        else                   link_ok  <= 1'b1;
      end else begin
        good_cnt <= '0;
        if (bad_cnt != 4'd8) bad_cnt <= bad_cnt + 4'd1;
        else                 link_ok <= 1'b0;
      end
    end
  end

endmodule
