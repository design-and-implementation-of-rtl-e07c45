// uart -- asynchronous serial port to the serial server (8N1).
//
// Receiver: the line is brought into the clock domain by two flip-flops,
// a falling edge starts a frame, and each bit is sampled in the middle of
// its bit time (DIV = CLK_HZ/BAUD clocks per bit). A byte is delivered with
// a one-clock `rx_valid` after the middle of the stop bit; a frame whose stop
// bit is low is dropped. Transmitter: a byte is taken when `tx_valid` and
// `tx_ready` are both high and shifted out LSB first, start and stop bit
// included; `tx_ready` is low for the 10 bit times that takes.
//
// The paper only says the board talks to a serial server over a serial
// interface; the frame format (8N1) and 115200 baud are this design's own
// choice. Line idle level is high.
`timescale 1ns / 1ps
module uart #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,        // serial line in
  output logic       tx,        // serial line out
  output logic [7:0] rx_data,
  output logic       rx_valid,
  input  logic [7:0] tx_data,
  input  logic       tx_valid,
  output logic       tx_ready
);

  localparam int unsigned DIV = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned CW  = $clog2(DIV + 1);

  // ---------------- receiver ----------------
  logic [1:0]    rx_sync;
  logic          rx_busy;
  logic [CW-1:0] rx_cnt;
  logic [3:0]    rx_bit;
  logic [7:0]    rx_sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_sync  <= 2'b11;
      rx_busy  <= 1'b0;
      rx_cnt   <= '0;
      rx_bit   <= '0;
      rx_sh    <= '0;
      rx_data  <= '0;
      rx_valid <= 1'b0;
    end else begin
      rx_sync  <= {rx_sync[0], rx};
      rx_valid <= 1'b0;
      if (!rx_busy) begin
        if (!rx_sync[1]) begin
          rx_busy <= 1'b1;
          rx_cnt  <= CW'(DIV / 2);
          rx_bit  <= '0;
        end
      end else if (rx_cnt == '0) begin
        rx_cnt <= CW'(DIV - 1);
        rx_bit <= rx_bit + 4'd1;
        if (rx_bit == 4'd0) begin
          if (rx_sync[1]) rx_busy <= 1'b0;          // glitch, not a start bit
        end else if (rx_bit <= 4'd8) begin
          rx_sh <= {rx_sync[1], rx_sh[7:1]};
        end else begin
          rx_busy <= 1'b0;
          if (rx_sync[1]) begin                      // good stop bit
            rx_data  <= rx_sh;
            rx_valid <= 1'b1;
          end
        end
      end else begin
        rx_cnt <= rx_cnt - CW'(1);
      end
    end
  end

  // ---------------- transmitter ----------------
  logic [CW-1:0] tx_cnt;
  logic [3:0]    tx_bit;
  logic [9:0]    tx_sh;

  assign tx_ready = (tx_bit == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx     <= 1'b1;
      tx_cnt <= '0;
      tx_bit <= '0;
      tx_sh  <= '1;
    end else if (tx_bit == 4'd0) begin
      if (tx_valid) begin
        tx     <= 1'b0;                 // start bit
        tx_cnt <= CW'(DIV - 1);
        tx_bit <= 4'd10;
        tx_sh  <= {1'b1, 1'b1, tx_data};
      end
    end else if (tx_cnt == '0) begin
      tx_bit <= tx_bit - 4'd1;
      if (tx_bit != 4'd1) begin
        tx     <= tx_sh[0];
        tx_sh  <= {1'b1, tx_sh[9:1]};
        tx_cnt <= CW'(DIV - 1);
      end else begin
        tx     <= 1'b1;
      end
    end else begin
      tx_cnt <= tx_cnt - CW'(1);
    end
  end

endmodule
