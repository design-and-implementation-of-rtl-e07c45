// host_regs -- serial command parser and register file of the core logic board.
//
// The control system reaches every timing parameter through a small byte
// protocol on the serial link (one byte in `rx_data` per `rx_valid`):
//   write: 'W' A1 A0 D3 D2 D1 D0   -> reply 'K'
//   read:  'R' A1 A0               -> reply D3 D2 D1 D0 (big endian)
// An unknown command byte is answered with 'E'. Addresses are 16-bit word
// addresses, data is 32 bits (see timing_pkg for the map): a control word
// (master/slave role, RF clock select, a self-clearing sync request and a
// self-clearing IODELAY tap-load request), read-only id and status words,
// two words per rate group (rate select, custom period) and eight per
// channel (delay, width, mode, burst count, group, tap, pulse counter).
// Writing a channel's mode or burst count also arms it (one-clock `arm`).
// Reads of unmapped addresses return 0. Replies leave through a
// valid/ready byte port to the UART transmitter.
//
// Reset state: every channel off with zero delay and width, both rate groups
// at 10 Hz, master role, crystal clock. Register contents change on the
// clock after the last byte of a write; the parser is ready for the next
// command as soon as the reply bytes are queued.
//
// The paper gives the function (registers mapped to control-system process
// variables, set values and read-back, per-channel delay, width, pulse count
// and gating, per-channel tap values loaded at initialisation); the protocol,
// map, widths and reset values are this design's own.
`timescale 1ns / 1ps
module host_regs
  import timing_pkg::*;
#(
  parameter int unsigned NCH  = 80,   // trigger channels
  parameter int unsigned NGRP = 2     // rate groups
) (
  input  logic            clk,
  input  logic            rst_n,
  // byte stream from / to the UART
  input  logic [7:0]      rx_data,
  input  logic            rx_valid,
  output logic [7:0]      tx_data,
  output logic            tx_valid,
  input  logic            tx_ready,
  // configuration
  output ch_cfg_t         ch_cfg   [NCH],
  output logic [TAPW-1:0] ch_tap   [NCH],
  output logic            ch_arm   [NCH],
  output rate_cfg_t       grp_cfg  [NGRP],
  output logic            master,      // this board issues the sync reset
  output logic            rf_clk_sel,  // 1: core clock from the RF reference
  output logic            sync_req,    // one-clock request for a sync reset
  output logic            tap_load,    // one-clock request to (re)load taps
  // status
  input  logic [31:0]     ch_pulses [NCH],
  input  logic            taps_loaded,
  input  logic            sync_seen
);

  typedef enum logic [2:0] {P_CMD, P_ADDR1, P_ADDR0, P_DATA, P_EXEC} pstate_e;

  pstate_e     ps;
  logic        is_write;
  logic [15:0] addr;
  logic [31:0] wdata;
  logic [1:0]  nbytes;         // data bytes still expected

  // reply queue: up to four bytes, sent MSB first
  logic [31:0] rsp;
  logic [2:0]  rsp_n;

  assign tx_data  = rsp[31:24];
  assign tx_valid = (rsp_n != '0);

  // address decode
  logic [15:0] ch_rel;
  logic [12:0] ch_idx;
  logic [2:0]  ch_off;
  logic        ch_hit;
  logic [15:0] g_rel;
  logic        g_hit;
  logic [31:0] rdata;

  localparam int unsigned CIW = (NCH  > 1) ? $clog2(NCH)  : 1;
  localparam int unsigned GIW = (NGRP > 1) ? $clog2(NGRP) : 1;
  logic [CIW-1:0] ci;   // channel index, meaningful when ch_hit
  logic [GIW-1:0] gi;   // group index, meaningful when g_hit

  always_comb begin
    ch_rel = addr - A_CH_BASE;
    ch_idx = ch_rel[15:3];
    ch_off = ch_rel[2:0];
    ch_hit = (addr >= A_CH_BASE) && (32'(ch_idx) < NCH);
    g_rel  = addr - A_GRP_BASE;
    g_hit  = (addr >= A_GRP_BASE) && (32'(g_rel) < 2 * NGRP);
    ci     = ch_idx[CIW-1:0];
    gi     = g_rel[GIW:1];
  end

  // read mux
  always_comb begin
    rdata = '0;
    if (addr == A_CTRL)        rdata = {30'd0, rf_clk_sel, master};
    else if (addr == A_ID)     rdata = 32'(NCH);
    else if (addr == A_STATUS) rdata = {30'd0, sync_seen, taps_loaded};
    else if (g_hit) begin
      if (g_rel[0]) rdata = 32'(grp_cfg[gi].custom_period);
      else          rdata = 32'(grp_cfg[gi].sel);
    end else if (ch_hit) begin
      unique case (ch_off)
        O_DELAY:  rdata = 32'(ch_cfg[ci].delay);
        O_WIDTH:  rdata = 32'(ch_cfg[ci].width);
        O_MODE:   rdata = 32'(ch_cfg[ci].mode);
        O_BURST:  rdata = 32'(ch_cfg[ci].burst_count);
        O_GROUP:  rdata = 32'(ch_cfg[ci].group);
        O_TAP:    rdata = 32'(ch_tap[ci]);
        O_PULSES: rdata = ch_pulses[ci];
        default:  rdata = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps         <= P_CMD;
      is_write   <= 1'b0;
      addr       <= '0;
      wdata      <= '0;
      nbytes     <= '0;
      rsp        <= '0;
      rsp_n      <= '0;
      master     <= 1'b1;
      rf_clk_sel <= 1'b0;
      sync_req   <= 1'b0;
      tap_load   <= 1'b0;
      for (int c = 0; c < NCH; c++) begin
        ch_cfg[c] <= '{delay: '0, width: '0, mode: CH_OFF, burst_count: '0, group: 1'b0};
        ch_tap[c] <= '0;
        ch_arm[c] <= 1'b0;
      end
      for (int g = 0; g < NGRP; g++) grp_cfg[g] <= '{sel: RATE_10HZ, custom_period: '0};
    end else begin
      sync_req <= 1'b0;
      tap_load <= 1'b0;
      for (int c = 0; c < NCH; c++) ch_arm[c] <= 1'b0;

      // reply byte handshake
      if (tx_valid && tx_ready) begin
        rsp   <= {rsp[23:0], 8'h00};
        rsp_n <= rsp_n - 3'd1;
      end

      unique case (ps)
        P_CMD: if (rx_valid) begin
          if (rx_data == CMD_WRITE || rx_data == CMD_READ) begin
            is_write <= (rx_data == CMD_WRITE);
            ps       <= P_ADDR1;
          end else if (rsp_n == '0) begin
            rsp   <= {RSP_NAK, 24'd0};
            rsp_n <= 3'd1;
          end
        end
        P_ADDR1: if (rx_valid) begin
          addr[15:8] <= rx_data;
          ps         <= P_ADDR0;
        end
        P_ADDR0: if (rx_valid) begin
          addr[7:0] <= rx_data;
          nbytes    <= 2'd3;
          ps        <= is_write ? P_DATA : P_EXEC;
        end
        P_DATA: if (rx_valid) begin
          wdata  <= {wdata[23:0], rx_data};
          nbytes <= nbytes - 2'd1;
          if (nbytes == 2'd0) ps <= P_EXEC;
        end
        P_EXEC: if (rsp_n == '0) begin   // wait for the previous reply to drain
          ps <= P_CMD;
          if (is_write) begin
            rsp   <= {RSP_ACK, 24'd0};
            rsp_n <= 3'd1;
            if (addr == A_CTRL) begin
              master     <= wdata[0];
              rf_clk_sel <= wdata[1];
              sync_req   <= wdata[2];
              tap_load   <= wdata[3];
            end else if (g_hit) begin
              if (g_rel[0]) grp_cfg[gi].custom_period <= wdata[PW-1:0];
              else          grp_cfg[gi].sel           <= rate_sel_e'(wdata[2:0]);
            end else if (ch_hit) begin
              unique case (ch_off)
                O_DELAY: ch_cfg[ci].delay <= wdata[DW-1:0];
                O_WIDTH: ch_cfg[ci].width <= wdata[DW-1:0];
                O_MODE:  begin
                           ch_cfg[ci].mode <= ch_mode_e'(wdata[1:0]);
                           ch_arm[ci]      <= 1'b1;
                         end
                O_BURST: begin
                           ch_cfg[ci].burst_count <= wdata[CNTW-1:0];
                           ch_arm[ci]             <= 1'b1;
                         end
                O_GROUP: ch_cfg[ci].group <= wdata[0];
                O_TAP:   ch_tap[ci]       <= wdata[TAPW-1:0];
                default: ;
              endcase
            end
          end else begin
            rsp   <= rdata;
            rsp_n <= 3'd4;
          end
        end
        default: ps <= P_CMD;
      endcase
    end
  end

endmodule
