// timing_system -- trigger generator of the core logic board with its remote
// terminals: the top of the design.
//
// One FPGA on the core logic board (CLB) makes all NCH = 80 triggers. The
// control system writes delays, widths, modes and rates over the serial port
// (uart -> host_regs). NGRP rate generators divide the core clock into
// repetition ticks; every trigger_channel counts its delay and width from
// the tick of its group. Each channel output leaves through an output DDR
// register and a per-channel fine delay line (ODDR2 + IODELAY2 models),
// whose tap values come from the register file and are loaded by one
// tap_loader per channel after reset and on request. Both DDR inputs carry
// the channel register, so the pin follows it half a clock later (the
// falling-edge half passes it first), plus tap x 200 ps: a channel with delay
// d rises (d + 0.5) clocks + tap x 0.2 ns after the clock edge that ends its
// tick cycle. The 80 outputs are
// grouped 16 per slave slot of the J2 breakout backplane: j2_out[0..4] go to
// VME slots 2, 3, 5, 6 and 7 (the CLB sits in slot 4); level shifters,
// backplane and output boards are passive hardware outside this logic.
//
// For 160 channels two crates are linked over SFP fibres. Board B forwards
// its core clock to board A (board A's core clock is then B's clock, a
// board-level choice outside this logic), and board A, the master, returns
// a reset embedded in a clock stream (sync_encoder -> ODDR2 -> sfp_tx). The
// receiving board samples sfp_rx with an IDDR2 and recovers the reset
// (sync_decoder). A master re-phases its own rate generators with its local
// sync pulse, a slave with the recovered one, so both boards' ticks fall in
// the same core clock cycle up to the fixed link latency, which is absorbed
// in the channel delays.
//
// Also included: the logic of one standard remote terminal (two 1:1
// channels) and one high-fanout terminal (1:10). Their fibre inputs are
// ports because the optical interface boards, fibres and transceivers
// between them and the CLB are analogue hardware.
//
// The core clock is the 100 MHz crystal or the divided RF reference,
// selected ahead of this logic (the board feeds both sources to the FPGA as
// separate global clocks; the multiplexer and divider between them are
// vendor clock resources not modelled here); rf_clk_sel is the register bit
// that drives that selection. The whole FPGA logic runs
// on that one clock; the UART bit timing assumes CLK_HZ.
`timescale 1ns / 1ps
module timing_system
  import timing_pkg::*;
#(
  parameter int unsigned NCH      = 80,
  parameter int unsigned NGRP     = 2,
  parameter int unsigned CLK_HZ   = 100_000_000,
  parameter int unsigned BAUD     = 115_200,
  parameter int unsigned LED_HOLD = 5_000_000,
  localparam int unsigned NSLOT   = (NCH + 15) / 16
) (
  input  logic                   clk,        // core clock
  input  logic                   rst_n,
  // serial port to the serial server
  input  logic                   uart_rx,
  output logic                   uart_tx,
  // clock source request to the clock distribution network
  output logic                   rf_clk_sel,
  // trigger outputs, 16 per backplane slot (slots 2,3,5,6,7)
  output logic [NSLOT-1:0][15:0] j2_out,
  // board-to-board SFP link
  output logic                   sfp_tx,
  input  logic                   sfp_rx,
  output logic                   sfp_link_ok,
  // remote terminals (local oscillator and optical/electrical I/O)
  input  logic                   term_clk,
  input  logic [1:0]             term_std_fiber_in,
  input  logic [1:0]             term_std_lemo_in,
  output logic [1:0]             term_std_lemo_out,
  output logic [1:0]             term_std_fiber_out,
  output logic                   term_std_led,
  input  logic                   term_fan_fiber_in,
  output logic [9:0]             term_fan_lemo_out,
  output logic                   term_fan_fiber_out,
  output logic                   term_fan_led
);

  logic clk_n;
  assign clk_n = ~clk;   // C1 of the DDR registers (a clock inversion in the I/O tile on the FPGA)

  // ---------------- control ----------------
  logic [7:0] rx_data, tx_data;
  logic       rx_valid, tx_valid, tx_ready;

  uart #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk, .rst_n, .rx(uart_rx), .tx(uart_tx),
    .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready
  );

  ch_cfg_t         ch_cfg    [NCH];
  logic [TAPW-1:0] ch_tap    [NCH];
  logic            ch_arm    [NCH];
  logic [31:0]     ch_pulses [NCH];
  rate_cfg_t       grp_cfg   [NGRP];
  logic            master, sync_req, tap_load, taps_loaded, sync_seen;

  host_regs #(.NCH(NCH), .NGRP(NGRP)) u_regs (
    .clk, .rst_n, .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready,
    .ch_cfg, .ch_tap, .ch_arm, .grp_cfg, .master, .rf_clk_sel, .sync_req, .tap_load,
    .ch_pulses, .taps_loaded, .sync_seen
  );

  // ---------------- board-to-board reset link ----------------
  logic [1:0] tx_line, rx_pair;
  logic       sync_local, sync_remote, sync;

  sync_encoder u_enc (
    .clk, .rst_n, .master, .sync_req, .line(tx_line), .sync_local
  );

  oddr2_model u_sfp_oddr (
    .D0(tx_line[1]), .D1(tx_line[0]), .C0(clk), .C1(clk_n),
    .CE(1'b1), .R(1'b0), .S(1'b0), .Q(sfp_tx)
  );

  iddr2_model u_sfp_iddr (
    .D(sfp_rx), .C0(clk), .C1(clk_n), .CE(1'b1), .R(1'b0),
    .Q0(rx_pair[0]), .Q1(rx_pair[1])
  );

  sync_decoder u_dec (
    .clk, .rst_n, .pair(rx_pair), .sync(sync_remote), .link_ok(sfp_link_ok)
  );

  assign sync = master ? sync_local : sync_remote;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sync_seen <= 1'b0;
    else if (sync) sync_seen <= 1'b1;
  end

  // ---------------- rate generators ----------------
  logic tick [NGRP];

  for (genvar g = 0; g < NGRP; g++) begin : g_rate
    logic [PW-1:0] period;
    rate_generator #(.CLK_HZ(CLK_HZ)) u_rate (
      .clk, .rst_n, .cfg(grp_cfg[g]), .sync, .tick(tick[g]), .period
    );
  end

  // ---------------- tap load after reset and on request ----------------
  logic boot_load, boot_done, load_taps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      boot_done <= 1'b0;
      boot_load <= 1'b0;
    end else begin
      boot_load <= !boot_done;
      boot_done <= 1'b1;
    end
  end

  assign load_taps = boot_load || tap_load;

  // ---------------- trigger channels and output path ----------------
  logic [NCH-1:0] trig, trig_pin, tap_done;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic dly_rst, dly_ce, dly_inc, oq, tout, busy;
    logic [7:0] tap_now;

    trigger_channel u_ch (
      .clk, .rst_n, .cfg(ch_cfg[c]), .tick(tick[ch_cfg[c].group]), .arm(ch_arm[c]),
      .trig(trig[c]), .pulses(ch_pulses[c])
    );

    tap_loader u_tap (
      .clk, .rst_n, .load(load_taps), .tap(ch_tap[c]),
      .dly_rst, .dly_ce, .dly_inc, .done(tap_done[c])
    );

    oddr2_model u_oddr (
      .D0(trig[c]), .D1(trig[c]), .C0(clk), .C1(clk_n),
      .CE(1'b1), .R(1'b0), .S(1'b0), .Q(oq)
    );

    iodelay2_model u_dly (
      .ODATAIN(oq), .T(1'b0), .CLK(clk), .CE(dly_ce), .INC(dly_inc), .RST(dly_rst),
      .CAL(1'b0), .DOUT(trig_pin[c]), .TOUT(tout), .BUSY(busy), .TAP_VALUE(tap_now)
    );

    assign j2_out[c / 16][c % 16] = trig_pin[c];
  end

  if (NSLOT * 16 > NCH) begin : g_pad
    for (genvar u = NCH; u < NSLOT * 16; u++) begin : g_unused
      assign j2_out[u / 16][u % 16] = 1'b0;
    end
  end

  assign taps_loaded = &tap_done && boot_done;

  // ---------------- remote terminals ----------------
  terminal_cpld #(.N_IN(2), .FANOUT(1), .REPEAT_ELECTRICAL(1'b1), .LED_HOLD(LED_HOLD)) u_term_std (
    .clk(term_clk), .rst_n, .fiber_in(term_std_fiber_in), .lemo_in(term_std_lemo_in),
    .lemo_out(term_std_lemo_out), .fiber_out(term_std_fiber_out), .led(term_std_led)
  );

  terminal_cpld #(.N_IN(1), .FANOUT(10), .REPEAT_ELECTRICAL(1'b0), .LED_HOLD(LED_HOLD)) u_term_fan (
    .clk(term_clk), .rst_n, .fiber_in(term_fan_fiber_in), .lemo_in(1'b0),
    .lemo_out(term_fan_lemo_out), .fiber_out(term_fan_fiber_out), .led(term_fan_led)
  );

endmodule
