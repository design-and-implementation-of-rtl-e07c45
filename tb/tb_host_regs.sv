// tb_host_regs -- checks the command parser and register file at full size
// (80 channels, 2 rate groups). Commands are fed as bytes; replies are
// collected with a randomly stalling ready. A shadow copy of the register
// map kept by the testbench predicts every read-back: random writes to
// random channel registers, group registers and the control word, followed
// by reads of all of them. The decoded configuration outputs, the arm and
// request pulses, status inputs and the error reply are checked too.
`timescale 1ns / 1ps
module tb_host_regs;
  import timing_pkg::*;
  localparam int NCH = 80, NGRP = 2;

  logic clk = 0, rst_n = 0;
  logic [7:0] rx_data = 0, tx_data;
  logic rx_valid = 0, tx_valid, tx_ready = 0;
  ch_cfg_t ch_cfg [NCH];
  logic [TAPW-1:0] ch_tap [NCH];
  logic ch_arm [NCH];
  rate_cfg_t grp_cfg [NGRP];
  logic master, rf_clk_sel, sync_req, tap_load;
  logic [31:0] ch_pulses [NCH];
  logic taps_loaded = 0, sync_seen = 0;
  int checks = 0, failures = 0, arms = 0, syncs = 0, loads = 0;
  logic [7:0] rsp [$];
  logic [31:0] shadow [int];

  host_regs #(.NCH(NCH), .NGRP(NGRP)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (tx_valid && tx_ready) rsp.push_back(tx_data);
    tx_ready <= ($urandom_range(0, 3) != 0);
    for (int c = 0; c < NCH; c++) arms += ch_arm[c];
    syncs += sync_req;
    loads += tap_load;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic byte_in(input logic [7:0] b);
    @(negedge clk); rx_data = b; rx_valid = 1;
    @(negedge clk); rx_valid = 0;
    repeat ($urandom_range(0, 4)) @(negedge clk);
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    rsp.delete();
    byte_in(CMD_WRITE); byte_in(a[15:8]); byte_in(a[7:0]);
    byte_in(d[31:24]); byte_in(d[23:16]); byte_in(d[15:8]); byte_in(d[7:0]);
    repeat (10) @(negedge clk);
    check(rsp.size() == 1 && rsp[0] == RSP_ACK, $sformatf("write %04h ack", a));
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    rsp.delete();
    byte_in(CMD_READ); byte_in(a[15:8]); byte_in(a[7:0]);
    repeat (30) @(negedge clk);
    check(rsp.size() == 4, $sformatf("read %04h gives %0d bytes", a, rsp.size()));
    d = (rsp.size() == 4) ? {rsp[0], rsp[1], rsp[2], rsp[3]} : 'x;
  endtask

  function automatic logic [31:0] mask_of(input int off);
    case (off)
      0, 1: return 32'h00FF_FFFF;
      2:    return 32'h3;
      3:    return 32'hFFFF;
      4:    return 32'h1;
      5:    return 32'hFF;
      default: return 0;
    endcase
  endfunction

  initial begin
    #50_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, v;
    int c, off, a0;
    for (int i = 0; i < NCH; i++) ch_pulses[i] = 32'(i * 1000 + 7);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset values
    rd(A_CTRL, d);   check(d == 32'h1, "reset: master, crystal clock");
    rd(A_ID, d);     check(d == NCH, "id = channel count");
    rd(A_GRP_BASE, d); check(d == RATE_10HZ, "reset rate 10 Hz");
    rd(A_CH_BASE + 8 * 79 + 2, d); check(d == CH_OFF, "reset channel off");

    // random channel writes
    for (int i = 0; i < 120; i++) begin
      c = $urandom_range(0, NCH - 1); off = $urandom_range(0, 5);
      v = $urandom & mask_of(off);
      if (off == 2 && v == 3) v = 1;
      a0 = arms;
      wr(16'(A_CH_BASE + 8 * c + off), v);
      shadow[8 * c + off] = v;
      if (off == 2 || off == 3) check(arms == a0 + 1 && ch_arm[c] == 0, "arm pulse on mode/burst write");
      else                       check(arms == a0, "no arm on other writes");
      case (off)
        0: check(ch_cfg[c].delay == v[DW-1:0], "delay output");
        1: check(ch_cfg[c].width == v[DW-1:0], "width output");
        2: check(ch_cfg[c].mode == ch_mode_e'(v[1:0]), "mode output");
        3: check(ch_cfg[c].burst_count == v[CNTW-1:0], "burst output");
        4: check(ch_cfg[c].group == v[0], "group output");
        5: check(ch_tap[c] == v[TAPW-1:0], "tap output");
        default: ;
      endcase
    end
    foreach (shadow[k]) begin
      rd(16'(A_CH_BASE + k), d);
      check(d == shadow[k], $sformatf("read-back ch %0d off %0d: %h expected %h", k / 8, k % 8, d, shadow[k]));
    end
    // pulse counter status
    rd(A_CH_BASE + 8 * 42 + 6, d); check(d == 42 * 1000 + 7, "pulse counter read-back");
    // groups
    wr(A_GRP_BASE + 2, RATE_CUSTOM); wr(A_GRP_BASE + 3, 32'd1234567);
    check(grp_cfg[1].sel == RATE_CUSTOM && grp_cfg[1].custom_period == 1234567, "group 1 outputs");
    rd(A_GRP_BASE + 3, d); check(d == 1234567, "custom period read-back");
    check(grp_cfg[0].sel == RATE_10HZ, "group 0 untouched");
    // control word and its one-shot requests
    wr(A_CTRL, 32'b1110);
    check(!master && rf_clk_sel && syncs == 1 && loads == 1 && !sync_req && !tap_load, "control word and requests");
    rd(A_CTRL, d); check(d == 32'b10, "control read-back (requests self-clear)");
    taps_loaded = 1; sync_seen = 1;
    rd(A_STATUS, d); check(d == 32'b11, "status word");
    // unknown command byte
    rsp.delete(); byte_in(8'h33); repeat (10) @(negedge clk);
    check(rsp.size() == 1 && rsp[0] == RSP_NAK, "error reply");
    // unmapped address reads zero, write is acknowledged and harmless
    wr(16'h0800, 32'hDEAD_BEEF);
    rd(16'h0800, d); check(d == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
