// tb_uart -- checks the serial port at a reduced bit time (16 clocks/bit).
// A serial model in the testbench sends random bytes, bit by bit, with the
// start/data/stop timing computed from the baud divisor; they must come out
// of the receiver intact. A byte with a broken stop bit must be dropped.
// The transmitter's line is decoded by the model, and its frame must last
// ten bit times with tx_ready low throughout.
`timescale 1ns / 1ps
module tb_uart;
  localparam int unsigned CLK_HZ = 1_600_000, BAUD = 100_000, DIV = 16;

  logic clk = 0, rst_n = 0, rx = 1, tx;
  logic [7:0] rx_data, tx_data = 0;
  logic rx_valid, tx_valid = 0, tx_ready;
  int checks = 0, failures = 0;
  logic [7:0] got [$];

  uart #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.clk, .rst_n, .rx, .tx, .rx_data, .rx_valid,
                                             .tx_data, .tx_valid, .tx_ready);

  always #5 clk = ~clk;
  always @(posedge clk) if (rx_valid) got.push_back(rx_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [7:0] b, input bit stop = 1);
    rx = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (DIV) @(posedge clk); end
    rx = stop; repeat (DIV) @(posedge clk);
    rx = 1; repeat (DIV) @(posedge clk);
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] sent [$];
    logic [7:0] b, r;
    int t_start, t_ready;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (DIV) @(posedge clk);
    for (int i = 0; i < 40; i++) begin b = 8'($urandom); sent.push_back(b); send(b); end
    check(got.size() == 40, $sformatf("received %0d of 40 bytes", got.size()));
    for (int i = 0; i < 40 && i < got.size(); i++)
      check(got[i] == sent[i], $sformatf("byte %0d: %02h expected %02h", i, got[i], sent[i]));
    // framing error: dropped
    got.delete();
    send(8'hA5, 0);
    repeat (2 * DIV) @(posedge clk);
    check(got.size() == 0, "byte with a low stop bit is dropped");
    send(8'h3C);
    check(got.size() == 1 && got[0] == 8'h3C, "receiver recovers after a framing error");

    // transmitter
    for (int i = 0; i < 20; i++) begin
      b = 8'($urandom);
      @(negedge clk); tx_data = b; tx_valid = 1;
      @(posedge clk); t_start = 0; @(negedge clk); tx_valid = 0;
      // the line is now in the start bit; sample mid-bit
      repeat (DIV / 2) @(posedge clk);
      check(tx == 0, "start bit");
      for (int k = 0; k < 8; k++) begin repeat (DIV) @(posedge clk); r[k] = tx; end
      repeat (DIV) @(posedge clk);
      check(tx == 1, "stop bit");
      check(r == b, $sformatf("tx byte %02h expected %02h", r, b));
      check(!tx_ready, "busy during stop bit");
      t_ready = 0;
      while (!tx_ready) begin @(posedge clk); t_ready++; end
      check(t_ready > DIV / 2 - 3 && t_ready < DIV / 2 + 3, $sformatf("frame length off by %0d", t_ready - DIV / 2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
