// tb_sync_decoder -- checks recovery of the reset word from the line.
// The testbench builds the half-bit stream itself (idle 1,0 and the word
// 1111 0000) and presents it in pairs at both alignments: even, and shifted
// by one half-bit as when the receiving clock samples in the other half of
// the bit. Each word must give exactly one sync pulse at a fixed latency,
// never while the link is down, and never from idle; the link supervisor
// must drop on a dead line and come back on the clock.
`timescale 1ns / 1ps
module tb_sync_decoder;
  logic clk = 0, rst_n = 0, sync, link_ok;
  logic [1:0] pair = 2'b10;
  int checks = 0, failures = 0, nsync = 0;
  bit q [$];       // half-bits waiting to be sent
  bit shift = 0;

  sync_decoder dut (.clk, .rst_n, .pair, .sync, .link_ok);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle(input int n);
    repeat (n) begin q.push_back(1); q.push_back(0); end
  endtask

  task automatic word();
    repeat (4) q.push_back(1);
    repeat (4) q.push_back(0);
  endtask

  // send everything queued, one pair per clock; return cycles of sync pulses
  task automatic run(output int at [$]);
    int cyc = 0;
    at.delete();
    while (q.size() >= 2) begin
      @(negedge clk);
      pair = {q.pop_front(), q.pop_front()};
      @(posedge clk); #1;
      if (sync) at.push_back(cyc);
      cyc++;
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int at [$];
    int lat [2];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      q.delete();
      repeat (30) q.push_back(0);  // dead line: link down
      if (s) q.push_back(0);       // one half-bit of slip
      idle(5);
      word();                       // link still down: ignored
      idle(30);
      run(at);
      check(at.size() == 0, "no sync while the link is down");
      check(link_ok, "link up after idle clock");
      for (int n = 0; n < 5; n++) begin
        q.delete();
        if (s) q.push_back(1);      // keep the slip: the stream continues
        idle($urandom_range(3, 12));
        begin int w0; w0 = q.size() / 2; word(); idle(8); run(at);
          check(at.size() == 1, $sformatf("alignment %0d: %0d sync pulses for one word", s, at.size()));
          if (at.size() == 1) begin
            if (n == 0) lat[s] = at[0] - w0;
            check(at[0] - w0 == lat[s], "fixed latency");
          end
        end
        if (s) void'(q.pop_back());
      end
    end
    check(lat[0] == 4 && (lat[1] == 4 || lat[1] == 5), $sformatf("latency %0d / %0d cycles", lat[0], lat[1]));
    // long idle: never a false sync
    q.delete(); idle(500); run(at);
    check(at.size() == 0, "no false sync from idle");
    // dead line drops the link
    q.delete(); repeat (30) q.push_back(0); run(at);
    check(!link_ok, "link down on a dead line");
    q.delete(); idle(20); run(at);
    check(link_ok, "link back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
