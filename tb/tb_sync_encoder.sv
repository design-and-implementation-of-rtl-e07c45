// tb_sync_encoder -- checks the reset code embedded in the clock stream.
// The idle line must be the forwarded clock (1,0 each cycle); a request on a
// master must give exactly the word 11 11 00 00 starting the next cycle,
// with the local re-phase pulse in that first cycle; the word must be
// DC-balanced with no run longer than four half-bits; requests during a word
// are ignored; a slave never sends a word.
`timescale 1ns / 1ps
module tb_sync_encoder;
  logic clk = 0, rst_n = 0, master = 1, sync_req = 0, sync_local;
  logic [1:0] line;
  int checks = 0, failures = 0;
  bit hb [$];   // every half-bit sent

  sync_encoder dut (.clk, .rst_n, .master, .sync_req, .line, .sync_local);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin hb.push_back(line[1]); hb.push_back(line[0]); end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] exp_word [4] = '{2'b11, 2'b11, 2'b00, 2'b00};
    int ones, run, maxrun;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin @(negedge clk); check(line == 2'b10 && !sync_local, "idle clock"); end
    for (int n = 0; n < 10; n++) begin
      sync_req = 1; @(negedge clk); sync_req = 0;
      for (int k = 0; k < 4; k++) begin
        check(line == exp_word[k], $sformatf("word cycle %0d: %b", k, line));
        check(sync_local == (k == 0), "local re-phase pulse in the first word cycle");
        if (k == 1) sync_req = 1;           // ignored: word in progress
        @(negedge clk);
        sync_req = 0;
      end
      check(line == 2'b10, "back to idle after the word");
      repeat ($urandom_range(3, 20)) begin @(negedge clk); check(line == 2'b10, "idle"); end
    end
    // balance and run length over the whole record
    ones = 0; run = 0; maxrun = 0;
    foreach (hb[i]) begin
      ones += hb[i];
      run = (i > 0 && hb[i] == hb[i-1]) ? run + 1 : 1;
      if (run > maxrun) maxrun = run;
    end
    check(2 * ones == hb.size(), $sformatf("DC balance: %0d ones in %0d half-bits", ones, hb.size()));
    check(maxrun == 4, $sformatf("longest run %0d half-bits", maxrun));
    // slave
    master = 0;
    sync_req = 1; @(negedge clk); sync_req = 0;
    for (int i = 0; i < 10; i++) begin check(line == 2'b10 && !sync_local, "slave sends plain clock"); @(negedge clk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
