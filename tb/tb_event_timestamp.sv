// tb_event_timestamp: seconds load, PPS advance and sub-second counting.
// A PPS every 1000 ticks (shortened second); triggers at known ticks must
// latch the seconds count and the ticks elapsed since the last PPS edge
// (plus the fixed 3-tick PPS synchroniser delay).
module tb_event_timestamp;
  logic clk = 0, rst_n = 0, pps = 0, sec_load = 0, trig = 0, ts_valid;
  logic [31:0] sec_in = '0, ts_sec;
  logic [29:0] ts_sub;
  int checks = 0, failures = 0;
  longint tick = 0, last_pps = 0;

  event_timestamp dut (.*);
  always #1 clk = ~clk;
  always @(posedge clk) tick <= tick + 1;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  initial begin
    int expect_sec;
    repeat (3) @(negedge clk);
    rst_n = 1;
    sec_in = 32'd1_000_000; sec_load = 1; @(negedge clk); sec_load = 0;
    expect_sec = 1_000_000;
    for (int s = 0; s < 10; s++) begin
      int at;
      pps = 1; last_pps = tick; repeat (10) @(negedge clk); pps = 0;
      expect_sec++;
      at = 50 + $urandom % 900;
      repeat (at - 10) @(negedge clk);
      trig = 1; @(negedge clk); trig = 0;
      check(ts_valid == 1'b1, "valid pulse");
      check(ts_sec == 32'(expect_sec), $sformatf("seconds %0d exp %0d", ts_sec, expect_sec));
      check(int'(ts_sub) == at - 3, $sformatf("sub %0d exp %0d", ts_sub, at - 3));
      repeat (1000 - at - 1) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
