// tb_l0_shaper: self-checking test of l0_shaper.
// Drives random L0 patterns for several delay/stretch settings and checks
// every tick against out(t) = OR over k = 0..stretch of in(t - 2 - delay - k),
// where in(t) is the value presented before clock edge t.
module tb_l0_shaper;
  logic clk = 0, rst_n = 0, l0_in = 0, l0_out;
  logic [3:0] delay = 0, stretch = 0;
  int checks = 0, failures = 0;
  bit hist [$];

  l0_shaper #(.MAX_DELAY(16), .MAX_STRETCH(16)) dut (.*);

  always #1 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dl [4] = '{0, 3, 7, 15};
    int st [4] = '{0, 2, 5, 15};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cfg = 0; cfg < 8; cfg++) begin
      delay   = 4'(dl[cfg % 4]);
      stretch = 4'(st[(cfg / 2) % 4]);
      hist.delete();
      l0_in = 0;
      repeat (40) begin @(negedge clk); hist.push_back(0); end   // flush
      for (int t = 0; t < 600; t++) begin
        bit exp;
        l0_in = ($urandom % 8) < 2;
        @(posedge clk);
        hist.push_back(l0_in);
        @(negedge clk);
        exp = 0;
        for (int k = 0; k <= int'(stretch); k++) begin
          int idx;
          idx = hist.size() - 1 - 2 - int'(delay) - k;   // edge t - 2 - delay - k
          if (idx >= 0 && hist[idx]) exp = 1;
        end
        checks++;
        if (l0_out !== exp) begin
          failures++;
          if (failures < 10) $display("mismatch d=%0d l=%0d t=%0d out=%0b exp=%0b", delay, stretch, t, l0_out, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
