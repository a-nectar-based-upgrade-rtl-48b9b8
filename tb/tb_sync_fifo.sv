// tb_sync_fifo: random pushes and pops against a queue model (depth 16),
// checking data order, count, full and empty, including fill to full.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, full, empty;
  logic [15:0] wr_data = '0, rd_data;
  logic [4:0] count;
  logic [15:0] model [$];
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(16), .DEPTH(16)) dut (.*);
  always #1 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int bias;
      bias = (t / 500) % 2 ? 3 : 1;   // phases that fill and that drain
      wr_en   = ($urandom % 4) < bias + 1 && !full;
      rd_en   = ($urandom % 4) < 3 - bias + 1 && !empty;
      wr_data = 16'($urandom);
      checks++;
      if (!empty && rd_data != model[0]) begin
        failures++;
        if (failures < 10) $display("data %h exp %h", rd_data, model[0]);
      end
      checks++;
      if (int'(count) != model.size() || full != (model.size() == 16) || empty != (model.size() == 0))
        failures++;
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
