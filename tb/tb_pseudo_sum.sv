// tb_pseudo_sum: random L0 patterns of 8 pixels; after each clock edge the
// sum must equal the number of high samples over the 4 most recent
// patterns (the pattern of that edge and the 3 before), so each pixel adds
// at most 4. Also checks the clipping: a pixel held high for long adds 4.
module tb_pseudo_sum;
  logic clk = 0, rst_n = 0;
  logic [7:0] l0 = '0;
  logic [5:0] sum;
  logic [7:0] hist [$];
  int checks = 0, failures = 0;

  pseudo_sum #(.NPIX(8), .WINDOW(4)) dut (.*);
  always #1 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic [7:0] v);
    int exp;
    l0 = v;
    @(posedge clk);
    hist.push_back(v);
    @(negedge clk);
    // sum registered at edge t from the pattern of edge t and three older
    exp = 0;
    for (int k = 0; k < 4; k++)
      if (int'(hist.size()) - 1 - k >= 0)
        for (int i = 0; i < 8; i++) exp += hist[hist.size() - 1 - k][i];
    checks++;
    if (int'(sum) != exp) begin
      failures++;
      if (failures < 10) $display("sum %0d exp %0d", sum, exp);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) step(8'h00);
    // one pixel high for 20 ticks: contribution must saturate at 4
    for (int t = 0; t < 20; t++) step(8'h01);
    checks++;
    if (sum != 6'd4) failures++;
    for (int t = 0; t < 20; t++) step(8'hFF);
    checks++;
    if (sum != 6'd32) failures++;
    for (int t = 0; t < 3000; t++) step(8'($urandom) & 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
