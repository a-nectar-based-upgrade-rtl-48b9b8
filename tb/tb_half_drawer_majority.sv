// tb_half_drawer_majority: random 8-bit L0 patterns; count must equal the
// number of set bits of the pattern presented one clock edge earlier.
module tb_half_drawer_majority;
  logic clk = 0, rst_n = 0;
  logic [7:0] l0 = '0, prev = '0;
  logic [3:0] count;
  int checks = 0, failures = 0;

  half_drawer_majority #(.NPIX(8)) dut (.*);
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
    for (int t = 0; t < 2000; t++) begin
      int exp;
      l0 = (t < 256) ? 8'(t) : 8'($urandom);
      @(posedge clk);
      prev = l0;
      @(negedge clk);
      exp = 0;
      for (int i = 0; i < 8; i++) exp += prev[i];
      checks++;
      if (int'(count) != exp) begin
        failures++;
        if (failures < 10) $display("pattern %b count %0d exp %0d", prev, count, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
