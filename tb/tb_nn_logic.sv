// tb_nn_logic: checks the next-neighbour cluster logic on a 4x4 grid.
// Reference: a pattern fires if some active pixel has at least 2 active edge
// neighbours, computed here from row/column arithmetic. Directed cases
// (isolated pixels, a pair, an L-shaped and a straight triple, a diagonal)
// and random patterns.
module tb_nn_logic;
  logic clk = 0, rst_n = 0;
  logic [15:0] l0 = '0;
  logic nn_trig;
  int checks = 0, failures = 0;

  nn_logic #(.NN_MULT(3)) dut (.*);
  always #1 clk = ~clk;

  function automatic bit ref_nn(input logic [15:0] v);
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++)
        if (v[4*r+c]) begin
          int n = 0;
          if (r > 0 && v[4*(r-1)+c]) n++;
          if (r < 3 && v[4*(r+1)+c]) n++;
          if (c > 0 && v[4*r+c-1]) n++;
          if (c < 3 && v[4*r+c+1]) n++;
          if (n >= 2) return 1;
        end
    return 0;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [15:0] v, input int expect_fire);
    bit exp;
    l0 = v;
    @(posedge clk);
    @(negedge clk);
    exp = ref_nn(v);
    checks++;
    if (nn_trig !== exp || (expect_fire >= 0 && exp != bit'(expect_fire))) begin
      failures++;
      if (failures < 10) $display("pattern %h nn %0b exp %0b", v, nn_trig, exp);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    apply(16'h0000, 0);
    apply(16'h8421, 0);   // diagonal: no edge neighbours
    apply(16'h0003, 0);   // pair only
    apply(16'h0007, 1);   // straight triple in row 0
    apply(16'h0013, 1);   // L-shape: pixels 0,1,4
    apply(16'h1111, 1);   // column 0, 4 pixels
    apply(16'hA5A5, 0);   // checkerboard
    apply(16'h0808, 0);   // pixels 3 and 11: not adjacent
    apply(16'h0088, 0);   // pixels 3 and 7: pair
    for (int t = 0; t < 3000; t++) apply(16'($urandom) & 16'($urandom), -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
