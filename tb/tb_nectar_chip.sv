// tb_nectar_chip: behavioural NECTAr model.
// The write input is a counter that advances on every 1 GHz edge, so a
// stored value tells when it was sampled. Clock ratio 1 GHz : 800 MHz is
// kept (periods 4 and 5 time units). Checks:
//  - writing wraps over 1024 cells and stops on `stop`,
//  - the ROI starts L = 1024 - Nd cells before the last sample,
//  - the first 16 conversions are stale (zero after reset, then the last
//    16 converted cells of the previous readout),
//  - ROI samples are consecutive and carry the line DAC of cell mod 16,
//  - writing resumes after stop is released.
module tb_nectar_chip;
  logic rst_n = 0, clk_sca = 0, clk = 0;
  logic [11:0] ain_hg = '0, ain_lg = '0;
  logic stop = 0, rd_start = 0, rd_conv = 0;
  logic [9:0] nd;
  logic signed [7:0] line_dac [16];
  logic dout_valid;
  logic [11:0] dout_hg, dout_lg;
  int checks = 0, failures = 0;
  int got_hg [$], got_lg [$];
  int vstop;
  localparam int L = 100, R = 24;

  nectar_chip dut (.*);

  always #2 clk_sca = ~clk_sca;
  always #2.5 clk = ~clk;

  always @(posedge clk_sca) if (rst_n) begin
    ain_hg <= ain_hg + 1'b1;
    ain_lg <= 12'hFFF - (ain_hg + 1'b1);
  end

  always @(posedge clk) if (dout_valid) begin
    got_hg.push_back(int'(dout_hg));
    got_lg.push_back(int'(dout_lg));
  end

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  task automatic readout(input int n);
    got_hg.delete(); got_lg.delete();
    @(negedge clk); stop = 1; vstop = int'(ain_hg);
    repeat (4) @(negedge clk);
    rd_start = 1; @(negedge clk); rd_start = 0;
    for (int k = 0; k < n; k++) begin
      rd_conv = 1; @(negedge clk); rd_conv = 0;
      repeat (3) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    stop = 0;
  endtask

  function automatic int dac(input int ci);
    return int'(line_dac[ci % 16]);
  endfunction

  // Does the ROI read back found cells c, c+1, ... written in the first epoch?
  function automatic bit window_ok(input int c);
    for (int k = 0; k < R; k++) begin
      int val, off;
      val = (c + k) & 4095;
      off = dac((c + k) % 1024);
      if (got_hg[16 + k] != val + off) return 0;
      if (got_lg[16 + k] != 4095 - val + off) return 0;
    end
    return 1;
  endfunction

  initial begin
    int v0, found;
    int prev_hg [16];
    nd = 10'(1024 - L);
    for (int k = 0; k < 16; k++) line_dac[k] = 8'(2 * k - 16);
    #20 rst_n = 1;
    #6000;                         // > 1024 ns: the ring has wrapped
    readout(16 + R);
    check(got_hg.size() == 16 + R, "sample count");
    for (int k = 0; k < 16; k++) check(got_hg[k] == 0 && got_lg[k] == 0, "stale after reset = 0");
    // first ROI value: cell v0 holds v0 (plus 1024 per wrap); find v0
    found = 0;
    for (int cc = -6; cc <= 2; cc++)
      if (window_ok(vstop - L + cc)) begin found = 1; v0 = vstop - L + cc; end
    check(found == 1, $sformatf("ROI = consecutive cells with line offsets near stop-L (stop at %0d, first %0d)", vstop, got_hg[16]));
    // after readout 1 the stale pipeline holds cells v0+R .. v0+R+15
    for (int k = 0; k < 16; k++) prev_hg[k] = ((v0 + R + k) & 12'hFFF) + dac((v0 + R + k) % 1024);
    for (int k = 0; k < 16; k++) line_dac[k] = 8'sd0;
    #3000;                         // writing resumed
    readout(16 + R);
    for (int k = 0; k < 16; k++) check(got_hg[k] == prev_hg[k], "stale = previous readout tail");
    for (int k = 1; k < R; k++) check(got_hg[16 + k] == ((got_hg[16] + k) & 12'hFFF), "consecutive after resume");
    check(got_hg[16] >= vstop - L - 8 && got_hg[16] <= vstop - L + 2, $sformatf("resume position %0d vs stop %0d", got_hg[16], vstop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
