// tb_roi_readout: readout controller against a stand-in for the chips.
// The stand-in answers each rd_conv one tick later with per-channel data
// that depend on the conversion number. Checks, for ROI lengths 16, 24, 48
// and two integration starts: number of conversions = 16 + ROI, that
// sca_stop is held during the readout and released at the end, the
// charges (sum of the INT_LEN samples after the 16 stale ones), the
// waveform store, and the readout time (n + n/16) * 80 ticks
// (0.1 us per cell at 1.25 ns per tick) up to a fixed overhead.
module tb_roi_readout;
  import hess_pkg::*;
  logic clk = 0, rst_n = 0;
  logic stop_cmd = 0;
  logic [5:0] roi_len, int_start;
  logic sca_stop, rd_start, rd_conv, dout_valid = 0, busy, done;
  adc_t dout_hg [16], dout_lg [16];
  charge_t charge_hg [16], charge_lg [16];
  logic [5:0] wave_addr = '0;
  adc_t wave_hg [16], wave_lg [16];
  int checks = 0, failures = 0, nconv = 0;

  roi_readout dut (.*);
  always #1 clk = ~clk;

  function automatic adc_t sample(input int k, input int c, input bit lg);
    return adc_t'((k * 37 + c * 11 + (lg ? 1000 : 0)) % 4096);
  endfunction

  // chip stand-in
  always @(posedge clk) begin
    dout_valid <= 1'b0;
    if (rd_start) nconv = 0;
    if (rd_conv) begin
      dout_valid <= 1'b1;
      for (int c = 0; c < 16; c++) begin
        dout_hg[c] <= sample(nconv, c, 0);
        dout_lg[c] <= sample(nconv, c, 1);
      end
      nconv++;
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int roi, input int istart);
    int t0, t1, n, expt;
    roi_len = 6'(roi); int_start = 6'(istart);
    @(negedge clk);
    stop_cmd = 1; t0 = $time;
    @(negedge clk);
    stop_cmd = 0;
    check(sca_stop == 1'b1, "chips frozen after stop");
    while (!done) begin
      @(negedge clk);
      if (!done && !sca_stop) begin check(0, "sca_stop dropped early"); break; end
    end
    t1 = $time;
    @(negedge clk);
    check(sca_stop == 1'b0, "chips released after readout");
    n = 16 + roi;
    check(nconv == n, $sformatf("conversions %0d expected %0d", nconv, n));
    expt = (n + (n - 1) / 16) * 80;
    check((t1 - t0) / 2 >= expt - 80 && (t1 - t0) / 2 <= expt + 8,
          $sformatf("readout took %0d ticks, expected about %0d", (t1 - t0) / 2, expt));
    for (int c = 0; c < 16; c++) begin
      int eh, el;
      eh = 0; el = 0;
      for (int s = istart; s < istart + 16 && s < roi; s++) begin
        eh += sample(16 + s, c, 0);
        el += sample(16 + s, c, 1);
      end
      check(int'(charge_hg[c]) == eh && int'(charge_lg[c]) == el,
            $sformatf("charge ch%0d roi %0d: %0d/%0d exp %0d/%0d", c, roi, charge_hg[c], charge_lg[c], eh, el));
    end
    for (int s = 0; s < roi; s++) begin
      wave_addr = 6'(s);
      @(negedge clk);
      for (int c = 0; c < 16; c++)
        check(wave_hg[c] == sample(16 + s, c, 0) && wave_lg[c] == sample(16 + s, c, 1), "waveform sample");
    end
    // a stop during a readout is ignored
  endtask

  initial begin
    roi_len = 6'd16; int_start = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(16, 0);
    run(48, 0);
    run(48, 20);
    run(24, 4);
    // stop while busy: no second readout
    @(negedge clk); stop_cmd = 1; @(negedge clk); stop_cmd = 0;
    repeat (200) @(negedge clk);
    stop_cmd = 1; @(negedge clk); stop_cmd = 0;
    wait (done); @(negedge clk);
    check(nconv == 16 + 24, "stop during readout ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
