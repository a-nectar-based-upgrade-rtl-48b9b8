// tb_dib_trigger_ctrl: camera trigger control of the DIB.
// Pulse lengths on the output lines are measured here: drawer line stop = 8,
// accept = 16 ticks; central-trigger line active = 8, busy = 16 ticks; the
// central trigger's accept is sent as a 24-tick pulse. Checks: L1 from any
// sector gives stop + active; a trigger inside the hold-off gives busy and
// no stop; the hold-off lasts t_b = 5920 ticks (7.4 us) for ROI 16 and
// 3200 + (64 + 4) * 80 for ROI 48; an accept inside the hold-off is
// forwarded once; one after it is ignored; the SPE trigger source works.
module tb_dib_trigger_ctrl;
  import hess_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_SECTORS-1:0] sector_trig = '0;
  logic spe_trig = 0, src_spe = 0, ct_rx = 0;
  logic [5:0] roi_len = 6'd16;
  logic ct_tx, drawer_ctrl, trig, in_holdoff;
  logic [31:0] n_trig, n_busy, n_accept;
  int checks = 0, failures = 0;
  int d_len [$], c_len [$];
  int d_run = 0, c_run = 0;
  longint tick = 0, ho_start = 0, ho_len = 0;

  dib_trigger_ctrl dut (.*);
  always #1 clk = ~clk;

  always @(posedge clk) begin
    tick <= tick + 1;
    if (drawer_ctrl) d_run <= d_run + 1; else if (d_run) begin d_len.push_back(d_run); d_run <= 0; end
    if (ct_tx) c_run <= c_run + 1; else if (c_run) begin c_len.push_back(c_run); c_run <= 0; end
  end
  always @(posedge clk) begin
    if (trig) ho_start <= tick;
    if ($fell(in_holdoff)) ho_len <= tick - ho_start - 1;   // $fell sees it one edge late
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  task automatic sector_pulse(input int s);
    sector_trig[s] = 1; repeat (5) @(negedge clk); sector_trig[s] = 0;
    repeat (40) @(negedge clk);
  endtask

  task automatic ct_accept();
    ct_rx = 1; repeat (24) @(negedge clk); ct_rx = 0;
    repeat (40) @(negedge clk);
  endtask

  task automatic expect_lines(input int d[$], input int c[$], input string what);
    check(d_len == d, $sformatf("%s: drawer pulses %p expected %p", what, d_len, d));
    check(c_len == c, $sformatf("%s: central-trigger pulses %p expected %p", what, c_len, c));
    d_len.delete(); c_len.delete();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    d_len.delete(); c_len.delete();        // nothing before reset counts
    sector_pulse(7);
    expect_lines('{8}, '{8}, "L1");
    sector_pulse(30);                      // inside hold-off
    expect_lines('{}, '{16}, "busy");
    ct_accept();                           // accept inside hold-off
    expect_lines('{16}, '{}, "accept forwarded");
    ct_accept();                           // second accept: ignored
    expect_lines('{}, '{}, "second accept");
    wait (!in_holdoff);
    repeat (5) @(negedge clk);
    check(ho_len == 5920, $sformatf("hold-off %0d ticks, expected 5920", ho_len));
    ct_accept();                           // outside hold-off: ignored
    expect_lines('{}, '{}, "late accept");
    roi_len = 6'd48;
    sector_pulse(0);
    expect_lines('{8}, '{8}, "L1 again");
    wait (!in_holdoff);
    repeat (5) @(negedge clk);
    check(ho_len == 3200 + 68 * 80, $sformatf("hold-off ROI 48: %0d", ho_len));
    src_spe = 1;
    sector_pulse(3);                       // ignored in SPE mode
    expect_lines('{}, '{}, "sector ignored with SPE source");
    spe_trig = 1; repeat (3) @(negedge clk); spe_trig = 0; repeat (40) @(negedge clk);
    expect_lines('{8}, '{8}, "SPE trigger");
    check(n_trig == 3 && n_busy == 1 && n_accept == 1, $sformatf("counters %0d %0d %0d", n_trig, n_busy, n_accept));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
