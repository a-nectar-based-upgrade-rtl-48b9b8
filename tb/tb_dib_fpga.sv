// tb_dib_fpga: the drawer interface box FPGA (trigger control, trigger
// timestamps, interlock) with a 20-tick horn.
//
// Pulse monitors measure every high pulse on the drawers' control line and
// on the fibre to the central trigger. The sequence: load the GPS seconds,
// give a PPS, raise one sector comparator -> stop (8 ticks) to the drawers,
// active (8 ticks) to the central trigger, a timestamp with the loaded
// seconds, and a hold-off of 4 us + (n + n/16) * 0.1 us = 5920 ticks for
// n = 32. A second trigger inside the hold-off -> busy (16 ticks), no stop.
// An accept (24 ticks) from the central trigger -> accept (16 ticks) to the
// drawers. Then the SPE source, and the interlock: open request with horn,
// smoke closes the lid and cuts drawer power.
module tb_dib_fpga;
  import hess_pkg::*;
  localparam int unsigned HT = 20;
  logic clk = 0, rst_n = 0;
  logic [N_SECTORS-1:0] sector_trig = '0;
  logic spe_trig = 0, src_spe = 0, ct_rx = 0, ct_tx, drawer_ctrl, in_holdoff;
  logic [5:0] roi_len = 6'd16;
  logic [31:0] n_trig, n_busy, n_accept;
  logic pps = 0, sec_load = 0, ts_valid;
  logic [31:0] sec_in = '0, ts_sec;
  logic [29:0] ts_sub;
  logic lid_open_req = 0, power_fail = 0, smoke = 0, ventilation_ok = 1, contact_pressure_ok = 1;
  logic contact_local_mode = 0, contact_front_lid_open = 0, contact_front_lid_moving = 0;
  logic contact_back_lid_open = 0, ambient_light_high = 0;
  logic remote_front_lid_open, horn, drawer_power_enable, alarm, lid_status_open, back_door_open;
  int checks = 0, failures = 0;
  int tick = 0;
  int dctl_q[$], ct_q[$];
  int dlen = 0, clen = 0, ho_len = 0, ho_last = 0, n_ts = 0;
  logic [31:0] last_sec;

  dib_fpga #(.HORN_TICKS(HT)) dut (.*);
  always #1 clk = ~clk;

  always @(posedge clk) begin
    tick <= tick + 1;
    if (drawer_ctrl) dlen <= dlen + 1; else if (dlen != 0) begin dctl_q.push_back(dlen); dlen <= 0; end
    if (ct_tx) clen <= clen + 1; else if (clen != 0) begin ct_q.push_back(clen); clen <= 0; end
    if (in_holdoff) ho_len <= ho_len + 1; else if (ho_len != 0) begin ho_last <= ho_len; ho_len <= 0; end
    if (rst_n && ts_valid) begin n_ts <= n_ts + 1; last_sec <= ts_sec; end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic expect_pulses(ref int q[$], input int lens[$], input string what);
    check(q.size() == lens.size(), $sformatf("%s: %0d pulses, expected %0d", what, q.size(), lens.size()));
    for (int i = 0; i < lens.size() && i < q.size(); i++)
      check(q[i] == lens[i], $sformatf("%s pulse %0d: %0d ticks, expected %0d", what, i, q[i], lens[i]));
    q.delete();
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    dctl_q.delete(); ct_q.delete();
    sec_in = 32'd777; sec_load = 1; @(negedge clk); sec_load = 0;
    pps = 1; repeat (4) @(negedge clk); pps = 0;
    repeat (10) @(negedge clk);
    // ---- L1 from one sector
    sector_trig[17] = 1; repeat (3) @(negedge clk); sector_trig[17] = 0;
    repeat (100) @(negedge clk);
    expect_pulses(dctl_q, '{8}, "stop to drawers");
    expect_pulses(ct_q, '{8}, "active to central trigger");
    check(n_ts == 1 && last_sec == 32'd778, $sformatf("timestamp n=%0d sec=%0d", n_ts, last_sec));
    // ---- second trigger inside the hold-off
    sector_trig[3] = 1; repeat (3) @(negedge clk); sector_trig[3] = 0;
    repeat (100) @(negedge clk);
    expect_pulses(dctl_q, '{}, "no stop in hold-off");
    expect_pulses(ct_q, '{16}, "busy to central trigger");
    // ---- accept from the central trigger
    ct_rx = 1; repeat (24) @(negedge clk); ct_rx = 0;
    repeat (60) @(negedge clk);
    expect_pulses(dctl_q, '{16}, "accept to drawers");
    ct_rx = 1; repeat (24) @(negedge clk); ct_rx = 0;   // second accept ignored
    repeat (60) @(negedge clk);
    expect_pulses(dctl_q, '{}, "second accept dropped");
    wait (!in_holdoff);
    repeat (3) @(negedge clk);
    check(ho_last == int'(holdoff_ticks(32)) && ho_last == 5920, $sformatf("hold-off %0d ticks", ho_last));
    check(n_trig == 1 && n_busy == 1 && n_accept == 1, "counters");
    // ---- SPE source: the sectors are ignored, the SPE input triggers
    src_spe = 1;
    sector_trig[5] = 1; repeat (3) @(negedge clk); sector_trig[5] = 0;
    repeat (50) @(negedge clk);
    expect_pulses(dctl_q, '{}, "sectors ignored with SPE source");
    spe_trig = 1; repeat (3) @(negedge clk); spe_trig = 0;
    repeat (50) @(negedge clk);
    expect_pulses(dctl_q, '{8}, "SPE trigger stop");
    check(n_ts == 2, "second timestamp");
    // ---- interlock
    lid_open_req = 1;
    repeat (2) @(negedge clk);
    check(horn == 1 && remote_front_lid_open == 0, "horn before opening");
    repeat (HT + 2) @(negedge clk);
    check(horn == 0 && remote_front_lid_open == 1, "lid opened after horn");
    contact_front_lid_open = 1;
    smoke = 1;
    @(negedge clk);
    check(alarm && !drawer_power_enable, "smoke alarm, power cut");
    repeat (HT + 2) @(negedge clk);
    check(remote_front_lid_open == 0, "lid closed on alarm");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
