// tb_camera: end-to-end test of the whole camera logic (60 drawers with
// their NECTAr chip models, analogue trigger board model, DIB FPGA).
//
// Runs with all 60 drawers, but with a 64-word drawer FIFO (so a waveform
// event overflows it and the event builder must stall) and a 50-tick horn.
// The pixel inputs are constant per pixel, so every charge is 16 times the
// pixel level and every waveform sample equals it. The testbench plays the
// central trigger (it answers "active" with "accept" when asked to) and the
// drawers' ARM computers (it reads the FIFOs over the memory buses).
//
// Each mechanism is counted and must happen at least once:
//   majority L1, no trigger below threshold, busy during hold-off, hold-off
//   length, accepted event read out and checked, discarded event, NN mode,
//   pseudo-sum mode, SPE trigger source, waveform mode, FIFO-full stall,
//   trigger timestamps, interlock horn + lid opening, alarm closing.
module tb_camera;
  import hess_pkg::*;
  localparam int ND = N_DRAWERS;
  localparam int FD = 64;
  localparam int HT = 50;
  localparam int QTHR = 110;    // 3 levels * 33 mV > 110 * 0.76 mV > 2 levels

  logic clk = 0, clk_sca = 0, rst_n = 0;
  logic [15:0] l0_in [ND];
  adc_t ain_hg [ND][16], ain_lg [ND][16];
  logic bus_cs [ND], bus_we [ND];
  logic [9:0] bus_addr [ND];
  logic [15:0] bus_wdata [ND], bus_rdata [ND];
  logic [9:0] q_thr = 10'(QTHR);
  logic spe_trig = 0, src_spe = 0, ct_rx = 0, ct_tx, in_holdoff;
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
  int lvl_hg [ND][16], lvl_lg [ND][16];
  int ho_len = 0, ho_last = 0, n_ts = 0;
  int m_maj = 0, m_below = 0, m_busy = 0, m_holdoff = 0, m_keep = 0, m_discard = 0;
  int m_nn = 0, m_psum = 0, m_spe = 0, m_wave = 0, m_stall = 0, m_ts = 0;
  int m_horn = 0, m_alarm = 0;

  hess1u_camera #(.FIFO_DEPTH(FD), .HORN_TICKS(HT)) dut (.*);

  always #5 clk = ~clk;
  always #4 clk_sca = ~clk_sca;

  always @(posedge clk) begin
    if (in_holdoff) ho_len <= ho_len + 1;
    else if (ho_len != 0) begin ho_last <= ho_len; ho_len <= 0; end
    if (rst_n && ts_valid) n_ts <= n_ts + 1;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // One access on every drawer bus at once.
  task automatic bus_all(input bit we, input logic [9:0] a, input logic [15:0] d);
    for (int i = 0; i < ND; i++) begin
      bus_cs[i] = 1; bus_we[i] = we; bus_addr[i] = a; bus_wdata[i] = d;
    end
    @(negedge clk);
    for (int i = 0; i < ND; i++) begin bus_cs[i] = 0; bus_we[i] = 0; end
  endtask

  // Drive an L0 pattern on drawer dr for len ticks.
  task automatic l0_pulse(input int dr, input logic [15:0] pat, input int len);
    l0_in[dr] = pat;
    repeat (len) @(negedge clk);
    l0_in[dr] = '0;
  endtask

  task automatic accept_cmd();
    ct_rx = 1; repeat (24) @(negedge clk); ct_rx = 0;
  endtask

  task automatic wait_holdoff_end();
    while (in_holdoff) @(negedge clk);
    repeat (20) @(negedge clk);
  endtask

  // Read the FIFOs of all drawers and check a kept event: header, charges,
  // and in waveform mode nsamp samples per pixel and gain.
  task automatic read_event(input int evt, input int nsamp, output bit ok);
    int nw;
    ok = 1;
    nw = 1 + 32 + 32 * nsamp;
    for (int w = 0; w < nw; w++) begin
      bus_all(0, 10'h004, '0);
      for (int dr = 0; dr < ND; dr++) begin
        logic [15:0] exp_w;
        if (w == 0) exp_w = {4'hE, 12'(evt)};
        else if (w < 17) exp_w = 16'(16 * lvl_hg[dr][w - 1]);
        else if (w < 33) exp_w = 16'(16 * lvl_lg[dr][w - 17]);
        else if ((w - 33) % 32 < 16) exp_w = 16'(lvl_hg[dr][(w - 33) % 32]);
        else exp_w = 16'(lvl_lg[dr][(w - 33) % 32 - 16]);
        if (bus_rdata[dr] != exp_w) begin
          if (ok) $display("drawer %0d word %0d: %h expected %h", dr, w, bus_rdata[dr], exp_w);
          ok = 0;
        end
      end
    end
    bus_all(0, 10'h005, '0);
    for (int dr = 0; dr < ND; dr++) if (bus_rdata[dr] != 0) ok = 0;
  endtask

  initial begin
    int trig0, evt;
    bit ok;
    for (int dr = 0; dr < ND; dr++) begin
      l0_in[dr] = '0;
      bus_cs[dr] = 0; bus_we[dr] = 0; bus_addr[dr] = '0; bus_wdata[dr] = '0;
      for (int p = 0; p < 16; p++) begin
        lvl_hg[dr][p] = 100 + 50 * (dr % 16) + 7 * p + int'($urandom % 5);
        lvl_lg[dr][p] = 10 + dr / 4 + p;
        ain_hg[dr][p] = adc_t'(lvl_hg[dr][p]);
        ain_lg[dr][p] = adc_t'(lvl_lg[dr][p]);
      end
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    sec_in = 32'd1000; sec_load = 1; @(negedge clk); sec_load = 0;
    pps = 1; repeat (4) @(negedge clk); pps = 0;
    repeat (1100) @(negedge clk);      // ring buffers filled
    evt = 0;

    // ---- 1. below threshold: 2 pixels in one half drawer (majority mode)
    trig0 = n_trig;
    l0_pulse(25, 16'h0011, 6);         // pixels 0 and 4: left half, level 2
    repeat (100) @(negedge clk);
    check(n_trig == trig0, "2 pixels stay below threshold");
    if (n_trig == trig0) m_below++;

    // ---- 2. majority L1, accepted, busy during hold-off, hold-off length
    l0_pulse(25, 16'h0031, 6);         // pixels 0, 4, 5: level 3
    repeat (100) @(negedge clk);
    check(n_trig == trig0 + 1, "majority L1");
    if (n_trig == trig0 + 1) m_maj++;
    evt++;
    accept_cmd();
    l0_pulse(40, 16'h0033, 6);         // inside the hold-off
    repeat (50) @(negedge clk);
    check(n_busy == 1 && n_trig == trig0 + 1, "busy inside hold-off");
    if (n_busy == 1) m_busy++;
    wait_holdoff_end();
    check(ho_last == 5920, $sformatf("hold-off %0d ticks (7.4 us)", ho_last));
    if (ho_last == 5920) m_holdoff++;
    read_event(evt, 0, ok);
    check(ok, "accepted event read out from all drawers");
    if (ok) m_keep++;

    // ---- 3. trigger without accept: discarded
    l0_pulse(10, 16'h0700, 6);         // pixels 8, 9, 10: left 2, right 1; with 4 in
    l0_in[10] = 16'h0000;
    repeat (100) @(negedge clk);
    if (n_trig == trig0 + 1) begin
      l0_pulse(10, 16'h0311, 6);       // pixels 0, 4, 8, 9: left half level 4
      repeat (100) @(negedge clk);
    end
    check(n_trig == trig0 + 2, "second L1");
    evt++;
    wait_holdoff_end();
    repeat (100) @(negedge clk);
    bus_all(0, 10'h005, '0);
    check(bus_rdata[0] == 0, "discarded event leaves the FIFO empty");
    bus_all(0, 10'h007, '0);
    check(bus_rdata[0] == 1 && bus_rdata[59] == 1, "discard counted");
    if (bus_rdata[0] == 1) m_discard++;

    // ---- 4. NN mode: non-adjacent triple does not fire, a cluster does
    bus_all(1, 10'h000, 16'h0001);
    trig0 = n_trig;
    l0_pulse(33, 16'h1021, 6);         // pixels 0, 5, 12: no edge neighbours
    repeat (100) @(negedge clk);
    check(n_trig == trig0, "NN: scattered pixels do not fire");
    l0_pulse(33, 16'h0013, 6);         // pixels 0, 1, 4: cluster
    repeat (100) @(negedge clk);
    check(n_trig == trig0 + 1, "NN: cluster fires");
    if (n_trig == trig0 + 1) m_nn++;
    evt++;
    accept_cmd();
    wait_holdoff_end();
    read_event(evt, 0, ok);
    check(ok, "NN event read out");

    // ---- 5. pseudo-sum: one pixel for 4 ticks sums to 4 levels
    bus_all(1, 10'h000, 16'h0002);
    trig0 = n_trig;
    l0_pulse(47, 16'h0100, 8);
    repeat (100) @(negedge clk);
    check(n_trig == trig0 + 1, "pseudo-sum fires on one long pixel");
    if (n_trig == trig0 + 1) m_psum++;
    evt++;
    wait_holdoff_end();
    bus_all(1, 10'h000, 16'h0000);
    trig0 = n_trig;
    l0_pulse(47, 16'h0100, 8);         // same pulse, majority: level 1 only
    repeat (100) @(negedge clk);
    check(n_trig == trig0, "majority ignores the single pixel");

    // ---- 6. SPE source
    src_spe = 1;
    l0_pulse(25, 16'h0031, 6);
    repeat (100) @(negedge clk);
    check(n_trig == trig0, "sectors ignored with SPE source");
    spe_trig = 1; repeat (3) @(negedge clk); spe_trig = 0;
    repeat (100) @(negedge clk);
    check(n_trig == trig0 + 1, "SPE trigger");
    if (n_trig == trig0 + 1) m_spe++;
    evt++;
    src_spe = 0;
    wait_holdoff_end();

    // ---- 7. waveform mode, 48 samples: FIFO of 64 words fills -> stall
    bus_all(1, 10'h001, 16'd48);
    bus_all(1, 10'h000, 16'h0004);
    roi_len = 6'd48;
    trig0 = n_trig;
    l0_pulse(5, 16'h0031, 6);
    repeat (100) @(negedge clk);
    check(n_trig == trig0 + 1, "L1 for waveform event");
    evt++;
    accept_cmd();
    wait_holdoff_end();
    check(ho_last == int'(holdoff_ticks(16 + 48)), $sformatf("hold-off for n=64: %0d", ho_last));
    bus_all(0, 10'h005, '0);
    check(bus_rdata[0] == 16'(FD), $sformatf("FIFO full: %0d", bus_rdata[0]));
    if (bus_rdata[0] == 16'(FD)) m_stall++;
    read_event(evt, 48, ok);
    check(ok, "waveform event read out through the stalled FIFO");
    if (ok) m_wave++;

    // ---- 8. timestamps: one per trigger
    check(n_ts == int'(n_trig) && n_ts > 0, $sformatf("timestamps %0d triggers %0d", n_ts, n_trig));
    if (n_ts == int'(n_trig)) m_ts++;

    // ---- 9. interlock
    lid_open_req = 1;
    repeat (5) @(negedge clk);
    if (horn && !remote_front_lid_open) m_horn++;
    repeat (HT) @(negedge clk);
    check(remote_front_lid_open, "lid opened after horn");
    contact_front_lid_open = 1;
    power_fail = 1;
    repeat (HT + 3) @(negedge clk);
    check(alarm && !remote_front_lid_open, "power failure closes lid");
    if (alarm && !remote_front_lid_open) m_alarm++;

    $display("mechanisms: maj=%0d below=%0d busy=%0d holdoff=%0d keep=%0d discard=%0d nn=%0d psum=%0d spe=%0d wave=%0d stall=%0d ts=%0d horn=%0d alarm=%0d",
             m_maj, m_below, m_busy, m_holdoff, m_keep, m_discard, m_nn, m_psum, m_spe, m_wave, m_stall, m_ts, m_horn, m_alarm);
    check(m_maj > 0, "mechanism majority");   check(m_below > 0, "mechanism threshold");
    check(m_busy > 0, "mechanism busy");      check(m_holdoff > 0, "mechanism hold-off");
    check(m_keep > 0, "mechanism keep");      check(m_discard > 0, "mechanism discard");
    check(m_nn > 0, "mechanism NN");          check(m_psum > 0, "mechanism pseudo-sum");
    check(m_spe > 0, "mechanism SPE");        check(m_wave > 0, "mechanism waveform");
    check(m_stall > 0, "mechanism stall");    check(m_ts > 0, "mechanism timestamp");
    check(m_horn > 0, "mechanism horn");      check(m_alarm > 0, "mechanism alarm");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
