// tb_camera_full: the whole camera logic at its default sizes (60 drawers,
// 4096-word drawer FIFOs, 3 s horn), taken through one complete event.
//
// A level-3 majority pattern in one drawer crosses the sector threshold
// (q_thr = 110: 3 x 33 mV > 83.6 mV > 2 x 33 mV), the DIB stops all drawers,
// signals "active" to the central trigger (played by the testbench), which
// answers "accept"; after the 7.4 us (5920-tick) hold-off every drawer holds
// the event in its FIFO: header and 32 charges, each 16 times the constant
// pixel level. The testbench reads all 60 FIFOs over the memory buses.
module tb_camera_full;
  import hess_pkg::*;
  localparam int ND = N_DRAWERS;

  logic clk = 0, clk_sca = 0, rst_n = 0;
  logic [15:0] l0_in [ND];
  adc_t ain_hg [ND][16], ain_lg [ND][16];
  logic bus_cs [ND], bus_we [ND];
  logic [9:0] bus_addr [ND];
  logic [15:0] bus_wdata [ND], bus_rdata [ND];
  logic [9:0] q_thr = 10'd110;
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
  int ho_len = 0, ho_last = 0, ct_len = 0, ct_last = 0;

  hess1u_camera dut (.*);

  always #5 clk = ~clk;
  always #4 clk_sca = ~clk_sca;

  always @(posedge clk) begin
    if (in_holdoff) ho_len <= ho_len + 1;
    else if (ho_len != 0) begin ho_last <= ho_len; ho_len <= 0; end
    if (ct_tx) ct_len <= ct_len + 1;
    else if (ct_len != 0) begin ct_last <= ct_len; ct_len <= 0; end
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

  task automatic bus_all(input logic [9:0] a);
    for (int i = 0; i < ND; i++) begin bus_cs[i] = 1; bus_we[i] = 0; bus_addr[i] = a; end
    @(negedge clk);
    for (int i = 0; i < ND; i++) bus_cs[i] = 0;
  endtask

  initial begin
    int bad;
    for (int dr = 0; dr < ND; dr++) begin
      l0_in[dr] = '0;
      bus_cs[dr] = 0; bus_we[dr] = 0; bus_addr[dr] = '0; bus_wdata[dr] = '0;
      for (int p = 0; p < 16; p++) begin
        lvl_hg[dr][p] = 300 + 40 * (dr % 50) + 11 * p;
        lvl_lg[dr][p] = 20 + dr / 3 + p;
        ain_hg[dr][p] = adc_t'(lvl_hg[dr][p]);
        ain_lg[dr][p] = adc_t'(lvl_lg[dr][p]);
      end
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (1100) @(negedge clk);
    // level-3 majority in drawer 30
    l0_in[30] = 16'h0031; repeat (6) @(negedge clk); l0_in[30] = '0;
    repeat (60) @(negedge clk);
    check(n_trig == 1, "L1 trigger");
    check(ct_last == 8, $sformatf("active pulse %0d ticks", ct_last));
    ct_rx = 1; repeat (24) @(negedge clk); ct_rx = 0;
    while (in_holdoff) @(negedge clk);
    repeat (60) @(negedge clk);
    check(ho_last == 5920, $sformatf("hold-off %0d ticks", ho_last));
    check(n_accept == 1, "accept forwarded");
    bus_all(10'h005);
    bad = 0;
    for (int dr = 0; dr < ND; dr++) if (bus_rdata[dr] != 16'd33) bad++;
    check(bad == 0, $sformatf("%0d drawers without 33 words", bad));
    for (int w = 0; w < 33; w++) begin
      bus_all(10'h004);
      for (int dr = 0; dr < ND; dr++) begin
        logic [15:0] e;
        if (w == 0) e = 16'hE001;
        else if (w < 17) e = 16'(16 * lvl_hg[dr][w - 1]);
        else e = 16'(16 * lvl_lg[dr][w - 17]);
        check(bus_rdata[dr] == e, $sformatf("drawer %0d word %0d: %h exp %h", dr, w, bus_rdata[dr], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
