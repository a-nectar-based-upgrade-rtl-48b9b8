// tb_interlock: lid relay, horn and drawer power of the safety interlock.
// The horn time is shortened to 10 ticks. Random sensor states are applied
// and held; a reference model computes the alarm and the target relay state
// and checks that the relay moves only after exactly HORN_TICKS ticks of
// horn, that local mode releases the relay at once, and the power rule.
module tb_interlock;
  localparam int unsigned HT = 10;
  logic clk = 0, rst_n = 0;
  logic lid_open_req = 0, power_fail = 0, smoke = 0, ventilation_ok = 1;
  logic contact_pressure_ok = 1, contact_local_mode = 0, contact_front_lid_open = 0;
  logic contact_front_lid_moving = 0, contact_back_lid_open = 0, ambient_light_high = 0;
  logic remote_front_lid_open, horn, drawer_power_enable, alarm, lid_status_open, back_door_open;
  int checks = 0, failures = 0;
  int n_open = 0, n_close_alarm = 0;

  interlock #(.HORN_TICKS(HT)) dut (.*);
  always #1 clk = ~clk;

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

  initial begin
    bit exp_alarm, tgt, rel;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(remote_front_lid_open == 0 && horn == 0, "reset state");
    rel = 0;
    for (int it = 0; it < 400; it++) begin
      int r = $urandom % 16;
      lid_open_req        = (r < 12);
      power_fail          = ($urandom % 10 == 0);
      smoke               = ($urandom % 12 == 0);
      ventilation_ok      = ($urandom % 10 != 0);
      contact_pressure_ok = ($urandom % 10 != 0);
      contact_local_mode  = ($urandom % 8 == 0);
      ambient_light_high  = ($urandom % 6 == 0);
      contact_front_lid_open   = rel;
      contact_front_lid_moving = $urandom % 2;
      contact_back_lid_open    = $urandom % 2;
      exp_alarm = power_fail | smoke | !ventilation_ok | !contact_pressure_ok |
                  (ambient_light_high & contact_front_lid_open);
      tgt = !contact_local_mode & lid_open_req & !exp_alarm;
      #0;
      check(alarm == exp_alarm, "alarm");
      check(drawer_power_enable == (!smoke & ventilation_ok), "power enable");
      check(lid_status_open == (contact_front_lid_open & !contact_front_lid_moving), "lid status");
      check(back_door_open == contact_back_lid_open, "back door");
      if (contact_local_mode) begin
        @(negedge clk);
        check(remote_front_lid_open == 0 && horn == 0, "local mode releases relay");
        rel = 0;
      end else if (tgt != rel) begin
        // horn for HT ticks, then relay switches
        for (int t = 0; t < HT; t++) begin
          @(negedge clk);
          check(horn == 1 && remote_front_lid_open == rel, $sformatf("horn tick %0d", t));
        end
        @(negedge clk);
        check(horn == 0 && remote_front_lid_open == tgt, "relay switched after horn");
        if (tgt) n_open++; else if (exp_alarm) n_close_alarm++;
        rel = tgt;
      end else begin
        @(negedge clk);
        check(horn == 0 && remote_front_lid_open == rel, "no movement");
      end
    end
    check(n_open > 5 && n_close_alarm > 5, $sformatf("coverage open=%0d close=%0d", n_open, n_close_alarm));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
