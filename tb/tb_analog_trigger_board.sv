// tb_analog_trigger_board: sector sums and the Q comparison.
// Sector membership comes from hess_pkg::sector_mask (checked on its own
// by tb_hess_pkg). The comparator reference is worked out in millivolts:
// fire when levels * 33 mV > Q * 0.76 mV. Cases: single lines, the
// calibration point between N = 2 and N = 3 active pixels (Q = 110 DAC
// counts = 83.6 mV), and random levels over a sweep of Q.
module tb_analog_trigger_board;
  import hess_pkg::*;
  logic clk = 0, rst_n = 0;
  pam_t pam_level [N_HALF];
  logic [9:0] q_thr = 10'd110;
  logic [N_SECTORS-1:0] sector_trig;
  int checks = 0, failures = 0;

  analog_trigger_board dut (.*);
  always #1 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_and_check();
    @(negedge clk);
    @(negedge clk);
    for (int s = 0; s < int'(N_SECTORS); s++) begin
      logic [N_HALF-1:0] m;
      real mv;
      bit exp;
      m = sector_mask(s);
      mv = 0.0;
      for (int h = 0; h < int'(N_HALF); h++) if (m[h]) mv += 33.0 * pam_level[h];
      exp = mv > 0.76 * q_thr;
      checks++;
      if (sector_trig[s] != exp) begin
        failures++;
        if (failures < 10) $display("sector %0d: %0b exp %0b (%f mV, Q %0d)", s, sector_trig[s], exp, mv, q_thr);
      end
    end
  endtask

  initial begin
    for (int h = 0; h < int'(N_HALF); h++) pam_level[h] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    apply_and_check();
    // 2 then 3 active pixels on one line, Q between them
    pam_level[40] = 3'd2; apply_and_check();
    begin
      int any;
      any = |sector_trig;
      checks++; if (any) failures++;
    end
    pam_level[40] = 3'd3; apply_and_check();
    checks++; if (!(|sector_trig)) failures++;
    // 3 pixels split over two lines of one sector
    pam_level[40] = 3'd1; pam_level[41] = 3'd2; apply_and_check();
    pam_level[40] = '0; pam_level[41] = '0;
    for (int t = 0; t < 300; t++) begin
      q_thr = 10'($urandom % 1024);
      for (int h = 0; h < int'(N_HALF); h++) pam_level[h] = ($urandom % 6 == 0) ? pam_t'($urandom) : '0;
      apply_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
