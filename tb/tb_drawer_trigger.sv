// tb_drawer_trigger: the drawer trigger path in its three modes.
// Random 16-pixel L0 patterns are held for 8 ticks, so shaping latency does
// not matter, and the settled levels are checked: majority = active pixels
// of the half (clipped to 7), pseudo-sum = 4 per active pixel (clipped to
// 7), NN = 7 on both lines when a 3-pixel cluster exists. Pixel-to-half map:
// pixel 4r+c is in half c/2. Also checks the L0 rate counters and that a
// delay d on one pixel moves its contribution by d ticks.
module tb_drawer_trigger;
  import hess_pkg::*;
  logic clk = 0, rst_n = 0, cnt_clear = 0;
  logic [15:0] l0_in = '0;
  logic [3:0] delay [16], stretch [16];
  trig_mode_t mode = TRIG_MAJORITY;
  pam_t pam_level [2];
  logic [15:0] l0_count [16];
  int checks = 0, failures = 0;
  int edges [16];

  drawer_trigger dut (.*);
  always #1 clk = ~clk;

  function automatic int half_cnt(input logic [15:0] v, input int h);
    int n = 0;
    for (int p = 0; p < 16; p++) if (v[p] && (p % 4) / 2 == h) n++;
    return n;
  endfunction

  function automatic bit nn_ref(input logic [15:0] v);
    for (int p = 0; p < 16; p++) begin
      int n, r, c;
      r = p / 4; c = p % 4; n = 0;
      if (!v[p]) continue;
      if (r > 0 && v[p-4]) n++;
      if (r < 3 && v[p+4]) n++;
      if (c > 0 && v[p-1]) n++;
      if (c < 3 && v[p+1]) n++;
      if (n >= 2) return 1;
    end
    return 0;
  endfunction

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
    logic [15:0] prev;
    for (int p = 0; p < 16; p++) begin delay[p] = '0; stretch[p] = '0; edges[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev = '0;
    for (int t = 0; t < 900; t++) begin
      logic [15:0] v;
      int e0, e1;
      mode = trig_mode_t'(t % 3);
      v = 16'($urandom) & 16'($urandom);
      for (int p = 0; p < 16; p++) if (v[p] && !prev[p]) edges[p]++;
      prev = v;
      l0_in = v;
      repeat (8) @(negedge clk);
      unique case (mode)
        TRIG_MAJORITY: begin
          e0 = half_cnt(v, 0); e1 = half_cnt(v, 1);
        end
        TRIG_PSEUDOSUM: begin
          e0 = 4 * half_cnt(v, 0); e1 = 4 * half_cnt(v, 1);
        end
        default: begin
          e0 = nn_ref(v) ? 7 : 0; e1 = e0;
        end
      endcase
      if (e0 > 7) e0 = 7;
      if (e1 > 7) e1 = 7;
      check(int'(pam_level[0]) == e0 && int'(pam_level[1]) == e1,
            $sformatf("mode %0d pattern %h levels %0d/%0d exp %0d/%0d", mode, v, pam_level[0], pam_level[1], e0, e1));
    end
    l0_in = '0;
    repeat (8) @(negedge clk);
    for (int p = 0; p < 16; p++) check(int'(l0_count[p]) == edges[p], "L0 counter");
    // delay of pixel 0 by 5 ticks: majority level of half 0 rises 5 ticks later
    mode = TRIG_MAJORITY;
    begin
      int t_rise [2];
      for (int run = 0; run < 2; run++) begin
        delay[0] = run ? 4'd5 : 4'd0;
        repeat (4) @(negedge clk);
        l0_in = 16'h0001;
        t_rise[run] = 0;
        while (pam_level[0] == 0) begin @(negedge clk); t_rise[run]++; end
        l0_in = '0;
        repeat (20) @(negedge clk);
      end
      check(t_rise[1] - t_rise[0] == 5, $sformatf("delay moves L0 by %0d ticks", t_rise[1] - t_rise[0]));
    end
    cnt_clear = 1; @(negedge clk); cnt_clear = 0; @(negedge clk);
    check(l0_count[3] == 0, "counter clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
