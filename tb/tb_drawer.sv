// tb_drawer: one drawer (FPGA logic plus 16 NECTAr chip models) end to end.
//
// The pixel inputs are held at constant per-pixel levels, so every stored
// cell holds level + line_dac[cell mod 16] and the charge of any 16
// consecutive cells is 16*level + (sum of the 16 line DACs), wherever the
// ROI lands in the ring. The testbench configures the drawer over the memory
// bus, sends pulse-length coded commands on the control line (stop: 8 ticks
// high, accept: 16 ticks high) and checks:
//   - an accepted event: FIFO contents (header, 16+16 charges), and that the
//     readout of n = 32 cells takes (n + (n-1)/16) * 80 ticks (0.1 us/cell);
//   - an event without accept is discarded after the hold-off;
//   - a stop during a readout is counted as lost; a malformed pulse as error;
//   - waveform mode: 1 + 32 + 32*roi_len words with every sample checked;
//   - the half-drawer trigger levels for a static L0 pattern.
module tb_drawer;
  import hess_pkg::*;
  logic clk = 0, clk_sca = 0, rst_n = 0;
  logic [15:0] l0_in = '0;
  adc_t ain_hg[16], ain_lg[16];
  pam_t pam_level[2];
  logic ctrl_line = 0;
  logic bus_cs = 0, bus_we = 0;
  logic [9:0] bus_addr = '0;
  logic [15:0] bus_wdata = '0, bus_rdata;
  int checks = 0, failures = 0;
  int tick = 0;
  int hg_lvl[16], lg_lvl[16], dac[16][16], dacsum[16];

  drawer dut (.*);
  always #5 clk = ~clk;       // 800 MHz tick, scaled
  always #4 clk_sca = ~clk_sca;
  always @(posedge clk) tick <= tick + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [9:0] a, input logic [15:0] d);
    bus_cs = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_cs = 0; bus_we = 0;
  endtask
  task automatic rd(input logic [9:0] a, output logic [15:0] d);
    bus_cs = 1; bus_we = 0; bus_addr = a;
    @(negedge clk); bus_cs = 0;
    d = bus_rdata;
  endtask
  task automatic pulse(input int len);
    ctrl_line = 1; repeat (len) @(negedge clk);
    ctrl_line = 0; repeat (8) @(negedge clk);
  endtask

  function automatic int clip(input int v);
    return v < 0 ? 0 : (v > 4095 ? 4095 : v);
  endfunction

  task automatic check_event(input int evt, input bit wave, input int roi);
    logic [15:0] d, cnt;
    int nw;
    nw = 1 + 32 + (wave ? 32 * roi : 0);
    rd(10'h005, cnt);
    check(int'(cnt) == nw, $sformatf("fifo count %0d exp %0d", cnt, nw));
    rd(10'h004, d);
    check(d == {4'hE, 12'(evt)}, $sformatf("header %h", d));
    for (int p = 0; p < 16; p++) begin
      rd(10'h004, d);
      check(int'(d) == 16 * hg_lvl[p] + dacsum[p], $sformatf("hg charge %0d: %0d exp %0d", p, d, 16 * hg_lvl[p] + dacsum[p]));
    end
    for (int p = 0; p < 16; p++) begin
      rd(10'h004, d);
      check(int'(d) == 16 * lg_lvl[p] + dacsum[p], $sformatf("lg charge %0d", p));
    end
    if (wave) begin
      int first_line;
      first_line = -1;
      for (int s = 0; s < roi; s++) begin
        for (int g = 0; g < 2; g++)
          for (int p = 0; p < 16; p++) begin
            int base, line;
            bit ok;
            base = g ? lg_lvl[p] : hg_lvl[p];
            rd(10'h004, d);
            // find the line (cell mod 16) of sample s from pixel 0 HG
            if (s == 0 && g == 0 && p == 0)
              for (int l = 0; l < 16; l++) if (int'(d) == clip(base + dac[0][l])) first_line = l;
            line = (first_line + s) % 16;
            ok = first_line >= 0 && int'(d) == clip(base + dac[p][line]);
            check(ok, $sformatf("wave s%0d g%0d p%0d: %0d", s, g, p, d));
          end
      end
    end
  endtask

  initial begin
    logic [15:0] d;
    int t0, t1;
    for (int p = 0; p < 16; p++) begin
      hg_lvl[p] = 200 + 150 * p + $urandom % 50;
      lg_lvl[p] = 20 + 10 * p + $urandom % 10;
      ain_hg[p] = adc_t'(hg_lvl[p]);
      ain_lg[p] = adc_t'(lg_lvl[p]);
      dacsum[p] = 0;
      for (int k = 0; k < 16; k++) begin
        dac[p][k] = int'($urandom % 31) - 15;
        dacsum[p] += dac[p][k];
      end
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    for (int p = 0; p < 16; p++)
      for (int k = 0; k < 16; k++) wr(10'h100 + 10'(16 * p + k), 16'(dac[p][k]));
    rd(10'h003, d);
    check(d == 16'd5920, "default hold-off t_b(32) = 7.4 us");
    wr(10'h003, 16'd4000);          // shorter hold-off for the test

    // ---- event 1: stop, accept during readout, kept
    repeat (1100) @(negedge clk);   // ring filled with the constant levels
    pulse(8);
    t0 = tick;
    repeat (200) @(negedge clk);
    pulse(16);
    do rd(10'h005, d); while (d == 0);
    t1 = tick;
    repeat (40) @(negedge clk);
    check_event(1, 0, 16);
    rd(10'h006, d); check(d == 1, "n_acc 1");

    // ---- event 2: no accept, discarded after the hold-off; lost stop
    pulse(8);
    repeat (300) @(negedge clk);
    pulse(8);                       // readout busy -> lost
    rd(10'h008, d); check(d == 1, "n_lost 1");
    repeat (4000) @(negedge clk);
    rd(10'h007, d); check(d == 1, "n_disc 1");
    rd(10'h005, d); check(d == 0, "nothing stored for discarded event");
    pulse(8 + 4 + 8);               // 20 ticks: outside the tolerance of both codes
    rd(10'h009, d); check(d == 1, "n_err 1");

    // ---- event 4: waveform mode with a 24-sample ROI
    wr(10'h001, 16'd24);
    wr(10'h000, 16'h0004);
    repeat (1100) @(negedge clk);
    pulse(8);
    pulse(16);
    do rd(10'h005, d); while (d < 16'(1 + 32 + 32 * 24));
    check_event(3, 1, 24);

    // ---- trigger path: 3 pixels of the left half, 5 of the right half
    wr(10'h000, 16'h0000);
    l0_in = 16'b0000_0000_0000_0000;
    // pixel index 4*row+col; left half = columns 0-1
    l0_in[0] = 1; l0_in[4] = 1; l0_in[9] = 1;
    l0_in[2] = 1; l0_in[3] = 1; l0_in[6] = 1; l0_in[11] = 1; l0_in[15] = 1;
    repeat (20) @(negedge clk);
    check(pam_level[0] == 3 && pam_level[1] == 5, $sformatf("pam %0d %0d", pam_level[0], pam_level[1]));
    // readout time of event 1 (n = 32): stop decoded at the falling edge
    // t0 - 8 + sync; first data in the FIFO after the readout.
    begin
      int ticks, nomin;
      ticks = t1 - t0;
      nomin = (32 + 31 / 16) * 80;
      check(ticks >= nomin - 80 && ticks <= nomin + 30, $sformatf("readout %0d ticks, nominal %0d", ticks, nomin));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
