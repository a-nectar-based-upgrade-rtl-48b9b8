// tb_drawer_regs: register file of the drawer FPGA against a shadow model.
// Checks the reset values (including the default hold-off, the camera's
// t_b for 32 read cells = 7.4 us = 5920 ticks, and Nd = 1024 - 40), then
// random writes and reads over the whole map, read data one tick after the
// access, the FIFO pop strobe and the self-clearing counter-clear bit.
module tb_drawer_regs;
  import hess_pkg::*;
  logic clk = 0, rst_n = 0;
  logic bus_cs = 0, bus_we = 0;
  logic [9:0] bus_addr = '0;
  logic [15:0] bus_wdata = '0, bus_rdata;
  trig_mode_t mode;
  logic wave_mode, cnt_clear, fifo_pop;
  logic [5:0] roi_len, int_start;
  logic [15:0] holdoff;
  logic [3:0] delay[16], stretch[16];
  logic [9:0] nd[16];
  logic signed [7:0] line_dac[16][16];
  logic [15:0] l0_count[16];
  logic [15:0] fifo_data, n_acc, n_disc, n_lost, n_err;
  logic [15:0] fifo_count;
  int checks = 0, failures = 0;
  logic [15:0] shadow[1024];
  bit known[1024];

  drawer_regs dut (.*);
  always #1 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  task automatic write(input logic [9:0] a, input logic [15:0] d);
    bus_cs = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_cs = 0; bus_we = 0;
  endtask

  task automatic read(input logic [9:0] a, output logic [15:0] d, output bit popped);
    bus_cs = 1; bus_we = 0; bus_addr = a;
    #0 popped = fifo_pop;
    @(negedge clk);
    bus_cs = 0;
    d = bus_rdata;
  endtask

  // Masked value a register returns after writing w.
  function automatic logic [15:0] reg_val(input logic [9:0] a, input logic [15:0] w);
    if (a == 10'h000) return {13'd0, w[2:0]};
    if (a == 10'h001 || a == 10'h002) return {10'd0, w[5:0]};
    if (a == 10'h003) return w;
    if (a[9:4] == 6'h01 || a[9:4] == 6'h02) return {12'd0, w[3:0]};
    if (a[9:4] == 6'h04) return {6'd0, w[9:0]};
    if (a[9:8] == 2'b01) return {{8{w[7]}}, w[7:0]};
    return 16'hDEAD;
  endfunction

  initial begin
    logic [15:0] d;
    bit pp;
    for (int p = 0; p < 16; p++) l0_count[p] = 16'(1000 + 7 * p);
    fifo_data = 16'hE123; fifo_count = 16'd77; n_acc = 16'd5; n_disc = 16'd6; n_lost = 16'd7; n_err = 16'd9;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(holdoff == 16'd5920, $sformatf("reset holdoff %0d", holdoff));
    check(roi_len == 6'd16 && int_start == 0 && mode == TRIG_MAJORITY && !wave_mode, "reset ctrl");
    for (int p = 0; p < 16; p++) check(nd[p] == 10'd984 && delay[p] == 0 && stretch[p] == 0, "reset per pixel");
    // fixed read-only registers
    read(10'h004, d, pp); check(d == 16'hE123 && pp, "fifo read pops");
    read(10'h005, d, pp); check(d == 16'd77 && !pp, "fifo count");
    read(10'h006, d, pp); check(d == 16'd5, "n_acc");
    read(10'h007, d, pp); check(d == 16'd6, "n_disc");
    read(10'h008, d, pp); check(d == 16'd7, "n_lost");
    read(10'h009, d, pp); check(d == 16'd9, "n_err");
    for (int p = 0; p < 16; p++) begin
      read(10'h030 + 10'(p), d, pp); check(d == 16'(1000 + 7 * p), "l0 count");
    end
    read(10'h3FF, d, pp); check(d == 16'hDEAD, "unmapped");
    // counter clear is a one-tick pulse
    write(10'h000, 16'h0008);
    check(cnt_clear == 1'b1, "cnt_clear set");
    @(negedge clk); check(cnt_clear == 1'b0, "cnt_clear self clears");
    // random write/read
    for (int it = 0; it < 3000; it++) begin
      logic [9:0] a;
      int sel = $urandom % 7;
      case (sel)
        0: a = 10'h000;
        1: a = 10'h001 + 10'($urandom % 3);
        2: a = 10'h010 + 10'($urandom % 16);
        3: a = 10'h020 + 10'($urandom % 16);
        4: a = 10'h040 + 10'($urandom % 16);
        default: a = 10'h100 + 10'($urandom % 256);
      endcase
      if ($urandom % 2) begin
        logic [15:0] w = 16'($urandom);
        if (a == 10'h000) w[3] = 1'b0;
        write(a, w);
        shadow[a] = reg_val(a, w); known[a] = 1;
        // the output ports follow
        if (a[9:4] == 6'h01) check(delay[a[3:0]] == w[3:0], "delay port");
        if (a[9:4] == 6'h04) check(nd[a[3:0]] == w[9:0], "nd port");
        if (a[9:8] == 2'b01) check(line_dac[a[7:4]][a[3:0]] == signed'(w[7:0]), "dac port");
        if (a == 10'h001) check(roi_len == w[5:0], "roi port");
      end else if (known[a]) begin
        read(a, d, pp);
        check(d == shadow[a] && !pp, $sformatf("read %h got %h exp %h", a, d, shadow[a]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
