// tb_hess_pkg: checks the shared geometry and timing functions.
// Drawer rows of the 8x9 matrix hold 5,7,9,9,9,9,7,5 drawers, centred
// (built here from that list, independently of drawer_present). Checks:
// 60 drawers, 38 sectors, every sector inside the populated area, every
// half drawer in 1..4 sectors, full sectors of 8 half drawers (64 pixels),
// and the hold-off t_b for n = 32 cells = 7.4 us = 5920 ticks.
module tb_hess_pkg;
  import hess_pkg::*;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rowlen [8] = '{5, 7, 9, 9, 9, 9, 7, 5};
    int n, idx, nfull;
    int per_half [N_HALF];
    logic [N_HALF-1:0] m;
    n = 0;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 9; c++) begin
        bit exp;
        exp = (c >= (9 - rowlen[r]) / 2) && (c < (9 - rowlen[r]) / 2 + rowlen[r]);
        check(drawer_present(r, c) == exp, $sformatf("present(%0d,%0d)", r, c));
        if (exp) begin
          check(drawer_index(r, c) == n, "drawer index");
          n++;
        end else check(drawer_index(r, c) == -1, "empty index");
      end
    check(n == N_DRAWERS, "60 drawers");
    check(sector_count() == N_SECTORS, $sformatf("sector count %0d", sector_count()));
    for (int h = 0; h < N_HALF; h++) per_half[h] = 0;
    nfull = 0;
    for (int s = 0; s < int'(N_SECTORS); s++) begin
      m = sector_mask(s);
      check($countones(m) >= 4 && $countones(m) <= 8, "sector size");
      if ($countones(m) == 8) nfull++;
      for (int h = 0; h < N_HALF; h++) if (m[h]) per_half[h]++;
    end
    check(nfull >= 20, $sformatf("%0d full 64-pixel sectors", nfull));
    for (int h = 0; h < N_HALF; h++)
      check(per_half[h] >= 1 && per_half[h] <= 4, $sformatf("half %0d in %0d sectors", h, per_half[h]));
    check(holdoff_ticks(32) == 5920, "t_b(32) = 7.4 us");
    check(holdoff_ticks(64) == 3200 + 68 * 80, "t_b(64)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
