// tb_event_builder: front-end buffer keep/discard and the event word format.
// Scenarios: accept before the readout is done, accept after it, no accept
// (discard at hold-off expiry), accept after the hold-off (ignored), and
// waveform mode with a stalling FIFO. Every written word is compared with
// the expected header / charges / samples.
module tb_event_builder;
  import hess_pkg::*;
  logic clk = 0, rst_n = 0;
  logic stop_cmd = 0, accept = 0, done = 0, wave_mode = 0, fifo_full = 0;
  logic [15:0] holdoff = 16'd300;
  logic [5:0] roi_len = 6'd16, wave_addr;
  charge_t charge_hg [16], charge_lg [16];
  adc_t wave_hg [16], wave_lg [16];
  logic fifo_wr, sending;
  logic [15:0] fifo_data, n_accepted, n_discarded;
  logic [15:0] words [$];
  int checks = 0, failures = 0, evt = 0;

  event_builder dut (.*);
  always #1 clk = ~clk;

  always_comb
    for (int c = 0; c < 16; c++) begin
      wave_hg[c] = adc_t'(wave_addr * 64 + c);
      wave_lg[c] = adc_t'(wave_addr * 64 + c + 2048);
    end

  always @(posedge clk) if (fifo_wr) words.push_back(fifo_data);

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

  task automatic pulse(ref logic s);
    s = 1; @(negedge clk); s = 0;
  endtask

  // acc_at < 0: never; acc_at = tick after the stop at which accept comes
  task automatic event_run(input int done_at, input int acc_at, input bit keep);
    int na, nd;
    na = n_accepted; nd = n_discarded;
    words.delete();
    for (int c = 0; c < 16; c++) begin
      charge_hg[c] = charge_t'($urandom);
      charge_lg[c] = charge_t'($urandom);
    end
    @(negedge clk);
    stop_cmd = 1; @(negedge clk); stop_cmd = 0;
    evt++;
    for (int t = 1; t < 400; t++) begin
      if (t == done_at) done = 1;
      if (t == acc_at) accept = 1;
      @(negedge clk);
      done = 0; accept = 0;
    end
    wait (!sending);
    @(negedge clk);
    if (keep) begin
      int exp_n;
      exp_n = 33 + (wave_mode ? 32 * int'(roi_len) : 0);
      check(n_accepted == na + 1 && n_discarded == nd, "accepted count");
      check(words.size() == exp_n, $sformatf("%0d words, expected %0d", words.size(), exp_n));
      check(words[0] == {4'hE, 12'(evt)}, "header");
      for (int c = 0; c < 16; c++) begin
        check(words[1 + c] == charge_hg[c], "hg charge");
        check(words[17 + c] == charge_lg[c], "lg charge");
      end
      if (wave_mode)
        for (int s = 0; s < int'(roi_len); s++)
          for (int c = 0; c < 16; c++) begin
            check(words[33 + 32 * s + c] == 16'(s * 64 + c), "hg sample");
            check(words[33 + 32 * s + 16 + c] == 16'((s * 64 + c + 2048) % 4096), "lg sample");
          end
    end else begin
      check(n_discarded == nd + 1 && n_accepted == na, "discard count");
      check(words.size() == 0, "nothing written for a discarded event");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    event_run(100, 50, 1);     // accept during readout
    event_run(100, 150, 1);    // accept after readout, within hold-off
    event_run(100, -1, 0);     // no accept: discard
    event_run(100, 350, 0);    // accept after hold-off: ignored
    wave_mode = 1; roi_len = 6'd48;
    fork
      event_run(100, 120, 1);
      begin   // FIFO back-pressure while the event is copied
        repeat (140) @(negedge clk);
        repeat (200) begin fifo_full = ($urandom % 3) == 0; @(negedge clk); end
        fifo_full = 0;
      end
    join
    roi_len = 6'd20;
    event_run(30, 10, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
