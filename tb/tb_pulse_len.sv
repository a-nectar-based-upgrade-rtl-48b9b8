// tb_pulse_len: pulse_len_encoder driving pulse_len_decoder (3 codes).
// Checks the encoder's pulse length (8*(code+1) ticks) and gap, that a
// send while busy is ignored, that the decoder returns the code sent, and
// that the decoder flags pulses of lengths matching no code.
module tb_pulse_len;
  logic clk = 0, rst_n = 0;
  logic send = 0, line, busy, valid, err;
  logic [1:0] code = '0, dcode;
  logic force_line = 0, use_force = 0;
  int checks = 0, failures = 0;
  int hi_len = 0, last_len = 0, n_valid = 0, n_err = 0;
  logic [1:0] last_code;

  pulse_len_encoder #(.NCODES(3), .LEN_BASE(8), .GAP(8)) u_enc (
    .clk, .rst_n, .send, .code, .line, .busy);
  pulse_len_decoder #(.NCODES(3), .LEN_BASE(8), .TOL(2)) u_dec (
    .clk, .rst_n, .line(use_force ? force_line : line), .valid, .code(dcode), .err);

  always #1 clk = ~clk;

  always @(posedge clk) begin
    if (line) hi_len <= hi_len + 1;
    else if (hi_len != 0) begin last_len <= hi_len; hi_len <= 0; end
    if (valid) begin n_valid++; last_code = dcode; end
    if (err) n_err++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      int nv;
      logic [1:0] c;
      c = 2'($urandom % 3);
      nv = n_valid;
      @(negedge clk);
      code = c; send = 1;
      @(negedge clk);
      send = 0;
      code = 2'((c + 1) % 3);
      // a second send during the pulse must be ignored
      repeat (2) @(negedge clk);
      send = 1;
      @(negedge clk);
      send = 0;
      wait (!busy);
      repeat (6 + $urandom % 5) @(negedge clk);
      check(last_len == 8 * (int'(c) + 1), $sformatf("pulse length %0d for code %0d", last_len, c));
      check(n_valid == nv + 1, "exactly one decode per pulse");
      check(last_code == c, $sformatf("decoded %0d sent %0d", last_code, c));
    end
    // lengths that match no code
    use_force = 1;
    for (int i = 0; i < 3; i++) begin
      int bad [3] = '{4, 12, 30};
      int ne;
      ne = n_err;
      force_line = 1;
      repeat (bad[i]) @(negedge clk);
      force_line = 0;
      repeat (6) @(negedge clk);
      check(n_err == ne + 1, $sformatf("error flag for length %0d", bad[i]));
    end
    check(n_valid == 200, "no decode of bad pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
