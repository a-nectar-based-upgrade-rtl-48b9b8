// pulse_len_decoder: recovers a pulse-length coded command from a line.
//
// The line is synchronised with two flops and the length of each high pulse
// is counted. At the falling edge the length is compared with the code
// lengths LEN_BASE*(k+1); within +-TOL ticks, `valid` pulses for one tick
// with `code` = k. A pulse matching no code raises `err` for one tick.
// Companion of pulse_len_encoder; tolerance and lengths are this design's.
//
// Timing: valid comes 3 ticks after the falling edge at the line input.
module pulse_len_decoder #(
  parameter int unsigned NCODES   = 2,
  parameter int unsigned LEN_BASE = 8,
  parameter int unsigned TOL      = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       line,
  output logic                       valid,
  output logic [$clog2(NCODES)-1:0]  code,
  output logic                       err
);
  localparam int unsigned MAXLEN = LEN_BASE * NCODES + TOL;
  localparam int unsigned CW     = $clog2(MAXLEN + 2);

  logic [2:0]    sync;
  logic [CW-1:0] len;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sync  <= '0;
      len   <= '0;
      valid <= 1'b0;
      code  <= '0;
      err   <= 1'b0;
    end else begin
      sync  <= {sync[1:0], line};
      valid <= 1'b0;
      err   <= 1'b0;
      if (sync[1]) begin
        if (len != CW'(MAXLEN + 1)) len <= len + 1'b1;   // saturate
      end else begin
        len <= '0;
      end
      if (sync[2] && !sync[1]) begin   // falling edge: pulse ended
        err <= 1'b1;
        for (int k = 0; k < NCODES; k++)
          if (int'(len) + TOL >= LEN_BASE * (k + 1) &&
              int'(len) <= LEN_BASE * (k + 1) + TOL) begin
            valid <= 1'b1;
            err   <= 1'b0;
            code  <= ($clog2(NCODES))'(k);
          end
      end
    end
endmodule
