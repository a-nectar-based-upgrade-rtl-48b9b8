// pulse_len_encoder: sends a command as one high pulse whose length encodes it.
//
// The camera shares one line for several commands by coding them in the
// pulse length: the DIB sends "stop" and "accept" to the drawers on the
// LVDS readout-control line and "active" and "busy" to the central trigger
// on a fibre. On `send`, the line goes high for LEN_BASE*(code+1) ticks and
// then stays low for at least GAP ticks; `busy` is high during pulse and
// gap and a `send` then is ignored. Pulse-length coding follows the camera
// description; the lengths are this design's choice (hess_pkg).
//
// Timing: line rises the tick after send.
module pulse_len_encoder #(
  parameter int unsigned NCODES   = 2,
  parameter int unsigned LEN_BASE = 8,
  parameter int unsigned GAP      = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       send,
  input  logic [$clog2(NCODES)-1:0]  code,
  output logic                       line,
  output logic                       busy
);
  localparam int unsigned CW = $clog2(LEN_BASE * NCODES + GAP + 1);

  logic [CW-1:0] hi_left, lo_left;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hi_left <= '0;
      lo_left <= '0;
    end else if (send && !busy) begin
      hi_left <= CW'(LEN_BASE * (int'(code) + 1));
      lo_left <= CW'(GAP);
    end else if (hi_left != '0) begin
      hi_left <= hi_left - 1'b1;
    end else if (lo_left != '0) begin
      lo_left <= lo_left - 1'b1;
    end

  assign line = (hi_left != '0);
  assign busy = (hi_left != '0) || (lo_left != '0);
endmodule
