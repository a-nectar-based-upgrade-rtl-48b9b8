// event_timestamp: camera-level GPS timestamp of each trigger.
//
// The DIB's GPS module delivers a pulse per second (PPS) and, over a serial
// link, the time of day. This block keeps the seconds (loaded from the
// decoded GPS message through sec_load/sec_in, and advanced by each PPS
// rising edge) and a sub-second counter of logic ticks that the PPS clears.
// On `trig` it latches {ts_sec, ts_sub} and pulses ts_valid.
//
// PPS, serial time and per-event camera timestamps follow the camera
// description. The serial message format is not described, so the decoded
// seconds enter in parallel; the sub-second counter runs on the logic tick
// rather than on the 10 MHz reference. With a 1.25 ns tick a second is
// 800e6 ticks, which fits in 30 bits.
module event_timestamp (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,
  input  logic        sec_load,
  input  logic [31:0] sec_in,
  input  logic        trig,
  output logic [31:0] ts_sec,
  output logic [29:0] ts_sub,
  output logic        ts_valid
);
  logic [2:0]  pps_s;
  logic        pps_edge;
  logic [31:0] sec;
  logic [29:0] sub;

  assign pps_edge = pps_s[1] && !pps_s[2];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pps_s    <= '0;
      sec      <= '0;
      sub      <= '0;
      ts_sec   <= '0;
      ts_sub   <= '0;
      ts_valid <= 1'b0;
    end else begin
      pps_s <= {pps_s[1:0], pps};
      if (pps_edge) sub <= '0;
      else          sub <= sub + 1'b1;
      if (sec_load)      sec <= sec_in;
      else if (pps_edge) sec <= sec + 1'b1;
      ts_valid <= trig;
      if (trig) begin
        ts_sec <= sec;
        ts_sub <= sub;
      end
    end
endmodule
