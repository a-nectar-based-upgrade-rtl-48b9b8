// l0_shaper: delay and stretch of one pixel's L0 trigger signal.
//
// The pixel comparator output is sampled every tick (1.25 ns, the 800 MHz
// sampling of the camera trigger), passed through a two-flop synchroniser,
// delayed by `delay` ticks in a shift register and then stretched: once the
// delayed signal goes low, the output stays high for `stretch` more ticks.
// delay = stretch = 0 gives the bare sampled signal after the 2-tick
// synchroniser. Delay and stretch in steps of 1.25 ns follow the camera
// description; the synchroniser, the ranges (MAX_DELAY, MAX_STRETCH) and the
// way stretching extends the trailing edge are this design's choices.
//
// Interface: l0_in asynchronous; delay/stretch are static configuration;
// l0_out registered. A value of l0_in sampled at clock edge t appears on
// l0_out after edge t + 2 + delay and, stretched, until edge t + 2 + delay
// + stretch.
module l0_shaper #(
  parameter int unsigned MAX_DELAY   = 16,
  parameter int unsigned MAX_STRETCH = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           l0_in,
  input  logic [$clog2(MAX_DELAY)-1:0]   delay,
  input  logic [$clog2(MAX_STRETCH)-1:0] stretch,
  output logic                           l0_out
);
  logic [1:0]           sync;
  logic [MAX_DELAY-1:0] dline;
  logic                 delayed;
  logic [$clog2(MAX_STRETCH)-1:0] hold;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sync  <= '0;
      dline <= '0;
    end else begin
      sync  <= {sync[0], l0_in};
      dline <= {dline[MAX_DELAY-2:0], sync[1]};
    end

  // dline[0] is the synchronised sample delayed by one tick, dline[k] by k+1.
  always_comb delayed = (delay == '0) ? sync[1] : dline[delay-1];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hold   <= '0;
      l0_out <= 1'b0;
    end else if (delayed) begin
      hold   <= stretch;
      l0_out <= 1'b1;
    end else if (hold != '0) begin
      hold   <= hold - 1'b1;
      l0_out <= 1'b1;
    end else begin
      l0_out <= 1'b0;
    end
endmodule
