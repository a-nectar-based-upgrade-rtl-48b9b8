// pseudo_sum: time-over-threshold sum of a half drawer (pseudo-analogue sum
// trigger).
//
// For PMT-like, roughly triangular pulses the time an L0 signal stays high
// grows with the pulse charge. Each pixel's shaped L0 is counted in units of
// one tick (1.25 ns) over a sliding window of WINDOW = 4 ticks (5 ns), so a
// pixel contributes at most 4 counts, which acts like an amplitude clip and
// limits the effect of PMT after-pulses. The block outputs the sum over the
// NPIX pixels of the half drawer, 0 .. NPIX*WINDOW.
//
// The window covers the current L0 sample and the WINDOW-1 before it; the
// sum is registered, so `sum` reflects the samples up to one tick earlier.
// Window length and per-half-drawer summation follow the camera description;
// the exact window alignment is this design's choice.
module pseudo_sum #(
  parameter int unsigned NPIX   = 8,
  parameter int unsigned WINDOW = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NPIX-1:0]                    l0,
  output logic [$clog2(NPIX*WINDOW+1)-1:0]   sum
);
  localparam int unsigned SW = $clog2(NPIX * WINDOW + 1);

  logic [WINDOW-2:0] hist [NPIX];   // previous WINDOW-1 samples per pixel
  logic [SW-1:0]     acc;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < NPIX; i++) hist[i] <= '0;
    end else begin
      for (int i = 0; i < NPIX; i++)
        hist[i] <= {hist[i][WINDOW-3:0], l0[i]};
    end

  always_comb begin
    acc = '0;
    for (int i = 0; i < NPIX; i++) begin
      acc += SW'(l0[i]);
      for (int k = 0; k < WINDOW - 1; k++) acc += SW'(hist[i][k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sum <= '0;
    else        sum <= acc;
endmodule
