// half_drawer_majority: number of pixels with an active L0 in one half drawer.
//
// The camera's majority trigger sends, for each half drawer, the count of
// active shaped L0 signals to the analogue sector summators. This block is a
// registered population count of NPIX (8) inputs: count is valid one tick
// after the L0 pattern. Counting per half drawer follows the camera
// description; the registered output is this design's choice.
module half_drawer_majority #(
  parameter int unsigned NPIX = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NPIX-1:0]             l0,
  output logic [$clog2(NPIX+1)-1:0]   count
);
  logic [$clog2(NPIX+1)-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < NPIX; i++) sum += {{($clog2(NPIX+1)-1){1'b0}}, l0[i]};
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) count <= '0;
    else        count <= sum;
endmodule
