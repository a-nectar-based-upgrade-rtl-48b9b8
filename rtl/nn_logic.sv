// nn_logic: next-neighbour (NN) cluster trigger of one drawer.
//
// The drawer's 16 shaped L0 signals are treated as a 4x4 pixel grid (index
// = 4*row + column). A neighbour look-up table, computed at elaboration,
// holds for each pixel the mask of its edge neighbours. The drawer fires
// when some pixel is active together with at least NN_MULT-1 of its
// neighbours, i.e. a compact cluster of NN_MULT pixels. Clusters that span
// two drawers are not searched for, as in the camera firmware.
//
// The NN logic and its table form follow the camera description; the grid
// arrangement, the neighbour definition and NN_MULT = 3 are this design's
// choices. nn_trig is registered: one tick after the L0 pattern.
module nn_logic #(
  parameter int unsigned NN_MULT = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] l0,
  output logic        nn_trig
);
  typedef logic [15:0] mask_t;

  function automatic mask_t neighbours(input int unsigned p);
    mask_t m = '0;
    int unsigned r = p / 4, c = p % 4;
    if (r > 0) m[p-4] = 1'b1;
    if (r < 3) m[p+4] = 1'b1;
    if (c > 0) m[p-1] = 1'b1;
    if (c < 3) m[p+1] = 1'b1;
    return m;
  endfunction

  logic [15:0] hit;

  always_comb begin
    for (int p = 0; p < 16; p++) begin
      int unsigned n;
      mask_t act;
      act = l0 & neighbours(p);
      n   = $countones(act);
      hit[p] = l0[p] && (n + 1 >= NN_MULT);
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) nn_trig <= 1'b0;
    else        nn_trig <= |hit;
endmodule
