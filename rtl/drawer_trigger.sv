// drawer_trigger: trigger path of one drawer FPGA.
//
// Each of the 16 pixel L0 signals is shaped (delay d, stretch l) by an
// l0_shaper. From the shaped signals the block derives, per half drawer
// (pixels with column 0-1 and 2-3 of the 4x4 grid), the value sent on the
// two pulse-amplitude modulated LVDS trigger lines to the drawer interface
// box:
//   TRIG_MAJORITY  - number of active pixels (the default camera trigger),
//   TRIG_PSEUDOSUM - time-over-threshold sum over the last 5 ns,
//   TRIG_NN        - full scale on both lines while the drawer's
//                    next-neighbour cluster logic fires, zero otherwise.
// The line carries 8 amplitude levels, so the value is clipped to 7.
// Per-pixel rising edges of the shaped L0 are counted (L0 rate counters).
//
// Camera description: shaping, the three trigger algorithms, per-half
// counting and 8 levels. This design's choices: the clipping at 7, full
// scale for NN, the pixel-to-half assignment and 16-bit wrapping counters.
//
// Timing: pam_level is registered, 2 ticks after the shaped L0 (1 in the
// selected algorithm, 1 in the output register).
module drawer_trigger
  import hess_pkg::*;
#(
  parameter int unsigned MAX_DELAY   = 16,
  parameter int unsigned MAX_STRETCH = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [15:0]                    l0_in,
  input  logic [$clog2(MAX_DELAY)-1:0]   delay   [16],
  input  logic [$clog2(MAX_STRETCH)-1:0] stretch [16],
  input  trig_mode_t                     mode,
  input  logic                           cnt_clear,
  output pam_t                           pam_level [2],
  output logic [15:0]                    l0_count  [16]
);
  logic [15:0] l0_sh, l0_prev;
  logic [7:0]  half_l0 [2];
  logic [3:0]  maj     [2];
  logic [5:0]  psum    [2];
  logic        nn;

  for (genvar p = 0; p < 16; p++) begin : g_pix
    l0_shaper #(.MAX_DELAY(MAX_DELAY), .MAX_STRETCH(MAX_STRETCH)) u_shaper (
      .clk, .rst_n, .l0_in(l0_in[p]), .delay(delay[p]), .stretch(stretch[p]),
      .l0_out(l0_sh[p]));
  end

  // Half 0 = grid columns 0-1, half 1 = columns 2-3 (pixel = 4*row + col).
  always_comb
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < 4; r++) begin
        half_l0[h][2*r]   = l0_sh[4*r + 2*h];
        half_l0[h][2*r+1] = l0_sh[4*r + 2*h + 1];
      end

  for (genvar h = 0; h < 2; h++) begin : g_half
    half_drawer_majority #(.NPIX(PIX_PER_HALF)) u_maj (
      .clk, .rst_n, .l0(half_l0[h]), .count(maj[h]));
    pseudo_sum #(.NPIX(PIX_PER_HALF), .WINDOW(4)) u_psum (
      .clk, .rst_n, .l0(half_l0[h]), .sum(psum[h]));
  end

  nn_logic #(.NN_MULT(3)) u_nn (.clk, .rst_n, .l0(l0_sh), .nn_trig(nn));

  function automatic pam_t clip7(input int unsigned v);
    return (v > 7) ? 3'd7 : pam_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pam_level[0] <= '0;
      pam_level[1] <= '0;
    end else begin
      for (int h = 0; h < 2; h++)
        unique case (mode)
          TRIG_MAJORITY:  pam_level[h] <= clip7(int'(maj[h]));
          TRIG_PSEUDOSUM: pam_level[h] <= clip7(int'(psum[h]));
          TRIG_NN:        pam_level[h] <= nn ? 3'd7 : 3'd0;
          default:        pam_level[h] <= '0;
        endcase
    end

  // L0 rate counters.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      l0_prev <= '0;
      for (int p = 0; p < 16; p++) l0_count[p] <= '0;
    end else begin
      l0_prev <= l0_sh;
      for (int p = 0; p < 16; p++)
        if (cnt_clear)                   l0_count[p] <= '0;
        else if (l0_sh[p] && !l0_prev[p]) l0_count[p] <= l0_count[p] + 16'd1;
    end
endmodule
