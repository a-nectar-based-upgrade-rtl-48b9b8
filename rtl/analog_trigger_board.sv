// analog_trigger_board: behavioural model of the DIB's analogue trigger
// board (38 sector summators and comparators).
//
// The real board is analogue: each of the 120 half-drawer trigger lines
// carries a pulse-amplitude level of 33 mV per step; the board adds the
// lines of each 64-pixel trigger sector and compares the sum with the
// sector threshold Q, set by a DAC of 0.76 mV per count. A line feeds up to
// four sectors because sectors overlap. This model computes the same sums
// digitally in microvolts: sector s fires when
//     (sum of levels in s) * LEVEL_UV > q_thr * Q_LSB_UV.
// The outputs are registered, standing in for the analogue delay.
//
// The 33 mV step, the 0.76 mV DAC step and the 38 sectors follow the camera
// description; the sector map is hess_pkg::sector_mask (this design's
// rule), and noise and pulse shapes are not modelled.
module analog_trigger_board
  import hess_pkg::*;
#(
  parameter int unsigned NSEC     = N_SECTORS,
  parameter int unsigned LEVEL_UV = 33000,
  parameter int unsigned Q_LSB_UV = 760
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pam_t             pam_level [N_HALF],
  input  logic [9:0]       q_thr,
  output logic [NSEC-1:0]  sector_trig
);
  typedef logic [N_HALF-1:0] smask_t;

  function automatic smask_t mask_of(input int unsigned s);
    return sector_mask(s);
  endfunction

  logic [9:0]  sum [NSEC];    // sum of levels, at most 8 lines x 7
  logic [NSEC-1:0] fire;

  for (genvar s = 0; s < NSEC; s++) begin : g_sec
    localparam smask_t M = mask_of(s);
    always_comb begin
      sum[s] = '0;
      for (int h = 0; h < N_HALF; h++)
        if (M[h]) sum[s] += 10'(pam_level[h]);
      fire[s] = (32'(sum[s]) * LEVEL_UV) > (32'(q_thr) * Q_LSB_UV);
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sector_trig <= '0;
    else        sector_trig <= fire;
endmodule
