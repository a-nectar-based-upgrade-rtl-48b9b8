// hess_pkg: constants, types and the trigger-sector geometry shared by the
// camera trigger and readout RTL.
//
// Time base: every synchronous block runs on one logic clock whose tick is
// 1.25 ns, the step of the 800 MHz L0 sampling. All durations below are
// in those ticks.
//
// Taken from the camera description: 60 drawers of 16 pixels, 38 trigger
// sectors of 64 pixels, 120 half-drawer trigger lines, 1024-cell NECTAr ring
// buffers read by a 12-bit ADC, 16 stale cells per readout, 0.1 us per read
// cell, and the hold-off time t_b = 4 us + (n + n/16) * 0.1 us.
//
// This design's own choices: the pulse lengths of the length-coded commands,
// the 4x4 pixel arrangement inside a drawer (left half = columns 0-1), and
// the sector map rule in sector_mask() (see below), which reproduces the 38
// sectors, the half-drawer horizontal overlap, the one-drawer vertical
// overlap and the "up to 4 sectors per signal" of the camera.
package hess_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned PIX_PER_DRAWER = 16;
  localparam int unsigned PIX_PER_HALF   = 8;
  localparam int unsigned DRAWER_ROWS    = 8;
  localparam int unsigned DRAWER_COLS    = 9;
  localparam int unsigned N_DRAWERS      = 60;
  localparam int unsigned N_HALF         = 2 * N_DRAWERS;   // 120 trigger lines
  localparam int unsigned N_SECTORS      = 38;
  localparam int unsigned N_HCOL_STARTS  = 6;

  // ------------------------------------------------------------ NECTAr chip
  localparam int unsigned SCA_DEPTH   = 1024;
  localparam int unsigned SCA_LINES   = 16;
  localparam int unsigned ADC_BITS    = 12;
  localparam int unsigned STALE_CELLS = 16;
  localparam int unsigned MAX_ROI     = 48;
  localparam int unsigned INT_LEN     = 16;

  // ---------------------------------------------------------------- timing
  localparam int unsigned TICKS_PER_US = 800;   // 1.25 ns per tick
  localparam int unsigned CONV_TICKS   = 80;    // 0.1 us per read cell
  localparam int unsigned PROC_TICKS   = 4 * TICKS_PER_US;  // 4 us trigger + FPGA

  typedef logic [ADC_BITS-1:0] adc_t;
  typedef logic [15:0]         charge_t;
  typedef logic [2:0]          pam_t;     // 8 amplitude levels

  // Hold-off time t_b for n read cells, in ticks.
  function automatic int unsigned holdoff_ticks(input int unsigned n);
    return PROC_TICKS + (n + n / 16) * CONV_TICKS;
  endfunction

  // ------------------------------------------------------ drawer trigger mode
  typedef enum logic [1:0] {
    TRIG_MAJORITY  = 2'd0,
    TRIG_NN        = 2'd1,
    TRIG_PSEUDOSUM = 2'd2
  } trig_mode_t;

  // -------------------------------------------------- length-coded commands
  // Drawer readout-control line (DIB -> drawer).
  localparam int unsigned DCTL_NCODES = 2;
  localparam int unsigned DCTL_STOP   = 0;
  localparam int unsigned DCTL_ACCEPT = 1;
  // Central-trigger fibre. Camera -> central trigger: active, busy.
  // Central trigger -> camera: accept.
  localparam int unsigned CT_NCODES = 3;
  localparam int unsigned CT_ACTIVE = 0;
  localparam int unsigned CT_BUSY   = 1;
  localparam int unsigned CT_ACCEPT = 2;
  localparam int unsigned CODE_LEN_BASE = 8;    // code k lasts 8*(k+1) ticks
  localparam int unsigned CODE_GAP      = 8;    // low ticks after each pulse
  localparam int unsigned CODE_TOL      = 2;

  // ----------------------------------------------------- sector geometry
  function automatic int unsigned hcol_start(input int unsigned k);
    int unsigned s[N_HCOL_STARTS] = '{0, 3, 6, 9, 12, 14};
    return s[k];
  endfunction

  // Is drawer position (row, col) populated? Each corner of the 8x9 matrix
  // lacks an L-shaped group of 3 drawers.
  function automatic bit drawer_present(input int unsigned r, input int unsigned c);
    int dr, dc;
    for (int k = 0; k < 4; k++) begin
      dr = (k < 2) ? int'(r) : int'(DRAWER_ROWS - 1 - r);
      dc = (k % 2 == 0) ? int'(c) : int'(DRAWER_COLS - 1 - c);
      if (dr + dc <= 1) return 1'b0;
    end
    return 1'b1;
  endfunction

  // Drawer index of position (row, col), counted row-major over populated
  // positions; -1 for an empty corner position.
  function automatic int drawer_index(input int unsigned r, input int unsigned c);
    int idx = 0;
    for (int unsigned rr = 0; rr < DRAWER_ROWS; rr++)
      for (int unsigned cc = 0; cc < DRAWER_COLS; cc++) begin
        if (rr == r && cc == c) return drawer_present(r, c) ? idx : -1;
        if (drawer_present(rr, cc)) idx++;
      end
    return -1;
  endfunction

  // Number of populated half-drawer slots of candidate sector (row, hstart).
  function automatic int unsigned sector_fill(input int unsigned r, input int unsigned k);
    int unsigned n = 0;
    for (int unsigned rr = r; rr < r + 2; rr++)
      for (int unsigned h = hcol_start(k); h < hcol_start(k) + 4; h++)
        if (drawer_present(rr, h / 2)) n++;
    return n;
  endfunction

  // Membership mask over the 120 half-drawer lines (line = 2*drawer + half,
  // half 0 = left) of sector s. Candidate sectors are 2 drawer rows by
  // 4 half-drawer columns; those with at least 4 of 8 slots populated are
  // kept, in row-major order: 38 sectors.
  function automatic logic [N_HALF-1:0] sector_mask(input int unsigned s);
    int unsigned idx = 0;
    logic [N_HALF-1:0] m = '0;
    for (int unsigned r = 0; r + 1 < DRAWER_ROWS; r++)
      for (int unsigned k = 0; k < N_HCOL_STARTS; k++)
        if (sector_fill(r, k) >= 4) begin
          if (idx == s) begin
            for (int unsigned rr = r; rr < r + 2; rr++)
              for (int unsigned h = hcol_start(k); h < hcol_start(k) + 4; h++)
                if (drawer_present(rr, h / 2))
                  m[2 * drawer_index(rr, h / 2) + (h % 2)] = 1'b1;
          end
          idx++;
        end
    return m;
  endfunction

  // Number of sectors the rule above produces (38 for this geometry).
  function automatic int unsigned sector_count();
    int unsigned n = 0;
    for (int unsigned r = 0; r + 1 < DRAWER_ROWS; r++)
      for (int unsigned k = 0; k < N_HCOL_STARTS; k++)
        if (sector_fill(r, k) >= 4) n++;
    return n;
  endfunction

endpackage
