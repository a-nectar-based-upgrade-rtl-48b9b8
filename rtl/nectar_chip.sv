// nectar_chip: behavioural model of the NECTAr analogue memory and
// digitizer chip (one chip = one pixel, two channels: high and low gain).
//
// The real chip is analogue: each channel is a switched-capacitor ring
// buffer of DEPTH = 1024 cells (16 lines x 64 columns) written at 1 GHz,
// followed by a 12-bit ADC and a serializer. This model stores the input
// as a 12-bit code per cell, which is all the digital logic around the
// chip can observe.
//
// Write side (clk_sca, 1 GHz): while `stop` is low, each clock writes
// ain_hg/ain_lg into the next cell, wrapping over the whole array, so a
// cell is overwritten every 1024 ns. `stop` (from the readout clock domain)
// is synchronised with two flops and freezes writing.
//
// Read side (clk): `rd_start` latches the ROI start address
// (last written cell + nd) mod DEPTH, so the ROI begins L = DEPTH - nd
// cells before the last sample. Every `rd_conv` pulse converts the next
// cell; dout_* and dout_valid follow one clk later. Cell c gets the signed
// offset of its line DAC, line_dac[c mod 16], and is clipped to 0..4095.
// The first STALE = 16 conversions of a readout return stale values: the
// model passes conversions through a 16-deep pipeline that still holds
// the previous readout's samples, so reading 16 + R cells yields 16 stale
// words followed by the R ROI cells.
//
// From the chip description: array size, lines, 1 GHz ring writing, stop
// on trigger, Nd = 1024 - L, 12-bit ADC, 16 stale cells, line DACs.
// This model's own choices: the pipeline form of the stale cells, the
// 1-count DAC step, a parallel output in place of the serializer.
module nectar_chip
  import hess_pkg::*;
#(
  parameter int unsigned DEPTH  = SCA_DEPTH,
  parameter int unsigned NLINES = SCA_LINES,
  parameter int unsigned BITS   = ADC_BITS,
  parameter int unsigned STALE  = STALE_CELLS
) (
  input  logic                     rst_n,
  // write side
  input  logic                     clk_sca,
  input  logic [BITS-1:0]          ain_hg,
  input  logic [BITS-1:0]          ain_lg,
  input  logic                     stop,
  // configuration
  input  logic [$clog2(DEPTH)-1:0] nd,
  input  logic signed [7:0]        line_dac [NLINES],
  // read side
  input  logic                     clk,
  input  logic                     rd_start,
  input  logic                     rd_conv,
  output logic                     dout_valid,
  output logic [BITS-1:0]          dout_hg,
  output logic [BITS-1:0]          dout_lg
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [BITS-1:0] cell_hg [DEPTH];
  logic [BITS-1:0] cell_lg [DEPTH];
  logic [AW-1:0]   wp;
  logic [1:0]      stop_s;

  // ------------------------------------------------------------- writing
  always_ff @(posedge clk_sca or negedge rst_n)
    if (!rst_n) begin
      wp     <= '0;
      stop_s <= '0;
    end else begin
      stop_s <= {stop_s[0], stop};
      if (!stop_s[1]) wp <= wp + 1'b1;
    end

  always_ff @(posedge clk_sca)
    if (!stop_s[1]) begin
      cell_hg[wp] <= ain_hg;
      cell_lg[wp] <= ain_lg;
    end

  // ------------------------------------------------------------- reading
  logic [AW-1:0]   ra;
  logic [BITS-1:0] pipe_hg [STALE];
  logic [BITS-1:0] pipe_lg [STALE];

  function automatic logic [BITS-1:0] add_offset(input logic [BITS-1:0] v,
                                                 input logic signed [7:0] off);
    int s;
    s = int'(v) + int'(off);
    if (s < 0) s = 0;
    if (s > (1 << BITS) - 1) s = (1 << BITS) - 1;
    return BITS'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ra         <= '0;
      dout_valid <= 1'b0;
      dout_hg    <= '0;
      dout_lg    <= '0;
      for (int i = 0; i < STALE; i++) begin
        pipe_hg[i] <= '0;
        pipe_lg[i] <= '0;
      end
    end else begin
      dout_valid <= 1'b0;
      if (rd_start) begin
        ra <= wp - 1'b1 + nd;      // last written cell + Nd
      end else if (rd_conv) begin
        ra         <= ra + 1'b1;
        dout_valid <= 1'b1;
        dout_hg    <= pipe_hg[STALE-1];
        dout_lg    <= pipe_lg[STALE-1];
        for (int i = STALE - 1; i > 0; i--) begin
          pipe_hg[i] <= pipe_hg[i-1];
          pipe_lg[i] <= pipe_lg[i-1];
        end
        pipe_hg[0] <= add_offset(cell_hg[ra], line_dac[int'(ra) % NLINES]);
        pipe_lg[0] <= add_offset(cell_lg[ra], line_dac[int'(ra) % NLINES]);
      end
    end
endmodule
