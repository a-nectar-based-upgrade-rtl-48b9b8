// drawer: one front-end drawer of the camera (16 pixels).
//
// Combines the drawer FPGA logic with the 16 NECTAr chips (one per pixel,
// high and low gain). The analogue parts of the drawer (PMTs, amplifiers,
// the L0 comparators) are outside: the pixel signals enter as L0 comparator
// outputs and as the two gain signals expressed as ADC codes.
//
// Clocks: clk is the 800 MHz logic clock (1.25 ns tick), clk_sca the 1 GHz
// NECTAr write clock. Outputs: the two half-drawer trigger levels and the
// memory-bus read data. The chips convert in lock step; the FPGA takes a
// sample when all 16 report valid data.
module drawer
  import hess_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic         clk,
  input  logic         clk_sca,
  input  logic         rst_n,
  input  logic [15:0]  l0_in,
  input  adc_t         ain_hg [16],
  input  adc_t         ain_lg [16],
  output pam_t         pam_level [2],
  input  logic         ctrl_line,
  input  logic         bus_cs,
  input  logic         bus_we,
  input  logic [9:0]   bus_addr,
  input  logic [15:0]  bus_wdata,
  output logic [15:0]  bus_rdata
);
  logic              sca_stop, rd_start, rd_conv;
  logic [9:0]        nd [16];
  logic signed [7:0] line_dac [16][16];
  logic [15:0]       dvalid;
  adc_t              dout_hg [16], dout_lg [16];

  drawer_fpga #(.FIFO_DEPTH(FIFO_DEPTH)) u_fpga (
    .clk, .rst_n, .l0_in, .pam_level, .ctrl_line,
    .sca_stop, .rd_start, .rd_conv, .nd, .line_dac,
    .dout_valid(&dvalid), .dout_hg, .dout_lg,
    .bus_cs, .bus_we, .bus_addr, .bus_wdata, .bus_rdata);

  for (genvar p = 0; p < 16; p++) begin : g_chip
    nectar_chip u_chip (
      .rst_n, .clk_sca, .ain_hg(ain_hg[p]), .ain_lg(ain_lg[p]), .stop(sca_stop),
      .nd(nd[p]), .line_dac(line_dac[p]),
      .clk, .rd_start, .rd_conv,
      .dout_valid(dvalid[p]), .dout_hg(dout_hg[p]), .dout_lg(dout_lg[p]));
  end
endmodule
