// drawer_fpga: logic of the FPGA on a drawer's slow-control board.
//
// Trigger side: the 16 pixel L0 comparator outputs go through
// drawer_trigger, which drives the two 8-level trigger lines (one per half
// drawer) to the drawer interface box (DIB).
// Readout side: the DIB's LVDS readout-control line carries pulse-length
// coded commands. "stop" freezes the 16 NECTAr chips and starts the ROI
// readout (roi_readout); "accept" tells event_builder to keep the event
// held in the front-end buffer, which otherwise is dropped after the
// hold-off time. Kept events go as 16-bit words into an output FIFO that
// the ARM computer reads through the memory-bus registers (drawer_regs).
// A stop that arrives while the previous event is still being copied to the
// FIFO (only possible when the FIFO is full) is dropped and counted, as
// are malformed command pulses.
//
// Structure and command flow follow the camera description; the
// sub-blocks' headers list this design's own choices.
module drawer_fpga
  import hess_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic               clk,
  input  logic               rst_n,
  // trigger
  input  logic [15:0]        l0_in,
  output pam_t               pam_level [2],
  // readout control line from the DIB
  input  logic               ctrl_line,
  // NECTAr chips
  output logic               sca_stop,
  output logic               rd_start,
  output logic               rd_conv,
  output logic [9:0]         nd       [16],
  output logic signed [7:0]  line_dac [16][16],
  input  logic               dout_valid,
  input  adc_t               dout_hg  [16],
  input  adc_t               dout_lg  [16],
  // memory bus to the ARM computer
  input  logic               bus_cs,
  input  logic               bus_we,
  input  logic [9:0]         bus_addr,
  input  logic [15:0]        bus_wdata,
  output logic [15:0]        bus_rdata
);
  trig_mode_t  mode;
  logic        wave_mode, cnt_clear;
  logic [5:0]  roi_len, int_start;
  logic [15:0] holdoff;
  logic [3:0]  delay [16], stretch [16];
  logic [15:0] l0_count [16];

  logic        cmd_valid, cmd_err;
  logic [0:0]  cmd_code;
  logic        stop_raw, stop_cmd, accept;
  logic        ro_busy, ro_done, sending;
  charge_t     charge_hg [16], charge_lg [16];
  logic [5:0]  wave_addr;
  adc_t        wave_hg [16], wave_lg [16];
  logic        fifo_wr, fifo_full, fifo_empty, fifo_pop;
  logic [15:0] fifo_wdata, fifo_rdata;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;
  logic [15:0] n_acc, n_disc, n_lost, n_err;

  drawer_trigger #(.MAX_DELAY(16), .MAX_STRETCH(16)) u_trig (
    .clk, .rst_n, .l0_in, .delay, .stretch, .mode, .cnt_clear,
    .pam_level, .l0_count);

  pulse_len_decoder #(.NCODES(DCTL_NCODES), .LEN_BASE(CODE_LEN_BASE), .TOL(CODE_TOL)) u_dec (
    .clk, .rst_n, .line(ctrl_line), .valid(cmd_valid), .code(cmd_code), .err(cmd_err));

  assign stop_raw = cmd_valid && (cmd_code == 1'(DCTL_STOP));
  assign accept   = cmd_valid && (cmd_code == 1'(DCTL_ACCEPT));
  assign stop_cmd = stop_raw && !ro_busy && !sending;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) n_lost <= '0;
    else if (stop_raw && !stop_cmd) n_lost <= n_lost + 1'b1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) n_err <= '0;
    else if (cmd_err) n_err <= n_err + 1'b1;

  roi_readout u_ro (
    .clk, .rst_n, .stop_cmd, .roi_len, .int_start,
    .sca_stop, .rd_start, .rd_conv, .dout_valid, .dout_hg, .dout_lg,
    .busy(ro_busy), .done(ro_done), .charge_hg, .charge_lg,
    .wave_addr, .wave_hg, .wave_lg);

  event_builder u_eb (
    .clk, .rst_n, .stop_cmd, .accept, .done(ro_done), .holdoff, .wave_mode,
    .roi_len, .charge_hg, .charge_lg, .wave_addr, .wave_hg, .wave_lg,
    .fifo_wr, .fifo_data(fifo_wdata), .fifo_full, .sending,
    .n_accepted(n_acc), .n_discarded(n_disc));

  sync_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(fifo_wr), .wr_data(fifo_wdata), .rd_en(fifo_pop && !fifo_empty),
    .rd_data(fifo_rdata), .full(fifo_full), .empty(fifo_empty), .count(fifo_count));

  drawer_regs u_regs (
    .clk, .rst_n, .bus_cs, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .mode, .wave_mode, .cnt_clear, .roi_len, .int_start, .holdoff,
    .delay, .stretch, .nd, .line_dac, .l0_count,
    .fifo_data(fifo_rdata), .fifo_count(16'(fifo_count)), .fifo_pop,
    .n_acc, .n_disc, .n_lost, .n_err);
endmodule
