// hess1u_camera: trigger and readout electronics of an upgraded 960-pixel
// Cherenkov camera.
//
// 60 drawers of 16 pixels each sample their pixels' L0 comparator outputs
// and send two 8-level trigger signals (one per half drawer) to the
// analogue trigger board, which sums them over 38 overlapping sectors of
// 64 pixels and compares each sum with the threshold Q. The DIB FPGA ORs
// the sector outputs into the camera trigger, broadcasts a length-coded
// "stop" on one shared readout-control line to all drawers (the LVDS lines
// have equal lengths, so one net models them), tells the central trigger
// "active", and forwards its "accept" to the drawers. Each drawer then
// keeps its read-out event and offers it to its ARM computer on its memory
// bus; without an accept the event is dropped after the hold-off time.
//
// Outside this RTL and brought out as ports: the analogue front end (L0
// comparator outputs and the two gain signals as ADC codes per pixel), the
// drawers' ARM computers (one memory bus per drawer), the central trigger
// fibre, the SPE unit trigger, the GPS module and the interlock sensors.
// Drawer index d is the populated drawer position counted row by row over
// the 8x9 drawer matrix (hess_pkg::drawer_index). With NDRAW < 60 only the
// first NDRAW drawers are built and the other trigger lines stay at 0.
//
// Timing: clk is the 1.25 ns logic tick of every drawer and DIB block,
// clk_sca the 1 GHz NECTAr write clock; rst_n is an asynchronous reset.
// The L0-to-stop latency is a few tens of ticks; a normal event occupies
// the camera for the 5920-tick (7.4 us) hold-off.
//
// The block structure, the signal counts (120 trigger lines, 38 sector
// outputs, one readout-control line, one fibre) and the protocol follow the
// camera description; the single logic clock and the shared control net are
// this design's simplifications. Verilator reports rst_n as used both
// synchronously and asynchronously: the synchronous use is only the
// "disable iff" of the protocol assertions, not logic.
module hess1u_camera
  import hess_pkg::*;
#(
  parameter int unsigned NDRAW      = N_DRAWERS,
  parameter int unsigned FIFO_DEPTH = 4096,
  parameter int unsigned HORN_TICKS = 32'd2_400_000_000
) (
  input  logic         clk,
  input  logic         clk_sca,
  input  logic         rst_n,
  // analogue front end
  input  logic [15:0]  l0_in  [NDRAW],
  input  adc_t         ain_hg [NDRAW][16],
  input  adc_t         ain_lg [NDRAW][16],
  // drawer memory buses
  input  logic         bus_cs    [NDRAW],
  input  logic         bus_we    [NDRAW],
  input  logic [9:0]   bus_addr  [NDRAW],
  input  logic [15:0]  bus_wdata [NDRAW],
  output logic [15:0]  bus_rdata [NDRAW],
  // trigger configuration and links
  input  logic [9:0]   q_thr,
  input  logic         spe_trig,
  input  logic         src_spe,
  input  logic [5:0]   roi_len,
  input  logic         ct_rx,
  output logic         ct_tx,
  output logic         in_holdoff,
  output logic [31:0]  n_trig,
  output logic [31:0]  n_busy,
  output logic [31:0]  n_accept,
  // GPS
  input  logic         pps,
  input  logic         sec_load,
  input  logic [31:0]  sec_in,
  output logic [31:0]  ts_sec,
  output logic [29:0]  ts_sub,
  output logic         ts_valid,
  // interlock
  input  logic         lid_open_req,
  input  logic         power_fail,
  input  logic         smoke,
  input  logic         ventilation_ok,
  input  logic         contact_pressure_ok,
  input  logic         contact_local_mode,
  input  logic         contact_front_lid_open,
  input  logic         contact_front_lid_moving,
  input  logic         contact_back_lid_open,
  input  logic         ambient_light_high,
  output logic         remote_front_lid_open,
  output logic         horn,
  output logic         drawer_power_enable,
  output logic         alarm,
  output logic         lid_status_open,
  output logic         back_door_open
);
  pam_t                 pam_level [N_HALF];
  logic [N_SECTORS-1:0] sector_trig;
  logic                 drawer_ctrl;

  for (genvar d = 0; d < N_DRAWERS; d++) begin : g_drawer
    if (d < NDRAW) begin : g_on
      pam_t lvl [2];
      drawer #(.FIFO_DEPTH(FIFO_DEPTH)) u_drawer (
        .clk, .clk_sca, .rst_n, .l0_in(l0_in[d]), .ain_hg(ain_hg[d]), .ain_lg(ain_lg[d]),
        .pam_level(lvl), .ctrl_line(drawer_ctrl),
        .bus_cs(bus_cs[d]), .bus_we(bus_we[d]), .bus_addr(bus_addr[d]),
        .bus_wdata(bus_wdata[d]), .bus_rdata(bus_rdata[d]));
      assign pam_level[2*d]   = lvl[0];
      assign pam_level[2*d+1] = lvl[1];
    end else begin : g_off
      assign pam_level[2*d]   = '0;
      assign pam_level[2*d+1] = '0;
    end
  end

  analog_trigger_board u_atb (
    .clk, .rst_n, .pam_level, .q_thr, .sector_trig);

  dib_fpga #(.HORN_TICKS(HORN_TICKS)) u_dib (
    .clk, .rst_n, .sector_trig, .spe_trig, .src_spe, .roi_len, .ct_rx, .ct_tx,
    .drawer_ctrl, .in_holdoff, .n_trig, .n_busy, .n_accept,
    .pps, .sec_load, .sec_in, .ts_sec, .ts_sub, .ts_valid,
    .lid_open_req, .power_fail, .smoke, .ventilation_ok, .contact_pressure_ok,
    .contact_local_mode, .contact_front_lid_open, .contact_front_lid_moving,
    .contact_back_lid_open, .ambient_light_high,
    .remote_front_lid_open, .horn, .drawer_power_enable, .alarm,
    .lid_status_open, .back_door_open);
endmodule
