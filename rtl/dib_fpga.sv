// dib_fpga: logic of the FPGA in the drawer interface box (DIB).
//
// The DIB is the camera's hub. Its FPGA receives the 38 sector comparator
// outputs of the analogue trigger board and runs the trigger control
// (dib_trigger_ctrl: L1, stop/accept to the drawers, active/busy/accept
// with the central trigger, hold-off), timestamps every trigger with the
// GPS time (event_timestamp) and runs the safety interlock (interlock).
// Configuration inputs (trigger source, ROI length) stand for registers
// written by the DIB's ARM computer, which is not part of this RTL.
module dib_fpga
  import hess_pkg::*;
#(
  parameter int unsigned HORN_TICKS = 32'd2_400_000_000
) (
  input  logic              clk,
  input  logic              rst_n,
  // trigger
  input  logic [N_SECTORS-1:0] sector_trig,
  input  logic              spe_trig,
  input  logic              src_spe,
  input  logic [5:0]        roi_len,
  input  logic              ct_rx,
  output logic              ct_tx,
  output logic              drawer_ctrl,
  output logic              in_holdoff,
  output logic [31:0]       n_trig,
  output logic [31:0]       n_busy,
  output logic [31:0]       n_accept,
  // GPS
  input  logic              pps,
  input  logic              sec_load,
  input  logic [31:0]       sec_in,
  output logic [31:0]       ts_sec,
  output logic [29:0]       ts_sub,
  output logic              ts_valid,
  // interlock
  input  logic              lid_open_req,
  input  logic              power_fail,
  input  logic              smoke,
  input  logic              ventilation_ok,
  input  logic              contact_pressure_ok,
  input  logic              contact_local_mode,
  input  logic              contact_front_lid_open,
  input  logic              contact_front_lid_moving,
  input  logic              contact_back_lid_open,
  input  logic              ambient_light_high,
  output logic              remote_front_lid_open,
  output logic              horn,
  output logic              drawer_power_enable,
  output logic              alarm,
  output logic              lid_status_open,
  output logic              back_door_open
);
  logic trig;

  dib_trigger_ctrl #(.NSEC(N_SECTORS)) u_trig (
    .clk, .rst_n, .sector_trig, .spe_trig, .src_spe, .roi_len, .ct_rx, .ct_tx,
    .drawer_ctrl, .trig, .in_holdoff, .n_trig, .n_busy, .n_accept);

  event_timestamp u_ts (
    .clk, .rst_n, .pps, .sec_load, .sec_in, .trig, .ts_sec, .ts_sub, .ts_valid);

  interlock #(.HORN_TICKS(HORN_TICKS)) u_ilk (
    .clk, .rst_n, .lid_open_req, .power_fail, .smoke, .ventilation_ok,
    .contact_pressure_ok, .contact_local_mode, .contact_front_lid_open,
    .contact_front_lid_moving, .contact_back_lid_open, .ambient_light_high,
    .remote_front_lid_open, .horn, .drawer_power_enable, .alarm,
    .lid_status_open, .back_door_open);
endmodule
