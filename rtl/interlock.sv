// interlock: safety interlock of the drawer interface box.
//
// Guards the front lid and the drawer power from the camera's sensors. The
// pneumatic lid control takes one relay output from the DIB
// (remote_front_lid_open: 1 = lid open, 0 = lid closed) and reports its
// contacts back.
//   alarm = power failure, smoke, ventilation not OK, air pressure not OK,
//           or ambient light too high while the lid is open.
//   In remote mode a request to open (lid_open_req, level) opens the lid
//   if there is no alarm; an alarm or a dropped request closes it.
//   In local mode the remote relay is released (0) and requests ignored;
//   the pneumatics box then obeys only its manual switches.
//   Every change of the relay is preceded by HORN_TICKS of air horn.
//   Drawer power is enabled only without smoke and with ventilation OK.
//
// From the camera description: local/remote modes, only the front lid
// remote-controlled via a DIB relay, the automatic closing on power
// failure or alarm, the horn before any movement, the sensor names. The
// alarm list and the drawer-power rule are this design's choices.
module interlock #(
  parameter int unsigned HORN_TICKS = 32'd2_400_000_000   // 3 s at 800 MHz
) (
  input  logic clk,
  input  logic rst_n,
  input  logic lid_open_req,
  input  logic power_fail,
  input  logic smoke,
  input  logic ventilation_ok,
  input  logic contact_pressure_ok,
  input  logic contact_local_mode,
  input  logic contact_front_lid_open,
  input  logic contact_front_lid_moving,
  input  logic contact_back_lid_open,
  input  logic ambient_light_high,
  output logic remote_front_lid_open,
  output logic horn,
  output logic drawer_power_enable,
  output logic alarm,
  output logic lid_status_open,
  output logic back_door_open
);
  logic        target;
  logic [31:0] horn_cnt;

  always_comb begin
    alarm  = power_fail || smoke || !ventilation_ok || !contact_pressure_ok ||
             (ambient_light_high && contact_front_lid_open);
    target = !contact_local_mode && lid_open_req && !alarm;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      remote_front_lid_open <= 1'b0;
      horn_cnt              <= '0;
      horn                  <= 1'b0;
    end else if (contact_local_mode) begin
      remote_front_lid_open <= 1'b0;
      horn_cnt              <= '0;
      horn                  <= 1'b0;
    end else if (target != remote_front_lid_open) begin
      if (horn_cnt == HORN_TICKS) begin
        remote_front_lid_open <= target;
        horn_cnt              <= '0;
        horn                  <= 1'b0;
      end else begin
        horn_cnt <= horn_cnt + 1'b1;
        horn     <= 1'b1;
      end
    end else begin
      horn_cnt <= '0;
      horn     <= 1'b0;
    end

  assign drawer_power_enable = !smoke && ventilation_ok;
  // Status for slow control: the lid reads open only when it has stopped
  // moving; the back-door contact is passed on unchanged (a plain status
  // bit, no logic of its own).
  assign lid_status_open = contact_front_lid_open && !contact_front_lid_moving;
  assign back_door_open  = contact_back_lid_open;
endmodule
