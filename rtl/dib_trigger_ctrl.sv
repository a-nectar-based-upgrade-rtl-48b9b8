// dib_trigger_ctrl: acquisition management and trigger control of the DIB.
//
// The 38 sector comparator outputs are combined in an OR; its rising edge
// is the camera level-1 trigger (L1). For calibration the trigger source
// can be switched to the SPE light-pulser's trigger input (src_spe). On a
// trigger outside the hold-off time the block
//   - sends "stop" on the drawers' readout-control line,
//   - sends "active" to the central trigger on the fibre,
//   - starts the hold-off timer t_b = 4 us + (n + n/16) * 0.1 us, with
//     n = 16 stale + roi_len read cells (7.4 us for the normal n = 32).
// A trigger inside the hold-off sends "busy" to the central trigger and
// nothing to the drawers. An "accept" from the central trigger inside the
// hold-off is forwarded once to the drawers; later ones are ignored.
// All commands are pulse-length coded (pulse_len_encoder/decoder).
//
// This behaviour follows the camera description. This design's choices:
// trigger = rising edge of the OR, the accept-outside-hold-off rule, the
// pulse lengths, and that the hold-off is counted from the trigger.
//
// Two encoder/decoder status outputs are left unconnected on purpose: the
// fibre encoder's busy (a trigger edge that comes while the previous
// message is still on the fibre is not sent again; with 8-tick codes this
// needs two L1 edges within 16-32 ticks) and the fibre decoder's error flag
// (a malformed pulse from the central trigger is simply not an accept).
module dib_trigger_ctrl
  import hess_pkg::*;
#(
  parameter int unsigned NSEC = N_SECTORS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NSEC-1:0]  sector_trig,
  input  logic             spe_trig,
  input  logic             src_spe,
  input  logic [5:0]       roi_len,
  input  logic             ct_rx,
  output logic             ct_tx,
  output logic             drawer_ctrl,
  output logic             trig,          // one-tick pulse per accepted trigger
  output logic             in_holdoff,
  output logic [31:0]      n_trig,
  output logic [31:0]      n_busy,
  output logic [31:0]      n_accept
);
  logic        src, src_d, edge_t;
  logic [15:0] timer, holdoff;
  logic        acc_pend, acc_done;
  logic        dctl_send, dctl_busy, ct_send, ct_busy;
  logic [0:0]  dctl_code;
  logic [1:0]  ct_code, rx_code;
  logic        rx_valid, rx_err, rx_accept;
  logic [6:0]  ncell;

  always_comb begin
    ncell   = 7'(STALE_CELLS) + 7'(roi_len);
    holdoff = 16'(PROC_TICKS) + 16'((32'(ncell) + (32'(ncell) >> 4)) * CONV_TICKS);
  end

  assign src    = src_spe ? spe_trig : |sector_trig;
  assign edge_t = src && !src_d;
  assign in_holdoff = (timer != '0);

  pulse_len_decoder #(.NCODES(CT_NCODES), .LEN_BASE(CODE_LEN_BASE), .TOL(CODE_TOL)) u_rx (
    .clk, .rst_n, .line(ct_rx), .valid(rx_valid), .code(rx_code), .err(rx_err));
  assign rx_accept = rx_valid && (rx_code == 2'(CT_ACCEPT));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      src_d    <= 1'b0;
      timer    <= '0;
      acc_pend <= 1'b0;
      acc_done <= 1'b0;
      n_trig   <= '0;
      n_busy   <= '0;
      n_accept <= '0;
    end else begin
      src_d <= src;
      if (edge_t && !in_holdoff) begin
        timer    <= holdoff;
        acc_done <= 1'b0;
        acc_pend <= 1'b0;
        n_trig   <= n_trig + 1'b1;
      end else begin
        if (timer != '0) timer <= timer - 1'b1;
        if (edge_t) n_busy <= n_busy + 1'b1;
        if (rx_accept && in_holdoff && !acc_done) begin
          acc_pend <= 1'b1;
          acc_done <= 1'b1;
          n_accept <= n_accept + 1'b1;
        end else if (acc_pend && !dctl_busy) begin
          acc_pend <= 1'b0;
        end
      end
    end

  assign trig = edge_t && !in_holdoff;

  // Drawer line: stop has priority; a pending accept goes out when free.
  always_comb begin
    dctl_send = 1'b0;
    dctl_code = 1'(DCTL_STOP);
    if (trig) begin
      dctl_send = 1'b1;
    end else if (acc_pend && !dctl_busy) begin
      dctl_send = 1'b1;
      dctl_code = 1'(DCTL_ACCEPT);
    end
  end

  always_comb begin
    ct_send = edge_t;
    ct_code = in_holdoff ? 2'(CT_BUSY) : 2'(CT_ACTIVE);
  end

  pulse_len_encoder #(.NCODES(DCTL_NCODES), .LEN_BASE(CODE_LEN_BASE), .GAP(CODE_GAP)) u_dctl (
    .clk, .rst_n, .send(dctl_send), .code(dctl_code), .line(drawer_ctrl), .busy(dctl_busy));

  pulse_len_encoder #(.NCODES(CT_NCODES), .LEN_BASE(CODE_LEN_BASE), .GAP(CODE_GAP)) u_ct (
    .clk, .rst_n, .send(ct_send), .code(ct_code), .line(ct_tx), .busy(ct_busy));

  // The hold-off keeps stops far apart, so the drawer line is always free.
  a_stop_free: assert property (@(posedge clk) disable iff (!rst_n) trig |-> !dctl_busy);
endmodule
