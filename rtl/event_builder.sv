// event_builder: front-end buffer management and event formatting of a drawer.
//
// After a stop command the drawer holds the event (charges and waveform of
// roi_readout) in its front-end buffer. Only if the central trigger's
// "accept" arrives within the hold-off time t_b (holdoff ticks counted from
// the stop) is the event written into the output FIFO; otherwise it is
// discarded when t_b expires. An accept that arrives while the readout is
// still running is remembered and acted on when the readout is done.
//
// Output format, one 16-bit word per tick while the FIFO has room:
//   header  {4'hE, event_number[11:0]}
//   16 high-gain charges, 16 low-gain charges
//   if wave_mode: for each ROI sample, 16 high-gain then 16 low-gain
//                 samples (12 bits, zero-extended).
// The keep-or-discard rule follows the camera description; the word format
// and the header are this design's choices.
//
// `sending` is high while the event is copied out; the drawer must not
// start a new readout then. Counters: accepted and discarded events.
module event_builder
  import hess_pkg::*;
#(
  parameter int unsigned NCH     = PIX_PER_DRAWER,
  parameter int unsigned ROI_CAP = MAX_ROI
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        stop_cmd,
  input  logic                        accept,
  input  logic                        done,
  input  logic [15:0]                 holdoff,
  input  logic                        wave_mode,
  input  logic [5:0]                  roi_len,
  input  charge_t                     charge_hg [NCH],
  input  charge_t                     charge_lg [NCH],
  output logic [$clog2(ROI_CAP)-1:0]  wave_addr,
  input  adc_t                        wave_hg [NCH],
  input  adc_t                        wave_lg [NCH],
  output logic                        fifo_wr,
  output logic [15:0]                 fifo_data,
  input  logic                        fifo_full,
  output logic                        sending,
  output logic [15:0]                 n_accepted,
  output logic [15:0]                 n_discarded
);
  typedef enum logic [2:0] {E_IDLE, E_WAIT, E_HDR, E_CHG, E_WAVE} estate_t;

  estate_t     state;
  logic [15:0] timer;
  logic        acc_seen, rd_done;
  logic [11:0] evt_num;
  logic [$clog2(2*NCH)-1:0] idx;     // channel-and-gain index, 0 .. 2*NCH-1

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state       <= E_IDLE;
      timer       <= '0;
      acc_seen    <= 1'b0;
      rd_done     <= 1'b0;
      evt_num     <= '0;
      idx         <= '0;
      wave_addr   <= '0;
      n_accepted  <= '0;
      n_discarded <= '0;
    end else begin
      unique case (state)
        E_IDLE:
          if (stop_cmd) begin
            timer    <= holdoff;
            acc_seen <= 1'b0;
            rd_done  <= 1'b0;
            evt_num  <= evt_num + 1'b1;
            state    <= E_WAIT;
          end
        E_WAIT: begin
          if (timer != '0) timer <= timer - 1'b1;
          if (accept && timer != '0) acc_seen <= 1'b1;
          if (done) rd_done <= 1'b1;
          if ((acc_seen || (accept && timer != '0)) && (rd_done || done)) begin
            n_accepted <= n_accepted + 1'b1;
            state      <= E_HDR;
          end else if (timer == '0 && (rd_done || done)) begin
            n_discarded <= n_discarded + 1'b1;
            state       <= E_IDLE;
          end
        end
        E_HDR:
          if (!fifo_full) begin
            idx   <= '0;
            state <= E_CHG;
          end
        E_CHG:
          if (!fifo_full) begin
            idx <= idx + 1'b1;
            if (idx == ($clog2(2*NCH))'(2*NCH-1)) begin
              idx       <= '0;
              wave_addr <= '0;
              state     <= wave_mode ? E_WAVE : E_IDLE;
            end
          end
        E_WAVE:
          if (!fifo_full) begin
            idx <= idx + 1'b1;
            if (idx == ($clog2(2*NCH))'(2*NCH-1)) begin
              idx <= '0;
              if (6'(wave_addr) + 6'd1 >= roi_len) state <= E_IDLE;
              wave_addr <= wave_addr + 1'b1;
            end
          end
        default: state <= E_IDLE;
      endcase
    end

  // Output word of the current state.
  always_comb begin
    fifo_wr   = 1'b0;
    fifo_data = '0;
    unique case (state)
      E_HDR: begin
        fifo_wr   = !fifo_full;
        fifo_data = {4'hE, evt_num};
      end
      E_CHG: begin
        fifo_wr   = !fifo_full;
        fifo_data = (int'(idx) < NCH) ? charge_hg[int'(idx) % NCH] : charge_lg[int'(idx) % NCH];
      end
      E_WAVE: begin
        fifo_wr   = !fifo_full;
        fifo_data = {4'h0, (int'(idx) < NCH) ? wave_hg[int'(idx) % NCH] : wave_lg[int'(idx) % NCH]};
      end
      default: ;
    endcase
  end

  assign sending = (state == E_HDR) || (state == E_CHG) || (state == E_WAVE);
endmodule
