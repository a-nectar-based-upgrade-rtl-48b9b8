// roi_readout: readout controller for the 16 NECTAr chips of a drawer.
//
// On a decoded "stop" command the block freezes the chips' ring buffers
// (sca_stop), waits FREEZE_TICKS for the chips to see it, latches the ROI
// start (rd_start) and reads n = STALE + roi_len cells from all chips in
// parallel, one conversion every CONV_TICKS (0.1 us) with one idle slot
// between consecutive groups of 16 cells, so a readout lasts about
// (n + n/16) * 0.1 us, the readout term of
// the camera hold-off formula. The first STALE (16) samples are stale and
// dropped. The remaining roi_len samples (16 in normal observations, up to
// ROI_CAP = 48 in waveform mode) are written into the waveform store, and
// the INT_LEN = 16 samples starting at int_start are summed per channel and
// gain into a 16-bit charge (16 x 4095 fits exactly). When the last sample
// is in, sca_stop is released, the chips resume writing and `done` pulses.
// A stop arriving while a readout runs is ignored.
//
// From the camera description: freeze on stop, 16 stale cells, ROI of 16
// summed into one charge per pixel and gain, waveforms up to 48 samples,
// 0.1 us per cell. This design's choices: FREEZE_TICKS, the int_start
// register, the idle slot as the form of the n/16 overhead.
//
// Interface: charges and the waveform store are stable from `done` until
// the next stop. wave_addr selects one sample (0 = first ROI sample) for
// all channels; wave_hg/wave_lg are combinational reads.
module roi_readout
  import hess_pkg::*;
#(
  parameter int unsigned NCH          = PIX_PER_DRAWER,
  parameter int unsigned ROI_CAP      = MAX_ROI,
  parameter int unsigned STALE        = STALE_CELLS,
  parameter int unsigned INTLEN       = INT_LEN,
  parameter int unsigned CONV         = CONV_TICKS,
  parameter int unsigned FREEZE_TICKS = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         stop_cmd,
  input  logic [5:0]                   roi_len,     // 1 .. MAX_ROI
  input  logic [5:0]                   int_start,
  // NECTAr chips
  output logic                         sca_stop,
  output logic                         rd_start,
  output logic                         rd_conv,
  input  logic                         dout_valid,
  input  adc_t                         dout_hg [NCH],
  input  adc_t                         dout_lg [NCH],
  // results
  output logic                         busy,
  output logic                         done,
  output charge_t                      charge_hg [NCH],
  output charge_t                      charge_lg [NCH],
  input  logic [$clog2(ROI_CAP)-1:0]   wave_addr,
  output adc_t                         wave_hg [NCH],
  output adc_t                         wave_lg [NCH]
);
  typedef enum logic [1:0] {S_IDLE, S_FREEZE, S_READ, S_FINISH} state_t;
  typedef struct packed {
    logic [NCH-1:0][ADC_BITS-1:0] hg;
    logic [NCH-1:0][ADC_BITS-1:0] lg;
  } sample_t;

  state_t        state;
  logic [7:0]    timer;        // ticks to the next conversion slot
  logic [6:0]    n_issued;     // conversions issued
  logic [4:0]    in_line;      // conversions since the last idle slot
  logic [6:0]    n_recv;       // samples received
  logic [6:0]    n_total;
  sample_t       wave_mem [ROI_CAP];
  sample_t       rd_word, wr_word;

  always_comb n_total = 7'(STALE) + 7'(roi_len);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state    <= S_IDLE;
      timer    <= '0;
      n_issued <= '0;
      in_line  <= '0;
      n_recv   <= '0;
      sca_stop <= 1'b0;
      rd_start <= 1'b0;
      rd_conv  <= 1'b0;
      done     <= 1'b0;
      for (int c = 0; c < NCH; c++) begin
        charge_hg[c] <= '0;
        charge_lg[c] <= '0;
      end
    end else begin
      rd_start <= 1'b0;
      rd_conv  <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE:
          if (stop_cmd) begin
            sca_stop <= 1'b1;
            timer    <= 8'(FREEZE_TICKS - 1);
            state    <= S_FREEZE;
          end
        S_FREEZE:
          if (timer == '0) begin
            rd_start <= 1'b1;
            timer    <= 8'd1;
            n_issued <= '0;
            n_recv   <= '0;
            in_line  <= '0;
            for (int c = 0; c < NCH; c++) begin
              charge_hg[c] <= '0;
              charge_lg[c] <= '0;
            end
            state    <= S_READ;
          end else timer <= timer - 1'b1;
        S_READ: begin
          if (timer != '0) timer <= timer - 1'b1;
          else if (n_issued != n_total) begin
            timer <= 8'(CONV - 1);
            if (in_line == 5'd16) begin
              in_line <= '0;               // idle slot after 16 cells
            end else begin
              rd_conv  <= 1'b1;
              n_issued <= n_issued + 1'b1;
              in_line  <= in_line + 1'b1;
            end
          end
          if (dout_valid) begin
            n_recv <= n_recv + 1'b1;
            if (n_recv >= 7'(STALE)) begin
              if (n_recv - 7'(STALE) >= 7'(int_start) &&
                  n_recv - 7'(STALE) <  7'(int_start) + 7'(INTLEN))
                for (int c = 0; c < NCH; c++) begin
                  charge_hg[c] <= charge_hg[c] + charge_t'(dout_hg[c]);
                  charge_lg[c] <= charge_lg[c] + charge_t'(dout_lg[c]);
                end
            end
            if (n_recv + 1'b1 == n_total) state <= S_FINISH;
          end
        end
        S_FINISH: begin
          sca_stop <= 1'b0;
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end

  // Waveform store: one word per ROI sample, all channels and both gains.
  always_ff @(posedge clk)
    if (state == S_READ && dout_valid && n_recv >= 7'(STALE) &&
        n_recv - 7'(STALE) < 7'(ROI_CAP))
      wave_mem[($clog2(ROI_CAP))'(n_recv - 7'(STALE))] <= wr_word;

  always_comb
    for (int c = 0; c < NCH; c++) begin
      wr_word.hg[c] = dout_hg[c];
      wr_word.lg[c] = dout_lg[c];
    end

  always_comb begin
    rd_word = wave_mem[wave_addr];
    for (int c = 0; c < NCH; c++) begin
      wave_hg[c] = rd_word.hg[c];
      wave_lg[c] = rd_word.lg[c];
    end
  end

  assign busy = (state != S_IDLE);
endmodule
