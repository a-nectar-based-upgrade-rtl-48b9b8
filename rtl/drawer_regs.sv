// drawer_regs: memory-bus register file of the drawer FPGA.
//
// The drawer's ARM computer reaches the FPGA over a 16-bit memory bus: it
// writes the configuration, reads monitoring counters and pops event words.
// Protocol (this design's): synchronous to clk; a tick with bus_cs high is
// one access, a write if bus_we; read data is registered and valid the tick
// after the access. A read of REG_FIFO pops one word of the event FIFO.
//
// Register map (word addresses, 10 bits):
//   0x000 ctrl      [1:0] trigger mode, [2] waveform mode,
//                   [3] write 1: clear L0 counters (self-clearing)
//   0x001 roi_len   ROI length in samples, 1..48        reset 16
//   0x002 int_start first ROI sample of the 16-sample charge   reset 0
//   0x003 holdoff   front-end buffer hold-off in ticks   reset t_b(32)
//   0x004 fifo      event data (read pops)
//   0x005 fifo_cnt  words in the event FIFO
//   0x006 n_acc / 0x007 n_disc / 0x008 n_lost   event counters
//   0x009 n_err     malformed readout-control pulses
//   0x010+p delay d of pixel p      0x020+p stretch l of pixel p
//   0x030+p L0 counter of pixel p   0x040+p Nd of chip p   reset 1024-L0_DEF
//   0x100+16*p+k  line DAC k of chip p (signed 8 bit)      reset 0
// The 16-bit bus width follows the drawer description; the map, the reset
// values and the protocol are this design's. The default hold-off is the
// camera's t_b for the normal readout of n = 32 cells.
module drawer_regs
  import hess_pkg::*;
#(
  parameter int unsigned L0_DEF = 40    // default trigger latency L in ns
) (
  input  logic               clk,
  input  logic               rst_n,
  // memory bus
  input  logic               bus_cs,
  input  logic               bus_we,
  input  logic [9:0]         bus_addr,
  input  logic [15:0]        bus_wdata,
  output logic [15:0]        bus_rdata,
  // configuration
  output trig_mode_t         mode,
  output logic               wave_mode,
  output logic               cnt_clear,
  output logic [5:0]         roi_len,
  output logic [5:0]         int_start,
  output logic [15:0]        holdoff,
  output logic [3:0]         delay    [16],
  output logic [3:0]         stretch  [16],
  output logic [9:0]         nd       [16],
  output logic signed [7:0]  line_dac [16][16],
  // monitoring and data
  input  logic [15:0]        l0_count [16],
  input  logic [15:0]        fifo_data,
  input  logic [15:0]        fifo_count,
  output logic               fifo_pop,
  input  logic [15:0]        n_acc,
  input  logic [15:0]        n_disc,
  input  logic [15:0]        n_lost,
  input  logic [15:0]        n_err
);
  localparam logic [15:0] HOLDOFF_DEF = 16'(holdoff_ticks(STALE_CELLS + INT_LEN));

  logic wr, rd;
  assign wr       = bus_cs && bus_we;
  assign rd       = bus_cs && !bus_we;
  assign fifo_pop = rd && (bus_addr == 10'h004);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      mode      <= TRIG_MAJORITY;
      wave_mode <= 1'b0;
      cnt_clear <= 1'b0;
      roi_len   <= 6'(INT_LEN);
      int_start <= '0;
      holdoff   <= HOLDOFF_DEF;
      for (int p = 0; p < 16; p++) begin
        delay[p]   <= '0;
        stretch[p] <= '0;
        nd[p]      <= 10'(SCA_DEPTH - L0_DEF);
        for (int k = 0; k < 16; k++) line_dac[p][k] <= '0;
      end
    end else begin
      cnt_clear <= 1'b0;
      if (wr) begin
        unique casez (bus_addr)
          10'h000: begin
            mode      <= trig_mode_t'(bus_wdata[1:0]);
            wave_mode <= bus_wdata[2];
            cnt_clear <= bus_wdata[3];
          end
          10'h001: roi_len   <= bus_wdata[5:0];
          10'h002: int_start <= bus_wdata[5:0];
          10'h003: holdoff   <= bus_wdata;
          10'h01?: delay[bus_addr[3:0]]   <= bus_wdata[3:0];
          10'h02?: stretch[bus_addr[3:0]] <= bus_wdata[3:0];
          10'h04?: nd[bus_addr[3:0]]      <= bus_wdata[9:0];
          10'h1??: line_dac[bus_addr[7:4]][bus_addr[3:0]] <= bus_wdata[7:0];
          default: ;
        endcase
      end
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) bus_rdata <= '0;
    else if (rd)
      unique casez (bus_addr)
        10'h000: bus_rdata <= {13'd0, wave_mode, mode};
        10'h001: bus_rdata <= {10'd0, roi_len};
        10'h002: bus_rdata <= {10'd0, int_start};
        10'h003: bus_rdata <= holdoff;
        10'h004: bus_rdata <= fifo_data;
        10'h005: bus_rdata <= fifo_count;
        10'h006: bus_rdata <= n_acc;
        10'h007: bus_rdata <= n_disc;
        10'h008: bus_rdata <= n_lost;
        10'h009: bus_rdata <= n_err;
        10'h01?: bus_rdata <= {12'd0, delay[bus_addr[3:0]]};
        10'h02?: bus_rdata <= {12'd0, stretch[bus_addr[3:0]]};
        10'h03?: bus_rdata <= l0_count[bus_addr[3:0]];
        10'h04?: bus_rdata <= {6'd0, nd[bus_addr[3:0]]};
        10'h1??: bus_rdata <= 16'(signed'(line_dac[bus_addr[7:4]][bus_addr[3:0]]));
        default: bus_rdata <= 16'hDEAD;
      endcase
endmodule
