// sync_fifo: single-clock first-in first-out buffer.
//
// Holds the drawer's formatted event words until the ARM computer reads
// them over the 16-bit memory bus. Write when wr_en and not full, read when
// rd_en and not empty; rd_data shows the oldest word (first-word
// fall-through) and changes the tick after a read. count is the fill level.
// The 16-bit width follows the drawer memory bus; the depth is this
// design's choice. Assertions flag writes when full and reads when empty.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk)
    if (wr_en && !full) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en && !full)  wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
      unique case ({wr_en && !full, rd_en && !empty})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
