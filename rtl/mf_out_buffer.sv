// mf_out_buffer: the 4 KB result buffer (buffer C).
// The controller writes one row of a W x W result block per cycle (W 32-bit
// values, 64 B for W = 16) at row slot wr_row; with 32-bit results a 16 x 16
// block is 1 KB, so the buffer holds four result blocks before it is full.
// The write DMA reads it back one 64 B beat at a time through a
// combinational read port. Rows and beats address the same byte image of the
// page: row r covers bytes r*W*4 .. r*W*4+W*4-1.
// The 4 KB size follows the paper; the port shapes are this design's own.
module mf_out_buffer
  import mf_pkg::*;
#(
  parameter int unsigned W      = 16,
  localparam int unsigned NWORD = PAGE_BYTES / (ACC_W / 8),
  localparam int unsigned NROW  = NWORD / W,
  localparam int unsigned NBEAT = PAGE_BYTES / BEAT_BYTES,
  localparam int unsigned WPB   = BEAT_BYTES / (ACC_W / 8)   // words per beat
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(NROW)-1:0]     wr_row,
  input  logic [W*ACC_W-1:0]          wr_data,
  input  logic [$clog2(NBEAT)-1:0]    rd_beat,
  output logic [BEAT_BYTES*8-1:0]     rd_data
);

  logic [ACC_W-1:0] mem [NWORD];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int j = 0; j < W; j++) mem[int'(wr_row) * W + j] <= wr_data[j*ACC_W +: ACC_W];
    end
  end

  always_comb begin
    for (int j = 0; j < WPB; j++) rd_data[j*ACC_W +: ACC_W] = mem[int'(rd_beat) * WPB + j];
  end

endmodule
