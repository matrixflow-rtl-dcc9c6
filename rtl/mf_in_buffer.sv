// mf_in_buffer: one 4 KB page buffer for an operand block (buffer A or B).
// A page holds one W x L block, stored row-major with its L elements of a row
// contiguous (L = PAGE_BYTES / (W * element bytes); 64 for INT32 and W = 16).
// The DMA writes the page in address order, one 64 B beat per cycle. The
// systolic array reads one column per cycle: element k of every block row.
// To serve both, the page is split into W banks, one per block row; a beat
// always falls inside one bank, and a column read takes one element from each
// bank. The read port is registered: rd_col is valid the cycle after rd_en and is
// zero the cycle after a cycle without rd_en, so that idle cycles feed zeros
// into the array.
// The page size follows the paper; the banking, the beat width and the read
// latency are this design's own choices.
module mf_in_buffer
  import mf_pkg::*;
#(
  parameter int unsigned W     = 16,
  parameter dtype_e      DTYPE = DT_INT32,
  localparam int unsigned EB   = elem_bytes(DTYPE),
  localparam int unsigned EW   = EB * 8,
  localparam int unsigned L    = PAGE_BYTES / (W * EB),
  localparam int unsigned NBEAT = PAGE_BYTES / BEAT_BYTES,
  localparam int unsigned BPR  = NBEAT / W,              // beats per block row
  localparam int unsigned EPB  = BEAT_BYTES / EB          // elements per beat
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(NBEAT)-1:0]     wr_beat,
  input  logic [BEAT_BYTES*8-1:0]      wr_data,
  input  logic                         rd_en,
  input  logic [$clog2(L)-1:0]         rd_k,
  output logic [W*EW-1:0]              rd_col
);

  logic [BEAT_BYTES*8-1:0] mem [W][BPR];

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wr_beat) / BPR][int'(wr_beat) % BPR] <= wr_data;
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < W; r++) begin
      rd_col[r*EW +: EW] <= rd_en ? mem[r][int'(rd_k) / EPB][(int'(rd_k) % EPB) * EW +: EW] : '0;
    end
  end

endmodule
