// mf_pkg: types and constants shared by the MatrixFlow accelerator.
// The page size (4 KB), the 16x16 array and the list of data types follow the
// paper. Beat width (64 B), address width, the descriptor layout and the
// register map are this design's own choices.
package mf_pkg;

  typedef enum logic [2:0] {
    DT_INT32 = 3'd0,
    DT_INT16 = 3'd1,
    DT_INT8  = 3'd2,
    DT_FP32  = 3'd3,
    DT_FP16  = 3'd4
  } dtype_e;

  localparam int unsigned PAGE_BYTES = 4096;  // one block = one memory page
  localparam int unsigned BEAT_BYTES = 64;    // one data beat = DC granularity
  localparam int unsigned BEAT_BITS  = BEAT_BYTES * 8;
  localparam int unsigned AW         = 64;    // host address width
  localparam int unsigned ACC_W      = 32;    // result element width

  // Bytes per operand element of a data type.
  function automatic int unsigned elem_bytes(dtype_e dt);
    case (dt)
      DT_INT8:           return 1;
      DT_INT16, DT_FP16: return 2;
      default:           return 4;
    endcase
  endfunction

  // Length L of a W x L page block (Algorithm 1: W x L block = one page).
  function automatic int unsigned blk_len(dtype_e dt, int unsigned w);
    return PAGE_BYTES / (w * elem_bytes(dt));
  endfunction

  // Job descriptor fetched from host memory (first 256 bits of one beat).
  typedef struct packed {
    logic [15:0]   kb;      // K / L : page blocks along K
    logic [15:0]   nb;      // N / W : result block columns
    logic [15:0]   mb;      // M / W : result block rows
    logic [AW-1:0] c_base;  // result area
    logic [AW-1:0] b_base;  // B, stored as transposed page blocks
    logic [AW-1:0] a_base;  // A, stored as page blocks
  } desc_t;

  // Memory-mapped registers (byte offsets).
  localparam logic [7:0] REG_CTRL    = 8'h00;  // bit0: start (write 1)
  localparam logic [7:0] REG_STATUS  = 8'h04;  // bit0 busy, bit1 done (write 1 clears)
  localparam logic [7:0] REG_DESC_LO = 8'h08;  // descriptor address [31:0]
  localparam logic [7:0] REG_DESC_HI = 8'h0C;  // descriptor address [63:32]
  localparam logic [7:0] REG_MODE    = 8'h10;  // bit0: 0 = DC, 1 = DM
  localparam logic [7:0] REG_BURST   = 8'h14;  // DM burst length in bytes
  localparam logic [7:0] REG_CYCLES  = 8'h18;  // cycles of the last job

  // Read channel numbers of the DMA (also the read tag).
  localparam int unsigned CH_A    = 0;
  localparam int unsigned CH_B    = 1;
  localparam int unsigned CH_DESC = 2;
  localparam int unsigned NCH     = 3;

endpackage
