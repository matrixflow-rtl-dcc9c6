// matrixflow_top: the MatrixFlow accelerator wrapper, a loosely coupled
// systolic-array GEMM engine that sits behind a PCIe endpoint.
// It joins the controller (registers, descriptor fetch, block loop,
// interrupt), the DMA engine (time-multiplexed read channels for A, B and the
// descriptor; a write channel for results), the two 4 KB operand buffers
// A and B, the 16 x 16 systolic array and the 4 KB result buffer C.
// The PCIe endpoint itself is not part of this RTL: its transaction-level
// side appears as ports. cfg_* carries host register accesses (BAR writes
// and reads, rdata combinational); rd_req_*/rd_rsp_* are DMA reads (64 B
// beats, returned in request order with the request's tag);
// wr_req_*/wr_dat_*/wr_rsp_valid are DMA writes (one completion per request).
// rd_req_to_cache / wr_req_to_cache tell the host side to route a request to
// the last-level cache (DC mode) rather than to the memory controller (DM
// mode). irq is level-sensitive and stays high until STATUS.done is cleared.
// The block set and the connections follow the paper's accelerator figure;
// the port protocol is this design's own.
module matrixflow_top
  import mf_pkg::*;
#(
  parameter int unsigned W     = 16,
  parameter dtype_e      DTYPE = DT_INT32,
  localparam int unsigned LW   = $clog2(PAGE_BYTES) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_valid,
  input  logic                  cfg_write,
  input  logic [7:0]            cfg_addr,
  input  logic [31:0]           cfg_wdata,
  output logic [31:0]           cfg_rdata,
  output logic                  irq,
  output logic                  rd_req_valid,
  input  logic                  rd_req_ready,
  output logic [AW-1:0]         rd_req_addr,
  output logic [LW-1:0]         rd_req_len,
  output logic [1:0]            rd_req_tag,
  output logic                  rd_req_to_cache,
  input  logic                  rd_rsp_valid,
  output logic                  rd_rsp_ready,
  input  logic [1:0]            rd_rsp_tag,
  input  logic [BEAT_BITS-1:0]  rd_rsp_data,
  output logic                  wr_req_valid,
  input  logic                  wr_req_ready,
  output logic [AW-1:0]         wr_req_addr,
  output logic [LW-1:0]         wr_req_len,
  output logic                  wr_req_to_cache,
  output logic                  wr_dat_valid,
  input  logic                  wr_dat_ready,
  output logic [BEAT_BITS-1:0]  wr_dat_data,
  output logic                  wr_dat_last,
  input  logic                  wr_rsp_valid
);

  localparam int unsigned EW   = elem_bytes(DTYPE) * 8;
  localparam int unsigned L    = blk_len(DTYPE, W);
  localparam int unsigned RW   = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned BW   = $clog2(PAGE_BYTES / BEAT_BYTES);
  localparam int unsigned NROW = PAGE_BYTES / (W * (ACC_W / 8));

  logic                 mode_dm;
  logic [LW-1:0]        dm_burst;
  logic [NCH-1:0]       ch_cmd_valid, ch_cmd_ready, ch_sink_ready, ch_wr_en, ch_done;
  logic [AW-1:0]        ch_cmd_addr [NCH];
  logic [LW-1:0]        ch_cmd_len  [NCH];
  logic [BW-1:0]        ch_wr_beat;
  logic [BEAT_BITS-1:0] ch_wr_data;
  logic                 wcmd_valid, wcmd_ready, wdone;
  logic [AW-1:0]        wcmd_addr;
  logic [LW-1:0]        wcmd_len;
  logic [BW-1:0]        wb_beat;
  logic [BEAT_BITS-1:0] wb_data;
  logic                 buf_rd_en, sa_clr, ob_wr_en;
  logic [$clog2(L)-1:0] buf_rd_k;
  logic [RW-1:0]        sa_rd_row;
  logic [$clog2(NROW)-1:0] ob_wr_row;
  logic [W*EW-1:0]      a_col, b_row;
  logic [W*ACC_W-1:0]   sa_row;

  mf_controller #(.W(W), .DTYPE(DTYPE)) u_ctrl (
    .clk, .rst_n,
    .cfg_valid, .cfg_write, .cfg_addr, .cfg_wdata, .cfg_rdata, .irq,
    .mode_dm, .dm_burst,
    .ch_cmd_valid, .ch_cmd_ready, .ch_cmd_addr, .ch_cmd_len, .ch_sink_ready,
    .ch_wr_en, .ch_wr_data, .ch_done,
    .wcmd_valid, .wcmd_ready, .wcmd_addr, .wcmd_len, .wdone,
    .buf_rd_en, .buf_rd_k, .sa_clr, .sa_rd_row, .ob_wr_en, .ob_wr_row
  );

  mf_dma u_dma (
    .clk, .rst_n, .mode_dm, .dm_burst,
    .ch_cmd_valid, .ch_cmd_ready, .ch_cmd_addr, .ch_cmd_len, .ch_sink_ready,
    .ch_wr_en, .ch_wr_beat, .ch_wr_data, .ch_done,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len, .rd_req_tag, .rd_req_to_cache,
    .rd_rsp_valid, .rd_rsp_ready, .rd_rsp_tag, .rd_rsp_data,
    .wcmd_valid, .wcmd_ready, .wcmd_addr, .wcmd_len, .wb_beat, .wb_data, .wdone,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_len, .wr_req_to_cache,
    .wr_dat_valid, .wr_dat_ready, .wr_dat_data, .wr_dat_last, .wr_rsp_valid
  );

  mf_in_buffer #(.W(W), .DTYPE(DTYPE)) u_buf_a (
    .clk, .wr_en(ch_wr_en[CH_A]), .wr_beat(ch_wr_beat), .wr_data(ch_wr_data),
    .rd_en(buf_rd_en), .rd_k(buf_rd_k), .rd_col(a_col)
  );

  mf_in_buffer #(.W(W), .DTYPE(DTYPE)) u_buf_b (
    .clk, .wr_en(ch_wr_en[CH_B]), .wr_beat(ch_wr_beat), .wr_data(ch_wr_data),
    .rd_en(buf_rd_en), .rd_k(buf_rd_k), .rd_col(b_row)
  );

  mf_systolic_array #(.W(W), .DTYPE(DTYPE)) u_sa (
    .clk, .rst_n, .clr(sa_clr), .a_col, .b_row, .rd_row(sa_rd_row), .rd_data(sa_row)
  );

  mf_out_buffer #(.W(W)) u_buf_c (
    .clk, .wr_en(ob_wr_en), .wr_row(ob_wr_row), .wr_data(sa_row),
    .rd_beat(wb_beat), .rd_data(wb_data)
  );

endmodule
