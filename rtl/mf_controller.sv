// mf_controller: control unit of the accelerator wrapper.
// The host programs a few memory-mapped registers (descriptor address, DC/DM
// mode, DM burst length) and writes CTRL.start. The controller then
// 1. fetches the 64 B job descriptor (A, B and C base addresses and the block
//    counts MB = M/W, NB = N/W, KB = K/L) over the descriptor DMA channel;
// 2. runs the block loop of the paper's algorithm, for i < MB, j < NB,
//    k < KB: result block (i,j) += A block (i,k) x B block (j,k). A block
//    (i,k) lives at A_base + (i*KB + k)*4 KB and B block (j,k), which holds
//    W columns of B stored as rows, at B_base + (j*KB + k)*4 KB;
// 3. raises irq (STATUS.done) when the last result page has been written.
// Two sequencers run in parallel. The fetch sequencer walks the same loop one
// block pair ahead and commands DMA channels A and B; it starts the next pair
// as soon as both channels have finished the previous one, so the requests
// go out while the array is still computing, and the data lands once the
// buffer has been read (DMA sink-ready = buffer empty). The compute
// sequencer waits for both buffers, streams the L columns into the array
// (clearing the accumulators before k = 0), lets the array finish (2W
// cycles), and drains the W result rows into a free result slot of buffer C.
// When the four slots of buffer C are full, or after the last block, it
// starts the write DMA; it waits for that write only when it next needs
// buffer C. Result page p (blocks 4p..4p+3 in (i,j) order, each W x W 32-bit,
// row-major) goes to C_base + p*4 KB.
// Register map (byte offsets, 32-bit): 0x00 CTRL (bit0 start), 0x04 STATUS
// (bit0 busy, bit1 done; writing 1 to bit1 clears done and irq), 0x08/0x0C
// descriptor address low/high, 0x10 MODE (bit0: 0 = DC, 1 = DM), 0x14 DM
// burst bytes (reset 4096), 0x18 cycles of the last job.
// The loop order, page-sized blocks, descriptor fetch, DMA write-back of a
// full buffer C and the completion interrupt follow the paper; the register
// map, descriptor format and result layout are this design's own choices.
// The assertion at the end uses rst_n in its disable condition; that is
// why lint reports rst_n as used both asynchronously and synchronously.
module mf_controller
  import mf_pkg::*;
#(
  parameter int unsigned W     = 16,
  parameter dtype_e      DTYPE = DT_INT32,
  localparam int unsigned L     = blk_len(DTYPE, W),
  localparam int unsigned LW    = $clog2(PAGE_BYTES) + 1,
  localparam int unsigned RW    = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned NSLOT = PAGE_BYTES / (W * W * (ACC_W / 8)),
  localparam int unsigned NROW  = PAGE_BYTES / (W * (ACC_W / 8))
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // register access from the host
  input  logic                  cfg_valid,
  input  logic                  cfg_write,
  input  logic [7:0]            cfg_addr,
  input  logic [31:0]           cfg_wdata,
  output logic [31:0]           cfg_rdata,
  output logic                  irq,
  // DMA configuration and read channels
  output logic                  mode_dm,
  output logic [LW-1:0]         dm_burst,
  output logic [NCH-1:0]        ch_cmd_valid,
  input  logic [NCH-1:0]        ch_cmd_ready,
  output logic [AW-1:0]         ch_cmd_addr [NCH],
  output logic [LW-1:0]         ch_cmd_len  [NCH],
  output logic [NCH-1:0]        ch_sink_ready,
  input  logic [NCH-1:0]        ch_wr_en,
  input  logic [BEAT_BITS-1:0]  ch_wr_data,
  input  logic [NCH-1:0]        ch_done,
  // DMA write channel
  output logic                  wcmd_valid,
  input  logic                  wcmd_ready,
  output logic [AW-1:0]         wcmd_addr,
  output logic [LW-1:0]         wcmd_len,
  input  logic                  wdone,
  // operand buffers and array
  output logic                  buf_rd_en,
  output logic [$clog2(L)-1:0]  buf_rd_k,
  output logic                  sa_clr,
  output logic [RW-1:0]         sa_rd_row,
  // result buffer
  output logic                  ob_wr_en,
  output logic [$clog2(NROW)-1:0] ob_wr_row
);

  typedef enum logic [1:0] {J_IDLE, J_DESC, J_RUN} job_e;
  typedef enum logic [2:0] {C_WAIT, C_STREAM, C_FLUSH, C_SLOT, C_DRAIN, C_FIN} cst_e;

  job_e  job;
  cst_e  cst;
  desc_t desc, desc_in;
  assign desc_in = desc_t'(ch_wr_data[$bits(desc_t)-1:0]);

  logic [AW-1:0] desc_addr;
  logic [31:0]   cycles;
  logic          done_flag;

  // ---------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      desc_addr <= '0;
      mode_dm   <= 1'b0;
      dm_burst  <= LW'(PAGE_BYTES);
    end else if (cfg_valid && cfg_write) begin
      case (cfg_addr)
        REG_DESC_LO: desc_addr[31:0]  <= cfg_wdata;
        REG_DESC_HI: desc_addr[63:32] <= cfg_wdata;
        REG_MODE:    mode_dm          <= cfg_wdata[0];
        REG_BURST:   dm_burst         <= cfg_wdata[LW-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    case (cfg_addr)
      REG_STATUS:  cfg_rdata = {30'd0, done_flag, job != J_IDLE};
      REG_DESC_LO: cfg_rdata = desc_addr[31:0];
      REG_DESC_HI: cfg_rdata = desc_addr[63:32];
      REG_MODE:    cfg_rdata = {31'd0, mode_dm};
      REG_BURST:   cfg_rdata = 32'(dm_burst);
      REG_CYCLES:  cfg_rdata = cycles;
      default:     cfg_rdata = 32'd0;
    endcase
  end

  assign irq = done_flag;

  logic start;
  assign start = cfg_valid && cfg_write && cfg_addr == REG_CTRL && cfg_wdata[0] && job == J_IDLE;

  // ---------------------------------------------------------------- fetch sequencer
  logic [15:0] f_i, f_j, f_k;
  logic        f_more;            // pairs left to fetch
  logic        a_pend, b_pend;    // channel busy with a pair
  logic        a_full, b_full;    // buffer holds a pair not yet read
  logic        fetch_go;
  logic        stream_last;       // last column read of a pair

  assign fetch_go = job == J_RUN && f_more && !a_pend && !b_pend &&
                    ch_cmd_ready[CH_A] && ch_cmd_ready[CH_B];

  always_comb begin
    ch_cmd_valid = '0;
    for (int c = 0; c < NCH; c++) begin
      ch_cmd_addr[c] = '0;
      ch_cmd_len[c]  = LW'(PAGE_BYTES);
    end
    ch_cmd_valid[CH_A]    = fetch_go;
    ch_cmd_addr[CH_A]     = desc.a_base + (AW'(f_i) * AW'(desc.kb) + AW'(f_k)) * AW'(PAGE_BYTES);
    ch_cmd_valid[CH_B]    = fetch_go;
    ch_cmd_addr[CH_B]     = desc.b_base + (AW'(f_j) * AW'(desc.kb) + AW'(f_k)) * AW'(PAGE_BYTES);
    ch_cmd_valid[CH_DESC] = job == J_DESC && !a_pend;   // a_pend doubles as "descriptor requested"
    ch_cmd_addr[CH_DESC]  = desc_addr;
    ch_cmd_len[CH_DESC]   = LW'(BEAT_BYTES);
  end

  assign ch_sink_ready[CH_A]    = !a_full;
  assign ch_sink_ready[CH_B]    = !b_full;
  assign ch_sink_ready[CH_DESC] = 1'b1;

  // ---------------------------------------------------------------- compute sequencer
  logic [15:0]              c_i, c_j, c_k;
  logic [$clog2(L):0]       kcnt;
  logic [$clog2(2*W+1):0]   fcnt;
  logic [RW:0]              rcnt;
  logic [$clog2(NSLOT+1)-1:0] slot;
  logic                     c_busy;     // write DMA owns buffer C
  logic [AW-1:0]            c_addr;
  logic                     last_blk;

  assign last_blk    = (c_i == desc.mb - 16'd1) && (c_j == desc.nb - 16'd1);
  assign stream_last = cst == C_STREAM && kcnt == ($clog2(L)+1)'(L - 1);

  assign buf_rd_en = cst == C_STREAM;
  assign buf_rd_k  = kcnt[$clog2(L)-1:0];
  assign sa_clr    = cst == C_WAIT && a_full && b_full && c_k == 16'd0 && job == J_RUN;
  assign sa_rd_row = rcnt[RW-1:0];
  assign ob_wr_en  = cst == C_DRAIN;
  assign ob_wr_row = ($clog2(NROW))'(32'(slot) * W + 32'(rcnt));

  logic flush_now;    // start the write of buffer C this cycle
  assign flush_now  = (cst == C_DRAIN && rcnt == (RW+1)'(W - 1) &&
                       (32'(slot) + 1 == NSLOT || last_blk));
  assign wcmd_valid = flush_now;
  assign wcmd_addr  = c_addr;
  assign wcmd_len   = LW'((32'(slot) + 1) * W * W * (ACC_W / 8));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job <= J_IDLE; cst <= C_WAIT; desc <= '0;
      done_flag <= 1'b0; cycles <= '0;
      f_i <= '0; f_j <= '0; f_k <= '0; f_more <= 1'b0;
      a_pend <= 1'b0; b_pend <= 1'b0; a_full <= 1'b0; b_full <= 1'b0;
      c_i <= '0; c_j <= '0; c_k <= '0; kcnt <= '0; fcnt <= '0; rcnt <= '0;
      slot <= '0; c_busy <= 1'b0; c_addr <= '0;
    end else begin
      if (cfg_valid && cfg_write && cfg_addr == REG_STATUS && cfg_wdata[1]) done_flag <= 1'b0;
      if (job != J_IDLE) cycles <= cycles + 1'b1;
      if (wdone) c_busy <= 1'b0;

      case (job)
        J_IDLE: if (start) begin
          job <= J_DESC; cycles <= '0; done_flag <= 1'b0;
        end
        J_DESC: begin
          if (ch_cmd_valid[CH_DESC] && ch_cmd_ready[CH_DESC]) a_pend <= 1'b1;
          if (ch_wr_en[CH_DESC]) begin
            desc   <= desc_in;
            c_addr <= desc_in.c_base;
          end
          if (ch_done[CH_DESC]) begin
            a_pend <= 1'b0;
            job    <= J_RUN;
            f_i <= '0; f_j <= '0; f_k <= '0; f_more <= 1'b1;
            c_i <= '0; c_j <= '0; c_k <= '0; cst <= C_WAIT;
            slot <= '0;
          end
        end
        J_RUN: begin
          // fetch sequencer
          if (fetch_go) begin
            a_pend <= 1'b1;
            b_pend <= 1'b1;
            if (f_k + 16'd1 < desc.kb) f_k <= f_k + 16'd1;
            else begin
              f_k <= '0;
              if (f_j + 16'd1 < desc.nb) f_j <= f_j + 16'd1;
              else begin
                f_j <= '0;
                if (f_i + 16'd1 < desc.mb) f_i <= f_i + 16'd1;
                else f_more <= 1'b0;
              end
            end
          end
          if (ch_done[CH_A]) begin a_pend <= 1'b0; a_full <= 1'b1; end
          if (ch_done[CH_B]) begin b_pend <= 1'b0; b_full <= 1'b1; end
          if (stream_last) begin a_full <= 1'b0; b_full <= 1'b0; end

          // compute sequencer
          case (cst)
            C_WAIT: if (a_full && b_full) begin
              cst  <= C_STREAM;
              kcnt <= '0;
            end
            C_STREAM: begin
              kcnt <= kcnt + 1'b1;
              if (stream_last) begin
                if (c_k + 16'd1 < desc.kb) begin
                  c_k <= c_k + 16'd1;
                  cst <= C_WAIT;
                end else begin
                  cst  <= C_FLUSH;
                  fcnt <= '0;
                end
              end
            end
            C_FLUSH: begin
              fcnt <= fcnt + 1'b1;
              if (fcnt == ($clog2(2*W+1)+1)'(2 * W - 1)) cst <= C_SLOT;
            end
            C_SLOT: if (!c_busy || slot != '0) begin
              cst  <= C_DRAIN;
              rcnt <= '0;
            end
            C_DRAIN: begin
              rcnt <= rcnt + 1'b1;
              if (rcnt == (RW+1)'(W - 1)) begin
                if (flush_now) begin
                  slot   <= '0;
                  c_busy <= 1'b1;
                  c_addr <= c_addr + AW'(PAGE_BYTES);
                end else begin
                  slot <= slot + 1'b1;
                end
                c_k <= '0;
                if (last_blk) cst <= C_FIN;
                else begin
                  cst <= C_WAIT;
                  if (c_j + 16'd1 < desc.nb) c_j <= c_j + 16'd1;
                  else begin
                    c_j <= '0;
                    c_i <= c_i + 16'd1;
                  end
                end
              end
            end
            C_FIN: if (!c_busy) begin
              job       <= J_IDLE;
              done_flag <= 1'b1;
            end
            default: cst <= C_WAIT;
          endcase
        end
        default: job <= J_IDLE;
      endcase
    end
  end

  // the write DMA must be free whenever a flush is started
  a_flush_free: assert property (@(posedge clk) disable iff (!rst_n) flush_now |-> wcmd_ready && !c_busy);

endmodule
