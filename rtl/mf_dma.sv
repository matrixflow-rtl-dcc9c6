// mf_dma: DMA engine of the accelerator wrapper.
// Read side: NCH read channels (buffer A, buffer B, descriptor) each take a
// command (address, length in bytes, at most one page) and split it into
// requests: 64 B requests marked for the last-level cache in DC mode, or
// bursts of dm_burst bytes marked for the memory controller in DM mode. The
// channels share one request port, time-multiplexed round-robin, as the
// paper's channel pipeline shows. The request is held in an output register,
// so it stays stable while rd_req_valid waits for rd_req_ready. Read data
// returns as 64 B beats tagged with the channel number; a beat is accepted
// only when that channel's target can take it (ch_sink_ready), which lets a
// channel issue its requests while the target buffer is still being read by
// the array. Accepted beats are written to the target at ch_wr_beat.
// ch_done pulses for one cycle when a channel has received all its beats.
// Write side: one channel streams wr_len bytes from buffer C (wb_beat selects
// the beat, read combinationally) to the host, as the same DC/DM requests on
// wr_req_* plus a data stream on wr_dat_*; wdone pulses once every request
// has been acknowledged on wr_rsp_valid.
// Data is not buffered here: read beats go straight from rd_rsp_data to the
// target buffer and write beats straight from buffer C to wr_dat_data.
// Mode and burst are sampled when a command is accepted. Addresses and
// lengths must be multiples of 64 B. The DC/DM split, the 64 B DC size and
// the adjustable DM burst follow the paper; the handshakes, tags, in-order
// responses and the round-robin policy are this design's own choices.
// Handshake assertions at the end use rst_n in their disable condition;
// that is why lint reports rst_n as used both asynchronously and synchronously.
module mf_dma
  import mf_pkg::*;
#(
  localparam int unsigned LW = $clog2(PAGE_BYTES) + 1,   // length field width
  localparam int unsigned BW = $clog2(PAGE_BYTES / BEAT_BYTES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  mode_dm,     // 0: DC (64 B to LLC), 1: DM (bursts to memory)
  input  logic [LW-1:0]         dm_burst,    // DM burst length, bytes
  // read channel commands
  input  logic [NCH-1:0]        ch_cmd_valid,
  output logic [NCH-1:0]        ch_cmd_ready,
  input  logic [AW-1:0]         ch_cmd_addr [NCH],
  input  logic [LW-1:0]         ch_cmd_len  [NCH],
  input  logic [NCH-1:0]        ch_sink_ready,
  output logic [NCH-1:0]        ch_wr_en,
  output logic [BW-1:0]         ch_wr_beat,
  output logic [BEAT_BITS-1:0]  ch_wr_data,
  output logic [NCH-1:0]        ch_done,
  // read requests and responses (towards the PCIe interface)
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
  // write channel command
  input  logic                  wcmd_valid,
  output logic                  wcmd_ready,
  input  logic [AW-1:0]         wcmd_addr,
  input  logic [LW-1:0]         wcmd_len,
  output logic [BW-1:0]         wb_beat,
  input  logic [BEAT_BITS-1:0]  wb_data,
  output logic                  wdone,
  // write requests, data and completions
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

  localparam logic [LW-1:0] BEAT_LEN = LW'(BEAT_BYTES);

  function automatic logic [LW-1:0] chunk_len(logic dm, logic [LW-1:0] burst, logic [LW-1:0] rem);
    logic [LW-1:0] c;
    c = dm ? ((burst < BEAT_LEN) ? BEAT_LEN : burst) : BEAT_LEN;
    return (c < rem) ? c : rem;
  endfunction

  // ------------------------------------------------------------ read side
  logic [NCH-1:0]  busy;
  logic [NCH-1:0]  ch_dm;
  logic [LW-1:0]   ch_burst [NCH];
  logic [AW-1:0]   ch_addr  [NCH];
  logic [LW-1:0]   ch_rem   [NCH];   // bytes still to request
  logic [BW:0]     ch_rx    [NCH];   // beats received
  logic [BW:0]     ch_nbeat [NCH];   // beats expected
  logic [$clog2(NCH)-1:0] rr;        // channel with priority
  logic            issue;
  logic [$clog2(NCH)-1:0] grant;
  logic            any_pend;

  assign ch_cmd_ready = ~busy;

  // round-robin choice among channels with bytes left to request
  always_comb begin
    any_pend = 1'b0;
    grant    = '0;
    for (int o = NCH - 1; o >= 0; o--) begin
      logic [$clog2(NCH)-1:0] c;
      c = $clog2(NCH)'((int'(rr) + o) % NCH);
      if (busy[c] && ch_rem[c] != '0) begin
        any_pend = 1'b1;
        grant    = c;
      end
    end
  end

  assign issue = any_pend && (!rd_req_valid || rd_req_ready);

  logic [LW-1:0] issue_len;
  assign issue_len = chunk_len(ch_dm[grant], ch_burst[grant], ch_rem[grant]);

  logic rsp_fire;
  assign rd_rsp_ready = busy[rd_rsp_tag] && ch_sink_ready[rd_rsp_tag];
  assign rsp_fire     = rd_rsp_valid && rd_rsp_ready;
  assign ch_wr_data   = rd_rsp_data;
  assign ch_wr_beat   = BW'(ch_rx[rd_rsp_tag]);

  always_comb begin
    ch_wr_en = '0;
    if (rsp_fire) ch_wr_en[rd_rsp_tag] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= '0;
      ch_dm        <= '0;
      ch_done      <= '0;
      rr           <= '0;
      rd_req_valid <= 1'b0;
      rd_req_addr  <= '0;
      rd_req_len   <= '0;
      rd_req_tag   <= '0;
      rd_req_to_cache <= 1'b0;
      for (int c = 0; c < NCH; c++) begin
        ch_burst[c] <= '0;
        ch_addr[c]  <= '0;
        ch_rem[c]   <= '0;
        ch_rx[c]    <= '0;
        ch_nbeat[c] <= '0;
      end
    end else begin
      ch_done <= '0;
      // request output register
      if (issue) begin
        rd_req_valid    <= 1'b1;
        rd_req_addr     <= ch_addr[grant];
        rd_req_len      <= issue_len;
        rd_req_tag      <= 2'(grant);
        rd_req_to_cache <= !ch_dm[grant];
        ch_addr[grant]  <= ch_addr[grant] + AW'(issue_len);
        ch_rem[grant]   <= ch_rem[grant] - issue_len;
        rr              <= (int'(grant) == NCH - 1) ? '0 : grant + 1'b1;
      end else if (rd_req_ready) begin
        rd_req_valid <= 1'b0;
      end
      // responses
      if (rsp_fire) begin
        ch_rx[rd_rsp_tag] <= ch_rx[rd_rsp_tag] + 1'b1;
        if (ch_rx[rd_rsp_tag] + 1'b1 == ch_nbeat[rd_rsp_tag]) begin
          busy[rd_rsp_tag]    <= 1'b0;
          ch_done[rd_rsp_tag] <= 1'b1;
        end
      end
      // new commands
      for (int c = 0; c < NCH; c++) begin
        if (ch_cmd_valid[c] && !busy[c]) begin
          busy[c]     <= 1'b1;
          ch_dm[c]    <= mode_dm;
          ch_burst[c] <= dm_burst;
          ch_addr[c]  <= ch_cmd_addr[c];
          ch_rem[c]   <= ch_cmd_len[c];
          ch_rx[c]    <= '0;
          ch_nbeat[c] <= (BW+1)'(ch_cmd_len[c] / BEAT_LEN);
        end
      end
    end
  end

  // ----------------------------------------------------------- write side
  logic          wbusy, w_dm;
  logic [LW-1:0] w_burst, w_rem;
  logic [AW-1:0] w_addr;
  logic [BW:0]   w_sent, w_nbeat;
  logic [7:0]    w_nreq, w_nrsp;   // requests issued / acknowledged
  logic [LW-1:0] w_inchunk;        // bytes left in the current data chunk
  logic          wdat_fire;
  logic [LW-1:0] w_len;

  assign w_len           = chunk_len(w_dm, w_burst, w_rem);

  assign wcmd_ready      = !wbusy;
  assign wb_beat         = BW'(w_sent);
  assign wr_dat_valid    = wbusy && (w_sent != w_nbeat);
  assign wr_dat_data     = wb_data;
  assign wr_dat_last     = (w_inchunk == BEAT_LEN) ||
                           (w_inchunk == '0 && chunk_len(w_dm, w_burst, (LW'(w_nbeat) - LW'(w_sent)) * BEAT_LEN) == BEAT_LEN);
  assign wdat_fire       = wr_dat_valid && wr_dat_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbusy <= 1'b0; w_dm <= 1'b0; w_burst <= '0; w_rem <= '0; w_addr <= '0;
      w_sent <= '0; w_nbeat <= '0; w_nreq <= '0; w_nrsp <= '0; w_inchunk <= '0;
      wdone <= 1'b0;
      wr_req_valid <= 1'b0; wr_req_addr <= '0; wr_req_len <= '0; wr_req_to_cache <= 1'b0;
    end else begin
      wdone <= 1'b0;
      if (wcmd_valid && !wbusy) begin
        wbusy   <= 1'b1;
        w_dm    <= mode_dm;
        w_burst <= dm_burst;
        w_addr  <= wcmd_addr;
        w_rem   <= wcmd_len;
        w_sent  <= '0;
        w_nbeat <= (BW+1)'(wcmd_len / BEAT_LEN);
        w_nreq  <= '0;
        w_nrsp  <= '0;
        w_inchunk <= '0;
      end else if (wbusy) begin
        // requests
        if (w_rem != '0 && (!wr_req_valid || wr_req_ready)) begin
          wr_req_valid    <= 1'b1;
          wr_req_addr     <= w_addr;
          wr_req_len      <= w_len;
          wr_req_to_cache <= !w_dm;
          w_addr <= w_addr + AW'(w_len);
          w_rem  <= w_rem - w_len;
          w_nreq <= w_nreq + 1'b1;
        end else if (wr_req_ready) begin
          wr_req_valid <= 1'b0;
        end
        // data beats, grouped in chunks of the request size
        if (wdat_fire) begin
          w_sent <= w_sent + 1'b1;
          if (w_inchunk == '0)
            w_inchunk <= chunk_len(w_dm, w_burst, (LW'(w_nbeat) - LW'(w_sent)) * BEAT_LEN) - BEAT_LEN;
          else
            w_inchunk <= w_inchunk - BEAT_LEN;
        end
        // completions
        if (wr_rsp_valid) begin
          w_nrsp <= w_nrsp + 1'b1;
          if (w_rem == '0 && !wr_req_valid && w_nrsp + 1'b1 == w_nreq &&
              (w_sent == w_nbeat)) begin
            wbusy <= 1'b0;
            wdone <= 1'b1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ handshake rules
  a_rd_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req_addr) && $stable(rd_req_len) && $stable(rd_req_tag));
  a_wr_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wr_req_valid && !wr_req_ready |=> wr_req_valid && $stable(wr_req_addr) && $stable(wr_req_len));
  a_rsp_tag_known: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp_valid |-> busy[rd_rsp_tag]);
  a_wr_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    wr_rsp_valid |-> wbusy && w_nrsp < w_nreq);

endmodule
