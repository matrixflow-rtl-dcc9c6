// tb_mf_controller: self-checking testbench for the controller alone, with a
// behavioural DMA around it. The DMA model answers the descriptor command
// with one beat holding the descriptor, completes each page fetch some
// cycles after its buffer is free (sink-ready), and completes result writes
// after a delay. Job: MB = 2, NB = 3, KB = 2 (INT32, W = 16, L = 64).
// Checked: the A and B page addresses follow the block loop (i, j, k) with
// A block (i,k) at A + (i*KB+k)*4 KB and B block (j,k) at B + (j*KB+k)*4 KB;
// each pair is streamed as k = 0..L-1 on consecutive cycles and only after
// both of its pages arrived; the array is cleared once per result block,
// before its first pair; every result block is drained into the next row
// slots of buffer C; a full 4 KB page and then a 2 KB page are written to
// C, C + 4 KB; registers, busy/done status and the interrupt.
module tb_mf_controller;
  import mf_pkg::*;

  localparam int unsigned W = 16, L = 64, LW = $clog2(PAGE_BYTES) + 1;
  localparam int MB = 2, NB = 3, KB = 2;
  localparam logic [AW-1:0] A0 = 64'h10_0000, B0 = 64'h20_0000, C0 = 64'h30_0000, D0 = 64'h40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_valid = 1'b0, cfg_write = 1'b0;
  logic [7:0]  cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic        irq, mode_dm;
  logic [LW-1:0] dm_burst;
  logic [NCH-1:0] ch_cmd_valid, ch_cmd_ready, ch_sink_ready, ch_wr_en, ch_done;
  logic [AW-1:0]  ch_cmd_addr [NCH];
  logic [LW-1:0]  ch_cmd_len  [NCH];
  logic [BEAT_BITS-1:0] ch_wr_data;
  logic        wcmd_valid, wcmd_ready, wdone;
  logic [AW-1:0] wcmd_addr;
  logic [LW-1:0] wcmd_len;
  logic        buf_rd_en, sa_clr, ob_wr_en;
  logic [5:0]  buf_rd_k, ob_wr_row;
  logic [3:0]  sa_rd_row;

  mf_controller #(.W(W), .DTYPE(DT_INT32)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ------------------------------------------------------ behavioural DMA
  int          busy_cnt [NCH];   // -1 idle, else countdown once sink is ready
  logic [AW-1:0] a_addrs[$], b_addrs[$], w_addrs[$];
  int          w_lens[$];
  int          wbusy = 0;
  int          avail_a = 0, avail_b = 0;   // pages delivered and not yet streamed
  int          clr_cnt = 0, rd_cycles = 0, exp_k = 0, stream_bad = 0, early_bad = 0;
  int          row_cnt = 0, row_bad = 0, clr_bad = 0, pairs = 0;
  desc_t       d;

  assign ch_cmd_ready = {busy_cnt[2] < 0, busy_cnt[1] < 0, busy_cnt[0] < 0};
  assign wcmd_ready   = wbusy == 0;

  always_comb begin
    d = '0;
    d.a_base = A0; d.b_base = B0; d.c_base = C0;
    d.mb = 16'(MB); d.nb = 16'(NB); d.kb = 16'(KB);
    ch_wr_data = '0;
    ch_wr_data[$bits(desc_t)-1:0] = d;
  end

  initial foreach (busy_cnt[c]) busy_cnt[c] = -1;

  always @(posedge clk) if (rst_n) begin
    ch_done <= '0;
    ch_wr_en <= '0;
    wdone <= 1'b0;
    for (int c = 0; c < NCH; c++) begin
      if (ch_cmd_valid[c] && ch_cmd_ready[c]) begin
        busy_cnt[c] <= 6 + c;
        if (c == CH_A) a_addrs.push_back(ch_cmd_addr[c]);
        if (c == CH_B) b_addrs.push_back(ch_cmd_addr[c]);
        if (c == CH_DESC) check(ch_cmd_addr[c] == D0 && ch_cmd_len[c] == LW'(64), "descriptor command");
        else check(ch_cmd_len[c] == LW'(4096), "page command length");
      end else if (busy_cnt[c] > 0 && ch_sink_ready[c]) begin
        busy_cnt[c] <= busy_cnt[c] - 1;
      end else if (busy_cnt[c] == 0) begin
        busy_cnt[c] <= -1;
        ch_done[c] <= 1'b1;
        if (c == CH_DESC) ch_wr_en[c] <= 1'b1;   // the descriptor beat, one cycle before done
        if (c == CH_A) avail_a++;
        if (c == CH_B) avail_b++;
      end
    end
    if (ch_wr_en[CH_DESC]) ch_wr_en[CH_DESC] <= 1'b0;
    if (wcmd_valid && wcmd_ready) begin
      w_addrs.push_back(wcmd_addr);
      w_lens.push_back(int'(wcmd_len));
      wbusy <= 30;
    end else if (wbusy > 1) wbusy <= wbusy - 1;
    else if (wbusy == 1) begin
      wbusy <= 0;
      wdone <= 1'b1;
    end
    // array-side observations
    if (sa_clr) begin
      clr_cnt++;
      if (rd_cycles != (clr_cnt - 1) * KB * L) clr_bad++;
    end
    if (buf_rd_en) begin
      if (exp_k == 0) begin
        pairs++;
        if (avail_a < 1 || avail_b < 1) early_bad++;
      end
      if (int'(buf_rd_k) != exp_k) stream_bad++;
      rd_cycles++;
      exp_k = (exp_k + 1) % L;
      if (exp_k == 0) begin avail_a--; avail_b--; end
    end else if (exp_k != 0) stream_bad++;   // a pair must stream without gaps
    if (ob_wr_en) begin
      int blk;
      blk = row_cnt / W;
      if (int'(ob_wr_row) != (blk % 4) * W + (row_cnt % W) || int'(sa_rd_row) != row_cnt % W) row_bad++;
      row_cnt++;
    end
  end

  task automatic reg_write(input logic [7:0] a, input logic [31:0] v);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_write = 1'b1; cfg_addr = a; cfg_wdata = v;
    @(negedge clk);
    cfg_valid = 1'b0; cfg_write = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    reg_write(REG_DESC_LO, D0[31:0]);
    reg_write(REG_DESC_HI, D0[63:32]);
    reg_write(REG_MODE, 32'd1);
    reg_write(REG_BURST, 32'd512);
    check(mode_dm == 1'b1 && dm_burst == LW'(512), "mode and burst outputs");
    cfg_addr = REG_DESC_LO; #1;
    check(cfg_rdata == D0[31:0], "descriptor register read-back");
    reg_write(REG_CTRL, 32'd1);
    cfg_addr = REG_STATUS; #1;
    check(cfg_rdata == 32'd1 && !irq, "busy");
    wait (irq);
    @(negedge clk);
    cfg_addr = REG_STATUS; #1;
    check(cfg_rdata == 32'd2, "done, not busy");
    // fetch order
    check(a_addrs.size() == MB * NB * KB && b_addrs.size() == MB * NB * KB, "number of page fetches");
    begin
      int n;
      n = 0;
      for (int i = 0; i < MB; i++)
        for (int j = 0; j < NB; j++)
          for (int k = 0; k < KB; k++) begin
            check(a_addrs[n] == A0 + 64'((i * KB + k) * 4096), $sformatf("A page %0d: %h", n, a_addrs[n]));
            check(b_addrs[n] == B0 + 64'((j * KB + k) * 4096), $sformatf("B page %0d: %h", n, b_addrs[n]));
            n++;
          end
    end
    check(pairs == MB * NB * KB && rd_cycles == MB * NB * KB * L, "every pair streamed once, L columns each");
    check(stream_bad == 0, "columns k = 0..L-1 on consecutive cycles");
    check(early_bad == 0, "streaming only after both pages arrived");
    check(clr_cnt == MB * NB && clr_bad == 0, "one clear per result block, before its first pair");
    check(row_cnt == MB * NB * W && row_bad == 0, "result rows into consecutive slots of buffer C");
    check(w_addrs.size() == 2, "two result pages written");
    if (w_addrs.size() == 2) begin
      check(w_addrs[0] == C0 && w_lens[0] == 4096, "first page: full, at C");
      check(w_addrs[1] == C0 + 64'd4096 && w_lens[1] == 2048, "second page: two blocks, at C + 4 KB");
    end
    reg_write(REG_STATUS, 32'd2);
    check(!irq, "interrupt cleared");
    cfg_addr = REG_CYCLES; #1;
    check(cfg_rdata > 32'(MB * NB * KB * L), "cycle counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
