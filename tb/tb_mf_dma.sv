// tb_mf_dma: self-checking testbench for the DMA engine, connected to the
// host memory model (in-order responses, random back-pressure).
// Phase 1, DC mode: channels A and B each read a 4 KB page and the
// descriptor channel reads 64 B, all at once; the sinks randomly refuse
// data. Checked: every beat lands at the right index with the right data,
// each channel's done pulse, 64 B requests marked for the cache, and strict
// A/B alternation of requests while both are pending (round-robin).
// Phase 2, DM mode with 1 KB bursts: the same reads take 4 requests per page
// to memory. Phase 3: a 4 KB and a 1 KB write from a source buffer in DC and
// DM mode; host memory and the completion pulse are checked.
module tb_mf_dma;
  import mf_pkg::*;

  localparam int unsigned LW = $clog2(PAGE_BYTES) + 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 mode_dm = 1'b0;
  logic [LW-1:0]        dm_burst = LW'(1024);
  logic [NCH-1:0]       ch_cmd_valid = '0, ch_cmd_ready, ch_sink_ready, ch_wr_en, ch_done;
  logic [AW-1:0]        ch_cmd_addr [NCH];
  logic [LW-1:0]        ch_cmd_len  [NCH];
  logic [5:0]           ch_wr_beat;
  logic [BEAT_BITS-1:0] ch_wr_data;
  logic                 rd_req_valid, rd_req_ready, rd_req_to_cache, rd_rsp_valid, rd_rsp_ready;
  logic [AW-1:0]        rd_req_addr, wr_req_addr, wcmd_addr = '0;
  logic [LW-1:0]        rd_req_len, wr_req_len, wcmd_len = '0;
  logic [1:0]           rd_req_tag, rd_rsp_tag;
  logic [BEAT_BITS-1:0] rd_rsp_data, wr_dat_data, wb_data;
  logic                 wcmd_valid = 1'b0, wcmd_ready, wdone;
  logic [5:0]           wb_beat;
  logic wr_req_valid, wr_req_ready, wr_req_to_cache, wr_dat_valid, wr_dat_ready, wr_dat_last, wr_rsp_valid;

  mf_dma dut (.*);
  mf_host_mem #(.WORDS(16384), .RD_LAT(12), .WR_LAT(6)) host (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // sinks: page images per channel
  logic [BEAT_BITS-1:0] sink [NCH][64];
  logic [BEAT_BITS-1:0] src [64];
  int done_cnt [NCH];
  int req_cnt [NCH];
  int req_bad_len = 0, alternations_bad = 0, alternations = 0, wdone_cnt = 0;
  int prev_tag = -1;
  int exp_req = 64;   // requests per page in the current phase
  assign wb_data = src[wb_beat];

  always @(posedge clk) begin
    ch_sink_ready <= NCH'($urandom) | 3'b100;
    if (rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        if (ch_wr_en[c]) sink[c][ch_wr_beat] <= ch_wr_data;
        if (ch_done[c]) done_cnt[c]++;
      end
      if (rd_req_valid && rd_req_ready) begin
        if (rd_req_len != (mode_dm ? dm_burst : LW'(64)) && rd_req_tag != 2'(CH_DESC)) req_bad_len++;
        if (rd_req_to_cache == mode_dm) req_bad_len++;
        // while both A and B still have requests left, tags must alternate
        // (one check per such request)
        if (rd_req_tag != 2'(CH_DESC) && prev_tag >= 0 &&
            req_cnt[CH_A] < exp_req && req_cnt[CH_B] < exp_req) begin
          alternations++;
          if (prev_tag == int'(rd_req_tag)) alternations_bad++;
        end
        if (rd_req_tag != 2'(CH_DESC)) prev_tag = rd_req_tag;
        req_cnt[rd_req_tag]++;
      end
      if (wdone) wdone_cnt++;
    end
  end

  task automatic read_phase(input bit dm, input string tag);
    logic [AW-1:0] base [NCH];
    base[CH_A] = 64'h0000; base[CH_B] = 64'h4000; base[CH_DESC] = 64'h8040;
    foreach (done_cnt[c]) begin done_cnt[c] = 0; req_cnt[c] = 0; end
    for (int w = 0; w < 16384; w++) host.mem[w] = $urandom;
    @(negedge clk);
    mode_dm = dm;
    exp_req = dm ? 4 : 64;
    prev_tag = -1;
    alternations = 0; alternations_bad = 0;
    for (int c = 0; c < NCH; c++) begin
      ch_cmd_addr[c] = base[c];
      ch_cmd_len[c]  = (c == CH_DESC) ? LW'(64) : LW'(4096);
    end
    ch_cmd_valid = '1;
    @(negedge clk);
    ch_cmd_valid = '0;
    check(ch_cmd_ready == '0, {tag, ": channels busy after command"});
    wait (done_cnt[CH_A] == 1 && done_cnt[CH_B] == 1 && done_cnt[CH_DESC] == 1);
    @(negedge clk);
    check(ch_cmd_ready == '1, {tag, ": channels free after done"});
    for (int c = 0; c < NCH; c++) begin
      for (int b = 0; b < ((c == CH_DESC) ? 1 : 64); b++) begin
        logic [BEAT_BITS-1:0] exp;
        for (int w = 0; w < 16; w++) exp[w*32 +: 32] = host.mem[base[c] / 4 + 64'(b * 16 + w)];
        check(sink[c][b] == exp, $sformatf("%s: channel %0d beat %0d", tag, c, b));
      end
    end
    check(req_cnt[CH_A] == (dm ? 4 : 64) && req_cnt[CH_B] == (dm ? 4 : 64) && req_cnt[CH_DESC] == 1,
          $sformatf("%s: request counts %0d %0d %0d", tag, req_cnt[0], req_cnt[1], req_cnt[2]));
    check(req_bad_len == 0, {tag, ": request length and routing"});
    check(alternations > 0, {tag, ": A and B requests competed"});
    checks += alternations;
    failures += alternations_bad;
    if (alternations_bad != 0)
      $display("FAIL %s: %0d of %0d requests broke the A/B alternation", tag, alternations_bad, alternations);
    repeat (5) @(negedge clk);
    check(done_cnt[CH_A] == 1 && done_cnt[CH_B] == 1, {tag, ": single done pulse"});
  endtask

  task automatic write_phase(input bit dm, input int len, input logic [AW-1:0] addr);
    int w0, nw, nm, nc;
    foreach (src[b]) src[b] = {16{$urandom}};
    foreach (src[b]) for (int w = 0; w < 16; w++) src[b][w*32 +: 32] = $urandom;
    w0 = wdone_cnt; nm = host.n_wr_mem; nc = host.n_wr_cache;
    @(negedge clk);
    mode_dm = dm;
    wcmd_valid = 1'b1; wcmd_addr = addr; wcmd_len = LW'(len);
    @(negedge clk);
    wcmd_valid = 1'b0;
    wait (wdone_cnt == w0 + 1);
    @(negedge clk);
    nw = len / 4;
    for (int w = 0; w < nw; w++)
      check(host.mem[addr / 4 + 64'(w)] == src[w / 16][(w % 16) * 32 +: 32], $sformatf("write word %0d", w));
    if (dm) check(host.n_wr_mem - nm == (len + 1023) / 1024 && host.n_wr_cache == nc, "DM write requests");
    else    check(host.n_wr_cache - nc == len / 64 && host.n_wr_mem == nm, "DC write requests");
    check(wcmd_ready, "write channel free");
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
    read_phase(1'b0, "DC");
    read_phase(1'b1, "DM");
    write_phase(1'b0, 4096, 64'h9000);
    write_phase(1'b1, 4096, 64'hA000);
    write_phase(1'b1, 1024, 64'hB000);
    check(host.n_last_bad == 0, "write last flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
