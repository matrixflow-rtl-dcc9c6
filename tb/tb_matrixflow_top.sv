// tb_matrixflow_top: end-to-end test of the accelerator wrapper at its
// default parameters (16 x 16 array, INT32, 4 KB pages).
// A host memory model stands behind the PCIe-side ports. For each job the
// testbench writes random A and B into host memory in the page-block layout
// (A block (i,k): W rows of L consecutive elements of A; B block (j,k): W
// columns of B stored as rows), writes a descriptor, programs the registers,
// starts the job, waits for the interrupt and compares every result with a
// product computed here (32-bit wrap-around). Jobs:
//   1. M = N = 32, K = 128 in DC mode (64 B requests to the cache):
//      4 result blocks, two K blocks each, one full result page.
//   2. M = 16, N = 80, K = 64 in DM mode with 1 KB bursts: 5 result blocks,
//      a full result page plus a partial one.
// It also checks that every block pair streams through the array at one
// column per cycle (L cycles), and counts the mechanisms the design has:
// fetch requests issued while the array computes, data held back because a
// buffer is still busy, round-robin interleaving of channels A and B, DC and
// DM requests, full and partial result-page write-backs, the interrupt.
module tb_matrixflow_top;
  import mf_pkg::*;

  localparam int unsigned W  = 16;
  localparam int unsigned L  = blk_len(DT_INT32, W);
  localparam int unsigned LW = $clog2(PAGE_BYTES) + 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_valid = 1'b0, cfg_write = 1'b0;
  logic [7:0]  cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic        irq;
  logic                 rd_req_valid, rd_req_ready, rd_req_to_cache, rd_rsp_valid, rd_rsp_ready;
  logic [AW-1:0]        rd_req_addr, wr_req_addr;
  logic [LW-1:0]        rd_req_len, wr_req_len;
  logic [1:0]           rd_req_tag, rd_rsp_tag;
  logic [BEAT_BITS-1:0] rd_rsp_data, wr_dat_data;
  logic wr_req_valid, wr_req_ready, wr_req_to_cache, wr_dat_valid, wr_dat_ready, wr_dat_last, wr_rsp_valid;

  matrixflow_top dut (.*);

  mf_host_mem #(.WORDS(65536)) host (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ------------------------------------------------------------ event counters
  int ev_overlap = 0, ev_backpressure = 0, ev_interleave = 0, ev_dc = 0, ev_dm = 0;
  int ev_full_page = 0, ev_part_page = 0, ev_irq = 0, ev_kacc = 0;
  int stream_cycles = 0, stream_runs = 0, stream_bad = 0, run_len = 0;
  int last_tag = -1;
  logic irq_q = 1'b0;

  always @(posedge clk) if (rst_n) begin
    logic in_stream;
    in_stream = dut.u_ctrl.buf_rd_en;
    if (rd_req_valid && rd_req_ready) begin
      if (in_stream && (rd_req_tag == 2'(CH_A) || rd_req_tag == 2'(CH_B))) ev_overlap++;
      if (last_tag >= 0 && int'(rd_req_tag) != last_tag && rd_req_tag != 2'(CH_DESC)
          && last_tag != int'(CH_DESC)) ev_interleave++;
      last_tag = rd_req_tag;
      if (rd_req_to_cache && rd_req_len == LW'(64)) ev_dc++;
      if (!rd_req_to_cache && rd_req_len > LW'(64)) ev_dm++;
    end
    if (rd_rsp_valid && !rd_rsp_ready) ev_backpressure++;
    if (dut.u_ctrl.wcmd_valid) begin
      if (dut.u_ctrl.wcmd_len == LW'(PAGE_BYTES)) ev_full_page++;
      else ev_part_page++;
    end
    if (in_stream && dut.u_ctrl.c_k != 0 && dut.u_ctrl.kcnt == 0) ev_kacc++;
    // streaming runs: one column per cycle, L cycles per block pair
    if (in_stream) begin
      stream_cycles++;
      run_len++;
    end else if (run_len != 0) begin
      stream_runs++;
      run_len = 0;
    end
    irq_q <= irq;
    if (irq && !irq_q) ev_irq++;
  end

  // ------------------------------------------------------------ helpers
  task automatic reg_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_write = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_valid = 1'b0; cfg_write = 1'b0;
  endtask

  task automatic reg_read(input logic [7:0] a, output logic [31:0] d);
    cfg_addr = a;
    #1;
    d = cfg_rdata;
  endtask

  logic [31:0] rv, rv2;

  localparam longint unsigned DESC_ADDR = 64'h0000;
  localparam longint unsigned A_BASE    = 64'h1000;

  task automatic run_job(input int M, input int N, input int K, input bit dm, input int burst);
    int mb, nb, kb;
    longint unsigned b_base, c_base;
    logic [31:0] A [][], B [][];
    int t0, cyc, s0, r0;
    mb = M / W; nb = N / W; kb = K / L;
    b_base = A_BASE + 64'(M * K * 4);
    c_base = b_base + 64'(N * K * 4);
    A = new[M]; foreach (A[r]) A[r] = new[K];
    B = new[K]; foreach (B[r]) B[r] = new[N];
    foreach (A[r, c]) A[r][c] = $urandom;
    foreach (B[r, c]) B[r][c] = $urandom;
    // page-block layout
    for (int i = 0; i < mb; i++)
      for (int k = 0; k < kb; k++)
        for (int r = 0; r < W; r++)
          for (int e = 0; e < L; e++)
            host.mem[(A_BASE + 64'((i * kb + k) * PAGE_BYTES + r * L * 4 + e * 4)) / 4] = A[i*W + r][k*L + e];
    for (int j = 0; j < nb; j++)
      for (int k = 0; k < kb; k++)
        for (int r = 0; r < W; r++)
          for (int e = 0; e < L; e++)
            host.mem[(b_base + 64'((j * kb + k) * PAGE_BYTES + r * L * 4 + e * 4)) / 4] = B[k*L + e][j*W + r];
    for (int w = 0; w < (mb * nb * W * W); w++) host.mem[c_base / 4 + 64'(w)] = 32'hDEAD_BEEF;
    // descriptor
    for (int w = 0; w < 16; w++) host.mem[DESC_ADDR / 4 + w] = 32'd0;
    host.mem[0] = A_BASE[31:0];  host.mem[1] = A_BASE[63:32];
    host.mem[2] = b_base[31:0];  host.mem[3] = b_base[63:32];
    host.mem[4] = c_base[31:0];  host.mem[5] = c_base[63:32];
    host.mem[6] = {16'(nb), 16'(mb)};
    host.mem[7] = {16'd0, 16'(kb)};

    reg_write(REG_DESC_LO, DESC_ADDR[31:0]);
    reg_write(REG_DESC_HI, DESC_ADDR[63:32]);
    reg_write(REG_MODE, {31'd0, dm});
    reg_write(REG_BURST, burst);
    reg_read(REG_MODE, rv); reg_read(REG_BURST, rv2);
    check(rv == {31'd0, dm} && rv2 == burst, "register read-back");
    s0 = stream_cycles; r0 = stream_runs;
    t0 = $time;
    reg_write(REG_CTRL, 32'd1);
    reg_read(REG_STATUS, rv);
    check(rv == 32'd1, "busy after start");
    wait (irq);
    @(negedge clk);
    cyc = ($time - t0) / 10;
    reg_read(REG_STATUS, rv);
    check(rv == 32'd2, "done and idle at irq");
    reg_read(REG_CYCLES, rv);
    $display("job M=%0d N=%0d K=%0d %s: %0d cycles (CYCLES register %0d)", M, N, K, dm ? "DM" : "DC",
             cyc, rv);
    check(rv > 0 && rv <= cyc, "cycle counter");
    // one column per cycle: exactly L cycles per block pair
    check(stream_cycles - s0 == mb * nb * kb * L,
          $sformatf("stream cycles %0d expected %0d", stream_cycles - s0, mb * nb * kb * L));
    // results
    for (int i = 0; i < mb; i++)
      for (int j = 0; j < nb; j++)
        for (int r = 0; r < W; r++)
          for (int c = 0; c < W; c++) begin
            logic [31:0] exp;
            int bidx;
            longint unsigned adr;
            exp = 0;
            for (int kk = 0; kk < K; kk++) exp += A[i*W + r][kk] * B[kk][j*W + c];
            bidx = i * nb + j;
            adr = c_base + 64'((bidx / 4) * PAGE_BYTES + (bidx % 4) * W * W * 4 + r * W * 4 + c * 4);
            check(host.mem[adr / 4] == exp,
                  $sformatf("C[%0d][%0d] got %h exp %h", i*W + r, j*W + c, host.mem[adr / 4], exp));
          end
    reg_write(REG_STATUS, 32'd2);
    reg_read(REG_STATUS, rv);
    check(!irq && rv == 32'd0, "interrupt cleared");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    reg_read(REG_STATUS, rv); reg_read(REG_BURST, rv2);
    check(!irq && rv == 0 && rv2 == PAGE_BYTES, "reset state");
    run_job(32, 32, 128, 1'b0, 4096);
    run_job(16, 80, 64, 1'b1, 1024);
    check(host.n_last_bad == 0, "write data last flags match request sizes");
    $display("events: overlap=%0d backpressure=%0d interleave=%0d dc=%0d dm=%0d full_page=%0d part_page=%0d irq=%0d k_accumulate=%0d",
             ev_overlap, ev_backpressure, ev_interleave, ev_dc, ev_dm, ev_full_page, ev_part_page, ev_irq, ev_kacc);
    check(ev_overlap > 0, "fetch requests overlapped with compute");
    check(ev_backpressure > 0, "read data held back while buffer busy");
    check(ev_interleave > 0, "channels A and B time-multiplexed");
    check(ev_dc > 0 && host.n_rd_cache > 0 && host.n_wr_cache > 0, "DC mode requests");
    check(ev_dm > 0 && host.n_rd_mem > 0 && host.n_wr_mem > 0, "DM mode bursts");
    check(ev_full_page > 0, "buffer C full write-back");
    check(ev_part_page > 0, "partial buffer C write-back");
    check(ev_irq == 2, "one interrupt per job");
    check(ev_kacc > 0, "accumulation across K blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
