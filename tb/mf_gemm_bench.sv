// mf_gemm_bench: reusable workload harness around one accelerator.
// It holds a matrixflow_top built for data type DTYPE (16 x 16 array, 4 KB
// pages, every other parameter at its default) and a behavioural host
// memory of WORDS 32-bit words. The task run_job(M, N, K, dm, burst, name)
// (and an optional k_used) runs one complete C = A x B job the way host software would:
//   * it draws random A (M x K) and B (K x N), zero beyond column / row
//     k_used of K when k_used > 0 (the host's padding of K to a whole
//     number of page blocks), and writes them into host
//     memory in the page-block layout: A block (i,k) = 16 rows of A, each
//     with L consecutive elements, B block (j,k) = 16 columns of B, each
//     stored as one page row of L elements (B split horizontally);
//   * it writes the 64 B descriptor, programs MODE / BURST / descriptor
//     address, writes CTRL.start and waits for the interrupt;
//   * it checks every element of C against a product computed here, that
//     the array streamed exactly L columns per block pair, the STATUS and
//     CYCLES registers, and the write-data framing.
// Element values: INT32/16/8 use the full range of the type, with products
// sign-extended and summed modulo 2^32. FP32/FP16 use n/8 with n a random
// integer in -15..15, so every product and partial sum is exact in FP32 and
// the result is compared for equality whatever the rounding mode.
// The host answers reads in order after 20 cycles, with random request
// back-pressure; writes are acknowledged 10 cycles after their last beat.
// Counters checks / failures / jobs are read by the enclosing testbench.
module mf_gemm_bench
  import mf_pkg::*;
#(
  parameter dtype_e      DTYPE = DT_INT32,
  parameter int unsigned WORDS = 1 << 20
) (
  input logic clk,
  input logic rst_n
);
  localparam int unsigned W  = 16;
  localparam int unsigned EB = elem_bytes(DTYPE);
  localparam int unsigned L  = blk_len(DTYPE, W);
  localparam int unsigned LW = $clog2(PAGE_BYTES) + 1;
  localparam bit          FP = (DTYPE == DT_FP32) || (DTYPE == DT_FP16);

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

  matrixflow_top #(.DTYPE(DTYPE)) dut (.*);

  mf_host_mem #(.WORDS(WORDS)) host (.*);

  int checks = 0, failures = 0, jobs = 0;
  longint stream_cycles = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [%s] %s", DTYPE.name(), what);
    end
  endtask

  always @(posedge clk) if (rst_n && dut.u_ctrl.buf_rd_en) stream_cycles++;

  // ------------------------------------------------------------ element coding
  // n/8 as FP32 or FP16 bits, |n| <= 15
  function automatic logic [31:0] enc_fp(int n);
    int m, e;
    if (n == 0) return 32'd0;
    m = n < 0 ? -n : n;
    e = 0;
    while ((m >> (e + 1)) != 0) e++;
    if (DTYPE == DT_FP16)
      return 32'({n < 0, 5'(15 + e - 3), 10'((m << (10 - e)) & 32'h3ff)});
    return {n < 0, 8'(127 + e - 3), 23'((m << (23 - e)) & 32'h7fffff)};
  endfunction

  function automatic real f2r(logic [31:0] f);
    real m;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    for (int e = 127; e < int'(f[30:23]); e++) m = m * 2.0;
    for (int e = int'(f[30:23]); e < 127; e++) m = m / 2.0;
    return f[31] ? -m : m;
  endfunction

  function automatic int rnd_elem();
    if (FP) return $urandom_range(30) - 15;
    case (DTYPE)
      DT_INT8:  return int'($signed(8'($urandom)));
      DT_INT16: return int'($signed(16'($urandom)));
      default:  return int'($urandom);
    endcase
  endfunction

  // write one element (EB bytes, little-endian) at byte address adr
  task automatic put_elem(input longint unsigned adr, input int v);
    logic [31:0] bits, word;
    int sh;
    bits = FP ? enc_fp(v) : 32'(v);
    sh   = int'(adr % 4) * 8;
    word = host.mem[adr / 4];
    case (EB)
      1:       word[sh +: 8]  = bits[7:0];
      2:       word[sh +: 16] = bits[15:0];
      default: word = bits;
    endcase
    host.mem[adr / 4] = word;
  endtask

  // ------------------------------------------------------------ registers
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

  // ------------------------------------------------------------ one job
  task automatic run_job(input int M, input int N, input int K, input bit dm, input int burst,
                         input string name, input int k_used = 0);
    int mb, nb, kb, cyc, bad0;
    longint unsigned a_base, b_base, c_base, t0, s0;
    int A [][], B [][];
    logic [31:0] rv;
    mb = M / W; nb = N / W; kb = K / L;
    a_base = 64'h1000;
    b_base = a_base + 64'(M) * 64'(K) * 64'(EB);
    c_base = b_base + 64'(N) * 64'(K) * 64'(EB);
    if (c_base + 64'(M) * 64'(N) * 4 > 64'(WORDS) * 4 || M % W != 0 || N % W != 0 || K % L != 0) begin
      check(1'b0, $sformatf("%s does not fit the host model or the block grid", name));
      return;
    end
    A = new[M]; foreach (A[r]) A[r] = new[K];
    B = new[K]; foreach (B[r]) B[r] = new[N];
    foreach (A[r, c]) A[r][c] = rnd_elem();
    foreach (B[r, c]) B[r][c] = rnd_elem();
    // K padded with zeros up to a whole page block when k_used > 0
    if (k_used > 0) begin
      foreach (A[r, c]) if (c >= k_used) A[r][c] = 0;
      foreach (B[r, c]) if (r >= k_used) B[r][c] = 0;
    end
    for (int i = 0; i < mb; i++)
      for (int k = 0; k < kb; k++)
        for (int r = 0; r < W; r++)
          for (int e = 0; e < L; e++)
            put_elem(a_base + 64'((i * kb + k) * PAGE_BYTES + (r * L + e) * EB), A[i*W + r][k*L + e]);
    for (int j = 0; j < nb; j++)
      for (int k = 0; k < kb; k++)
        for (int r = 0; r < W; r++)
          for (int e = 0; e < L; e++)
            put_elem(b_base + 64'((j * kb + k) * PAGE_BYTES + (r * L + e) * EB), B[k*L + e][j*W + r]);
    for (int w = 0; w < mb * nb * W * W; w++) host.mem[c_base / 4 + 64'(w)] = 32'hDEAD_BEEF;
    for (int w = 0; w < 16; w++) host.mem[w] = 32'd0;
    host.mem[0] = a_base[31:0];  host.mem[1] = a_base[63:32];
    host.mem[2] = b_base[31:0];  host.mem[3] = b_base[63:32];
    host.mem[4] = c_base[31:0];  host.mem[5] = c_base[63:32];
    host.mem[6] = {16'(nb), 16'(mb)};
    host.mem[7] = {16'd0, 16'(kb)};

    reg_write(REG_DESC_LO, 32'd0);
    reg_write(REG_DESC_HI, 32'd0);
    reg_write(REG_MODE, {31'd0, dm});
    reg_write(REG_BURST, burst);
    bad0 = host.n_last_bad;
    s0 = stream_cycles;
    t0 = $time;
    reg_write(REG_CTRL, 32'd1);
    wait (irq);
    @(negedge clk);
    cyc = int'(($time - t0) / 10);
    reg_read(REG_STATUS, rv);
    check(rv == 32'd2, $sformatf("%s: STATUS done and idle at interrupt", name));
    reg_read(REG_CYCLES, rv);
    check(rv > 0 && rv <= cyc, $sformatf("%s: CYCLES register", name));
    check(stream_cycles - s0 == longint'(mb) * nb * kb * L,
          $sformatf("%s: streamed %0d columns, expected %0d", name, stream_cycles - s0,
                    longint'(mb) * nb * kb * L));
    check(host.n_last_bad == bad0, $sformatf("%s: write framing", name));
    $display("[%s] %s M=%0d N=%0d K=%0d %s: %0d cycles, %0d block pairs, %0.1f cycles/pair, array busy %0.1f%%",
             DTYPE.name(), name, M, N, K, dm ? "DM" : "DC", cyc, mb * nb * kb,
             real'(cyc) / real'(mb * nb * kb), 100.0 * real'(mb * nb * kb * L) / real'(cyc));
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        int s, bidx;
        longint unsigned adr;
        logic [31:0] got;
        s = 0;
        for (int kk = 0; kk < K; kk++) s += A[r][kk] * B[kk][c];
        bidx = (r / W) * nb + c / W;
        adr = c_base + 64'((bidx / 4) * PAGE_BYTES + (bidx % 4) * W * W * 4 + (r % W) * W * 4 + (c % W) * 4);
        got = host.mem[adr / 4];
        if (FP) check(f2r(got) == real'(s) / 64.0,
                      $sformatf("%s C[%0d][%0d] = %h, expected %0d/64", name, r, c, got, s));
        else    check(got == 32'(s),
                      $sformatf("%s C[%0d][%0d] = %h, expected %h", name, r, c, got, 32'(s)));
      end
    reg_write(REG_STATUS, 32'd2);
    check(!irq, $sformatf("%s: interrupt cleared", name));
    jobs++;
  endtask
endmodule
