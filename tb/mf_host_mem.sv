// mf_host_mem: behavioural model of everything on the host side of the
// accelerator's PCIe endpoint (link, switch, root complex, SMMU, caches,
// memory controller and DRAM), reduced to a flat memory with latency.
// Read requests are accepted (with occasional back-pressure when STALL = 1)
// and answered in request order, as 64 B beats tagged with the request's
// tag, no earlier than RD_LAT cycles after acceptance. Write requests and
// their data beats are stored in order; each request is acknowledged with a
// one-cycle wr_rsp_valid WR_LAT cycles after its last beat. The memory holds
// 32-bit words; the testbench fills and checks it through mem[].
// It counts requests routed to the cache (DC) and to memory (DM).
module mf_host_mem
  import mf_pkg::*;
#(
  parameter int unsigned WORDS  = 65536,   // 256 KB
  parameter int unsigned RD_LAT = 20,
  parameter int unsigned WR_LAT = 10,
  parameter bit          STALL  = 1'b1,
  localparam int unsigned LW    = $clog2(PAGE_BYTES) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rd_req_valid,
  output logic                  rd_req_ready,
  input  logic [AW-1:0]         rd_req_addr,
  input  logic [LW-1:0]         rd_req_len,
  input  logic [1:0]            rd_req_tag,
  input  logic                  rd_req_to_cache,
  output logic                  rd_rsp_valid,
  input  logic                  rd_rsp_ready,
  output logic [1:0]            rd_rsp_tag,
  output logic [BEAT_BITS-1:0]  rd_rsp_data,
  input  logic                  wr_req_valid,
  output logic                  wr_req_ready,
  input  logic [AW-1:0]         wr_req_addr,
  input  logic [LW-1:0]         wr_req_len,
  input  logic                  wr_req_to_cache,
  input  logic                  wr_dat_valid,
  output logic                  wr_dat_ready,
  input  logic [BEAT_BITS-1:0]  wr_dat_data,
  input  logic                  wr_dat_last,
  output logic                  wr_rsp_valid
);

  localparam int unsigned WPB = BEAT_BYTES / 4;

  logic [31:0] mem [WORDS];

  typedef struct {
    longint unsigned addr;
    int unsigned     tag;
    longint unsigned due;
  } beat_t;

  beat_t           rq[$];          // read beats waiting to be returned
  longint unsigned wq_addr[$];     // write requests: start address
  int unsigned     wq_len[$];
  longint unsigned wrsp_due[$];
  longint unsigned now = 0;
  int unsigned     w_off = 0;      // bytes written of the head write request
  int unsigned     lfsr = 1;

  int n_rd_cache = 0, n_rd_mem = 0, n_wr_cache = 0, n_wr_mem = 0;
  int n_rd_beats = 0, n_wr_beats = 0, n_last_bad = 0;

  always_ff @(posedge clk) begin
    now  <= now + 1;
    lfsr <= (lfsr >> 1) ^ ((lfsr & 1) != 0 ? 32'hB400 : 0);
  end

  assign rd_req_ready = !STALL || (lfsr[2:0] != 3'd0);
  assign wr_req_ready = !STALL || (lfsr[4:3] != 2'd0);
  assign wr_dat_ready = (wq_addr.size() != 0) && (!STALL || lfsr[6:5] != 2'd0);

  always_comb begin
    rd_rsp_valid = (rq.size() != 0) && (rq[0].due <= now);
    rd_rsp_tag   = (rq.size() != 0) ? 2'(rq[0].tag) : 2'd0;
    rd_rsp_data  = '0;
    if (rq.size() != 0) begin
      for (int w = 0; w < WPB; w++) rd_rsp_data[w*32 +: 32] = mem[(rq[0].addr / 4 + w) % WORDS];
    end
  end

  assign wr_rsp_valid = (wrsp_due.size() != 0) && (wrsp_due[0] <= now);

  always @(posedge clk) begin
    if (rst_n) begin
      if (rd_req_valid && rd_req_ready) begin
        if (rd_req_to_cache) n_rd_cache++; else n_rd_mem++;
        for (int b = 0; b < int'(rd_req_len) / BEAT_BYTES; b++) begin
          beat_t e;
          e.addr = rd_req_addr + 64'(b * BEAT_BYTES);
          e.tag  = rd_req_tag;
          e.due  = now + RD_LAT;
          rq.push_back(e);
        end
      end
      if (rd_rsp_valid && rd_rsp_ready) begin
        void'(rq.pop_front());
        n_rd_beats++;
      end
      if (wr_req_valid && wr_req_ready) begin
        if (wr_req_to_cache) n_wr_cache++; else n_wr_mem++;
        wq_addr.push_back(wr_req_addr);
        wq_len.push_back(wr_req_len);
      end
      if (wr_dat_valid && wr_dat_ready) begin
        for (int w = 0; w < WPB; w++) mem[(wq_addr[0] / 4 + w_off / 4 + w) % WORDS] <= wr_dat_data[w*32 +: 32];
        n_wr_beats++;
        if (w_off + BEAT_BYTES == wq_len[0]) begin
          if (!wr_dat_last) n_last_bad++;
          void'(wq_addr.pop_front());
          void'(wq_len.pop_front());
          wrsp_due.push_back(now + WR_LAT);
          w_off = 0;
        end else begin
          if (wr_dat_last) n_last_bad++;
          w_off += BEAT_BYTES;
        end
      end
      if (wr_rsp_valid) void'(wrsp_due.pop_front());
    end
  end

endmodule
