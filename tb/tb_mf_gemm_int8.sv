// tb_mf_gemm_int8: square INT8 GEMM workloads on the INT8 build of the
// accelerator (16 x 16 array, 4 KB pages, so page blocks are 16 x 256).
// It runs C = A x B for n x n matrices with n = 64, 256 and 1024 (for n = 64
// the host pads K with zeros to one 256-element page block), in
// direct-cache mode (64 B requests through the last-level cache) and, for
// the two smaller sizes, in direct-memory mode with 4 KB and 1 KB bursts.
// The largest size moves 16384 block pairs through the array. Every result
// element is compared with a product computed here; mf_gemm_bench also
// checks the streaming rate and the status registers and prints the cycle
// count and array utilisation of each run. n = 2048 would take about eight
// times the 1024 run and is left out to keep the simulation short.
module tb_mf_gemm_int8;
  import mf_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  mf_gemm_bench #(.DTYPE(DT_INT8), .WORDS(1 << 21)) u_b (.*);

  initial begin
    repeat (30_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_b.checks, u_b.failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    u_b.run_job(64, 64, 256, 1'b0, 4096, "gemm 64, K padded to 256", 64);
    u_b.run_job(64, 64, 256, 1'b1, 1024, "gemm 64, K padded to 256", 64);
    u_b.run_job(256, 256, 256, 1'b0, 4096, "gemm 256");
    u_b.run_job(256, 256, 256, 1'b1, 4096, "gemm 256");
    u_b.run_job(1024, 1024, 1024, 1'b0, 4096, "gemm 1024");
    $display("TB_RESULT checks=%0d failures=%0d", u_b.checks, u_b.failures + (u_b.jobs == 5 ? 0 : 1));
    $finish;
  end
endmodule
