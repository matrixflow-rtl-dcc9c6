// tb_mf_gemm_dtypes: the data-type workload. The same GEMM is run on the
// five builds of the accelerator, one per processing-element data type
// (INT32, INT16, INT8, FP32, FP16), each a matrixflow_top with its own host
// memory, all five running side by side from one clock.
// Each build runs a 512 x 512 x 512 product in direct-cache mode and a
// 256 x 256 x 256 product in direct-memory mode with 4 KB bursts. The page
// block gets longer as the element gets smaller (L = 64, 128, 256, 64, 128
// elements), so the number of block pairs per job, and the run time, falls
// with the element size. Every result element is checked; the floating-point
// inputs are multiples of 1/8 chosen so that the FP32 sums are exact.
module tb_mf_gemm_dtypes;
  import mf_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned WORDS = 1 << 20;   // 4 MB per host model

  mf_gemm_bench #(.DTYPE(DT_INT32), .WORDS(WORDS)) u_i32 (.*);
  mf_gemm_bench #(.DTYPE(DT_INT16), .WORDS(WORDS)) u_i16 (.*);
  mf_gemm_bench #(.DTYPE(DT_INT8),  .WORDS(WORDS)) u_i8  (.*);
  mf_gemm_bench #(.DTYPE(DT_FP32),  .WORDS(WORDS)) u_f32 (.*);
  mf_gemm_bench #(.DTYPE(DT_FP16),  .WORDS(WORDS)) u_f16 (.*);

  function automatic int total_checks();
    return u_i32.checks + u_i16.checks + u_i8.checks + u_f32.checks + u_f16.checks;
  endfunction

  function automatic int total_failures();
    return u_i32.failures + u_i16.failures + u_i8.failures + u_f32.failures + u_f16.failures;
  endfunction

  initial begin
    repeat (6_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures() + 1);
    $finish;
  end

  initial begin
    int jobs;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    fork
      begin
        u_i32.run_job(512, 512, 512, 1'b0, 4096, "gemm 512");
        u_i32.run_job(256, 256, 256, 1'b1, 4096, "gemm 256");
      end
      begin
        u_i16.run_job(512, 512, 512, 1'b0, 4096, "gemm 512");
        u_i16.run_job(256, 256, 256, 1'b1, 4096, "gemm 256");
      end
      begin
        u_i8.run_job(512, 512, 512, 1'b0, 4096, "gemm 512");
        u_i8.run_job(256, 256, 256, 1'b1, 4096, "gemm 256");
      end
      begin
        u_f32.run_job(512, 512, 512, 1'b0, 4096, "gemm 512");
        u_f32.run_job(256, 256, 256, 1'b1, 4096, "gemm 256");
      end
      begin
        u_f16.run_job(512, 512, 512, 1'b0, 4096, "gemm 512");
        u_f16.run_job(256, 256, 256, 1'b1, 4096, "gemm 256");
      end
    join
    jobs = u_i32.jobs + u_i16.jobs + u_i8.jobs + u_f32.jobs + u_f16.jobs;
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures() + (jobs == 10 ? 0 : 1));
    $finish;
  end
endmodule
