// tb_mf_transformer: transformer-layer GEMMs on the INT32 build of the
// accelerator (16 x 16 array, page blocks of 16 x 64 elements).
// An encoder layer is a handful of matrix products of a few shapes; this
// testbench runs one of each shape, taken from BERT-base (hidden size 768,
// 12 heads of 64, feed-forward size 3072, 128 tokens) and from ViT
// (ViT-base: 197 tokens, padded to 208 rows; ViT-huge: 257 tokens, padded
// to 272, heads 80 wide):
//   1. BERT-base Q projection    128 x 768  by 768 x 768
//   2. BERT-base scores, 1 head  128 x 64   by 64 x 128   (Q K^T)
//   3. BERT-base context, 1 head 128 x 128  by 128 x 64   (P V)
//   4. BERT-base FFN down, a 64-column slice  128 x 3072 by 3072 x 64
//   5. ViT-base Q projection     208 x 768  by 768 x 768
//   6. ViT-huge scores, 1 head   272 x 128  by 128 x 272, head width 80
//      padded with zeros to two 64-element page blocks
// The whole layer repeats these shapes (Q, K, V, output projections, every
// head, the full feed-forward) and is not simulated in full. Jobs alternate
// between direct-cache and direct-memory access. Every result is checked.
module tb_mf_transformer;
  import mf_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  mf_gemm_bench #(.DTYPE(DT_INT32), .WORDS(1 << 20)) u_b (.*);

  initial begin
    repeat (8_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_b.checks, u_b.failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    u_b.run_job(128, 768, 768, 1'b0, 4096, "BERT-base Q projection");
    u_b.run_job(128, 128, 64, 1'b1, 4096, "BERT-base scores (1 head)");
    u_b.run_job(128, 64, 128, 1'b0, 4096, "BERT-base context (1 head)");
    u_b.run_job(128, 64, 3072, 1'b1, 2048, "BERT-base FFN down (64 columns)");
    u_b.run_job(208, 768, 768, 1'b1, 4096, "ViT-base Q projection");
    u_b.run_job(272, 272, 128, 1'b0, 4096, "ViT-huge scores (1 head)", 80);
    $display("TB_RESULT checks=%0d failures=%0d", u_b.checks, u_b.failures + (u_b.jobs == 6 ? 0 : 1));
    $finish;
  end
endmodule
