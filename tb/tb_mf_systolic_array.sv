// tb_mf_systolic_array: self-checking testbench for the 16 x 16 systolic array
// (INT32 and INT8 builds). It streams random W x L blocks of A and of the
// transposed B column by column (one column per cycle, zeros otherwise),
// then reads every row and compares with W x W dot products computed here.
// It checks the latency: the results must be complete exactly L + 2W - 1
// cycles after the first column was presented and not one cycle earlier.
// A second block pair streamed right after the first, without clearing,
// checks that results accumulate across blocks; clr then zeroes the array.
module tb_mf_systolic_array;
  import mf_pkg::*;

  localparam int unsigned W = 16;
  localparam int unsigned L = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  always #50 clk = ~clk;   // long period: row reads below use #1 steps

  logic [W*32-1:0]    a32, b32;
  logic [W*8-1:0]     a8, b8;
  logic [3:0]         rd_row = '0;
  logic [W*ACC_W-1:0] rd32, rd8;

  mf_systolic_array #(.W(W), .DTYPE(DT_INT32)) u32 (.clk, .rst_n, .clr, .a_col(a32), .b_row(b32), .rd_row, .rd_data(rd32));
  mf_systolic_array #(.W(W), .DTYPE(DT_INT8))  u8  (.clk, .rst_n, .clr, .a_col(a8),  .b_row(b8),  .rd_row, .rd_data(rd8));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [31:0] A [2][W][L], B [2][W][L];
  logic [7:0]  A8 [W][L], B8 [W][L];
  logic [31:0] R [W][W], R1 [W][W], R8 [W][W];

  // compare all rows; returns number of mismatching elements
  task automatic compare(input bit use8, input bit one, output int bad);
    bad = 0;
    for (int r = 0; r < W; r++) begin
      rd_row = 4'(r);
      #1;
      for (int c = 0; c < W; c++) begin
        logic [31:0] exp, got;
        exp = use8 ? R8[r][c] : (one ? R1[r][c] : R[r][c]);
        got = use8 ? rd8[c*32 +: 32] : rd32[c*32 +: 32];
        if (got != exp) bad++;
      end
    end
  endtask

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    foreach (A[p, i, k]) begin A[p][i][k] = $urandom; B[p][i][k] = $urandom; end
    foreach (A8[i, k]) begin A8[i][k] = 8'($urandom); B8[i][k] = 8'($urandom); end
    foreach (R[i, j]) begin
      R[i][j] = 0; R1[i][j] = 0; R8[i][j] = 0;
      for (int k = 0; k < L; k++) begin
        R1[i][j] += A[0][i][k] * B[0][j][k];
        R8[i][j] += 32'($signed(A8[i][k]) * $signed(B8[j][k]));
      end
      R[i][j] = R1[i][j];
      for (int k = 0; k < L; k++) R[i][j] += A[1][i][k] * B[1][j][k];
    end
    a32 = '0; b32 = '0; a8 = '0; b8 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    // first block pair, INT32 and INT8 together
    for (int k = 0; k < L; k++) begin
      for (int i = 0; i < W; i++) begin
        a32[i*32 +: 32] = A[0][i][k]; b32[i*32 +: 32] = B[0][i][k];
        a8[i*8 +: 8] = A8[i][k];      b8[i*8 +: 8] = B8[i][k];
      end
      @(negedge clk);
    end
    a32 = '0; b32 = '0; a8 = '0; b8 = '0;
    // L cycles have passed since the first column; wait until L + 2W - 2
    repeat (2 * W - 2) @(negedge clk);
    compare(1'b0, 1'b1, bad);
    check(bad != 0, "results must not be complete one cycle early");
    @(negedge clk);
    compare(1'b0, 1'b1, bad);
    check(bad == 0, $sformatf("INT32 block after L+2W-1 cycles: %0d wrong", bad));
    compare(1'b1, 1'b0, bad);
    check(bad == 0, $sformatf("INT8 block: %0d wrong", bad));
    for (int r = 0; r < W; r++) begin
      rd_row = 4'(r);
      #1;
      for (int c = 0; c < W; c++) check(rd32[c*32 +: 32] == R1[r][c], $sformatf("C1[%0d][%0d]", r, c));
    end
    // second block pair accumulates on top (no clr)
    @(negedge clk);
    for (int k = 0; k < L; k++) begin
      for (int i = 0; i < W; i++) begin
        a32[i*32 +: 32] = A[1][i][k]; b32[i*32 +: 32] = B[1][i][k];
      end
      @(negedge clk);
    end
    a32 = '0; b32 = '0;
    repeat (2 * W) @(negedge clk);
    for (int r = 0; r < W; r++) begin
      rd_row = 4'(r);
      #1;
      for (int c = 0; c < W; c++) check(rd32[c*32 +: 32] == R[r][c], $sformatf("C2[%0d][%0d]", r, c));
    end
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    compare(1'b0, 1'b0, bad);
    for (int r = 0; r < W; r++) begin
      rd_row = 4'(r);
      #1;
      check(rd32 == '0 && rd8 == '0, "clr zeroes the array");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
