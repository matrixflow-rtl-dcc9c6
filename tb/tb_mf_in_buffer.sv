// tb_mf_in_buffer: self-checking testbench for the operand page buffer,
// built for INT32 (L = 64) and INT8 (L = 256). A random 4 KB page is written
// beat by beat in a shuffled order; every column k is then read and each
// element compared with the page image: element (row r, k) is at byte
// r*256 + k*(element bytes). It also checks the one-cycle read latency and
// that the output is zero the cycle after a cycle without a read.
module tb_mf_in_buffer;
  import mf_pkg::*;

  localparam int unsigned W = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         wr_en = 1'b0, rd_en = 1'b0;
  logic [5:0]   wr_beat = '0;
  logic [511:0] wr_data = '0;
  logic [7:0]   rd_k = '0;
  logic [W*32-1:0] col32;
  logic [W*8-1:0]  col8;

  mf_in_buffer #(.W(W), .DTYPE(DT_INT32)) u32 (.clk, .wr_en, .wr_beat, .wr_data, .rd_en, .rd_k(rd_k[5:0]), .rd_col(col32));
  mf_in_buffer #(.W(W), .DTYPE(DT_INT8))  u8  (.clk, .wr_en, .wr_beat, .wr_data, .rd_en, .rd_k(rd_k), .rd_col(col8));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [7:0] page [4096];
  int order [64];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (page[i]) page[i] = 8'($urandom);
    foreach (order[i]) order[i] = i;
    order.shuffle();
    for (int n = 0; n < 64; n++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_beat = 6'(order[n]);
      for (int b = 0; b < 64; b++) wr_data[b*8 +: 8] = page[order[n] * 64 + b];
    end
    @(negedge clk);
    wr_en = 1'b0;
    // INT8 build reads k = 0..255, INT32 build uses k[5:0]
    for (int k = 0; k < 256; k++) begin
      rd_en = 1'b1;
      rd_k  = 8'(k);
      @(negedge clk);
      for (int r = 0; r < W; r++) begin
        check(col8[r*8 +: 8] == page[r * 256 + k], $sformatf("INT8 r=%0d k=%0d", r, k));
        if (k < 64)
          check(col32[r*32 +: 32] == {page[r*256 + k*4 + 3], page[r*256 + k*4 + 2], page[r*256 + k*4 + 1], page[r*256 + k*4]},
                $sformatf("INT32 r=%0d k=%0d", r, k));
      end
    end
    rd_en = 1'b0;
    @(negedge clk);
    check(col32 == '0 && col8 == '0, "zero output when not read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
