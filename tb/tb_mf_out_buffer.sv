// tb_mf_out_buffer: self-checking testbench for the 4 KB result buffer.
// All 64 rows of W = 16 32-bit results are written in a shuffled order;
// every 64 B beat is then read back and compared with the byte image
// (row r, column c at byte r*64 + c*4). A second pass overwrites one
// result slot (16 rows) and checks that only that slot changed.
module tb_mf_out_buffer;
  import mf_pkg::*;

  localparam int unsigned W = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic           wr_en = 1'b0;
  logic [5:0]     wr_row = '0, rd_beat = '0;
  logic [W*32-1:0] wr_data = '0;
  logic [511:0]   rd_data;

  mf_out_buffer #(.W(W)) dut (.clk, .wr_en, .wr_row, .wr_data, .rd_beat, .rd_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [31:0] img [1024];
  int order [64];

  task automatic check_all(input string tag);
    for (int b = 0; b < 64; b++) begin
      rd_beat = 6'(b);
      #1;
      for (int w = 0; w < 16; w++) check(rd_data[w*32 +: 32] == img[b*16 + w], $sformatf("%s beat %0d word %0d", tag, b, w));
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (img[i]) img[i] = $urandom;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    for (int n = 0; n < 64; n++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_row = 6'(order[n]);
      for (int c = 0; c < W; c++) wr_data[c*32 +: 32] = img[order[n] * W + c];
    end
    @(negedge clk);
    wr_en = 1'b0;
    check_all("first");
    // overwrite slot 2 (rows 32..47)
    for (int r = 32; r < 48; r++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_row = 6'(r);
      for (int c = 0; c < W; c++) begin
        img[r * W + c] = $urandom;
        wr_data[c*32 +: 32] = img[r * W + c];
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
    check_all("second");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
