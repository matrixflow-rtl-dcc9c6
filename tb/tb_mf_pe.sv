// tb_mf_pe: self-checking testbench for the processing element.
// Three PEs (INT32, INT16, INT8) and one FP32 PE receive random operand
// streams. The checks: A and B are forwarded after exactly one cycle; the
// accumulator holds the sum of all products presented up to two cycles
// earlier (one cycle in the operand registers, one in the accumulator);
// clr zeroes it. Integer references are computed here with 32-bit wrap, the
// FP32 reference with real arithmetic and a tolerance of 1e-5 of the sum of
// the magnitudes of the products (truncating adder).
module tb_mf_pe;
  import mf_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] a32, b32, ao32, bo32, s32;
  logic [15:0] a16, b16, ao16, bo16;
  logic [7:0]  a8, b8, ao8, bo8;
  logic [31:0] s16, s8;
  logic [31:0] af, bf, aof, bof, sf;

  mf_pe #(.DTYPE(DT_INT32)) u32 (.clk, .rst_n, .clr, .a_in(a32), .b_in(b32), .a_out(ao32), .b_out(bo32), .sum_out(s32));
  mf_pe #(.DTYPE(DT_INT16)) u16 (.clk, .rst_n, .clr, .a_in(a16), .b_in(b16), .a_out(ao16), .b_out(bo16), .sum_out(s16));
  mf_pe #(.DTYPE(DT_INT8))  u8  (.clk, .rst_n, .clr, .a_in(a8),  .b_in(b8),  .a_out(ao8),  .b_out(bo8),  .sum_out(s8));
  mf_pe #(.DTYPE(DT_FP32))  uf  (.clk, .rst_n, .clr, .a_in(af),  .b_in(bf),  .a_out(aof),  .b_out(bof),  .sum_out(sf));

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // FP32 bits to real (normal numbers and zero)
  function automatic real f2r(logic [31:0] f);
    real m;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    for (int e = 127; e < int'(f[30:23]); e++) m = m * 2.0;
    for (int e = int'(f[30:23]); e < 127; e++) m = m / 2.0;
    return f[31] ? -m : m;
  endfunction

  localparam int N = 200;
  logic [31:0] x32 [N], y32 [N];
  logic [15:0] x16 [N], y16 [N];
  logic [7:0]  x8  [N], y8  [N];
  logic [31:0] xf  [N], yf  [N];
  logic [31:0] r32 [N+2], r16 [N+2], r8 [N+2];   // expected sum after product n landed
  real         rf  [N+2], mf [N+2];   // FP reference and sum of |products|

  initial begin
    // watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a32 = 0; b32 = 0; a16 = 0; b16 = 0; a8 = 0; b8 = 0; af = 0; bf = 0;
    for (int n = 0; n < N; n++) begin
      x32[n] = $urandom; y32[n] = $urandom;
      x16[n] = 16'($urandom); y16[n] = 16'($urandom);
      x8[n]  = 8'($urandom);  y8[n]  = 8'($urandom);
      xf[n]  = {1'($urandom), 8'($urandom_range(120, 134)), 23'($urandom)};
      yf[n]  = {1'($urandom), 8'($urandom_range(120, 134)), 23'($urandom)};
    end
    r32[0] = 0; r16[0] = 0; r8[0] = 0; rf[0] = 0.0; mf[0] = 0.0;
    for (int n = 0; n < N; n++) begin
      r32[n+1] = r32[n] + 32'($signed(x32[n]) * $signed(y32[n]));
      r16[n+1] = r16[n] + 32'($signed(x16[n]) * $signed(y16[n]));
      r8[n+1]  = r8[n]  + 32'($signed(x8[n])  * $signed(y8[n]));
      rf[n+1]  = rf[n]  + f2r(xf[n]) * f2r(yf[n]);
      mf[n+1]  = mf[n]  + ((f2r(xf[n]) * f2r(yf[n]) < 0) ? -f2r(xf[n]) * f2r(yf[n]) : f2r(xf[n]) * f2r(yf[n]));
    end

    r32[N+1] = r32[N]; r16[N+1] = r16[N]; r8[N+1] = r8[N]; rf[N+1] = rf[N]; mf[N+1] = mf[N];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(s32 == 0 && s8 == 0 && sf == 0, "reset clears accumulators");

    for (int n = 0; n < N + 2; n++) begin
      if (n < N) begin
        a32 = x32[n]; b32 = y32[n]; a16 = x16[n]; b16 = y16[n]; a8 = x8[n]; b8 = y8[n];
        af = xf[n]; bf = yf[n];
      end else begin
        a32 = 0; b32 = 0; a16 = 0; b16 = 0; a8 = 0; b8 = 0; af = 0; bf = 0;
      end
      @(negedge clk);
      // operand n is now in the registers; products up to n-1 are accumulated
      if (n < N) begin
        check(ao32 == x32[n] && bo32 == y32[n], $sformatf("INT32 forward n=%0d", n));
        check(ao16 == x16[n] && bo16 == y16[n], $sformatf("INT16 forward n=%0d", n));
        check(ao8 == x8[n] && bo8 == y8[n], $sformatf("INT8 forward n=%0d", n));
        check(aof == xf[n] && bof == yf[n], $sformatf("FP32 forward n=%0d", n));
      end
      check(s32 == r32[n], $sformatf("INT32 sum n=%0d got %h exp %h", n, s32, r32[n]));
      check(s16 == r16[n], $sformatf("INT16 sum n=%0d got %h exp %h", n, s16, r16[n]));
      check(s8 == r8[n], $sformatf("INT8 sum n=%0d got %h exp %h", n, s8, r8[n]));
      begin
        real got, err;
        got = f2r(sf);
        err = got - rf[n];
        if (err < 0) err = -err;
        check(err <= mf[n] * 1.0e-5 && (n < 2 || got != 0.0),
              $sformatf("FP32 sum n=%0d got %f exp %f", n, got, rf[n]));
      end
    end
    check(s32 == r32[N] && s8 == r8[N], "final sums");

    // clear
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    check(s32 == 0 && s16 == 0 && s8 == 0 && sf == 0, "clr zeroes accumulators");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
