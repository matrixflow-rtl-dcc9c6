// tb_mf_fp_mac: self-checking testbench for the floating-point multiply-add
// (FP32 and FP16-operand builds). Random operands are compared with real
// arithmetic: the error must stay within 2^-20 of |a*b| + |c| (two
// truncations). Exact cases: a zero operand returns c unchanged, c = 0
// returns the product, and a*b + (-(a*b)) is exactly zero.
module tb_mf_fp_mac;

  logic [31:0] a, b, c, y;
  logic [15:0] ha, hb;
  logic [31:0] hy;

  mf_fp_mac #(.FP16(1'b0)) u32 (.a(a),  .b(b),  .c(c), .y(y));
  mf_fp_mac #(.FP16(1'b1)) u16 (.a(ha), .b(hb), .c(c), .y(hy));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic real absr(real x);
    return x < 0 ? -x : x;
  endfunction

  function automatic logic [31:0] rnd32();
    // normal numbers with exponents in 2^-20 .. 2^20
    return {1'($urandom), 8'($urandom_range(107, 147)), 23'($urandom)};
  endfunction

  function automatic logic [15:0] rnd16();
    return {1'($urandom), 5'($urandom_range(8, 22)), 10'($urandom)};
  endfunction

  // FP32 bits to real (normal numbers and zero)
  function automatic real f2r(logic [31:0] f);
    real m;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    for (int e = 127; e < int'(f[30:23]); e++) m = m * 2.0;
    for (int e = int'(f[30:23]); e < 127; e++) m = m / 2.0;
    return f[31] ? -m : m;
  endfunction

  function automatic real h2r(logic [15:0] h);
    real m;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    for (int e = 15; e < int'(h[14:10]); e++) m = m * 2.0;
    for (int e = int'(h[14:10]); e < 15; e++) m = m / 2.0;
    return h[15] ? -m : m;
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real ra, rb, rc, ry, exp, tol;
      a = rnd32(); b = rnd32(); c = rnd32();
      ha = rnd16(); hb = rnd16();
      #1;
      ra = f2r(a); rb = f2r(b); rc = f2r(c);
      exp = ra * rb + rc;
      ry  = f2r(y);
      tol = (absr(ra * rb) + absr(rc)) * 9.5367431640625e-07;
      check(absr(ry - exp) <= tol, $sformatf("fp32 %h*%h+%h = %h (%g, exp %g)", a, b, c, y, ry, exp));
      exp = h2r(ha) * h2r(hb) + rc;
      ry  = f2r(hy);
      tol = (absr(h2r(ha) * h2r(hb)) + absr(rc)) * 9.5367431640625e-07;
      check(absr(ry - exp) <= tol, $sformatf("fp16 %h*%h+%h = %h (%g, exp %g)", ha, hb, c, hy, ry, exp));
    end
    // exact cases
    for (int n = 0; n < 200; n++) begin
      a = 32'd0; b = rnd32(); c = rnd32(); #1;
      check(y == c, "zero operand returns c");
      a = rnd32(); c = 32'd0; #1;
      begin
        logic [31:0] p;
        p = y;
        c = {~p[31], p[30:0]}; #1;
        check(y == 32'd0, "exact cancellation gives zero");
        check(absr(f2r(p) - f2r(a) * f2r(b))
              <= absr(f2r(a) * f2r(b)) * 2.384185791015625e-07, "c = 0 gives the product");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
