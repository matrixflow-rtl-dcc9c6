// mf_fp_mac: combinational floating-point multiply-add y = a*b + c for the
// FP32 and FP16 versions of the processing element.
// The operands a and b are FP32, or FP16 when FP16 = 1 (they are widened to
// FP32 exactly); the addend c and the result y are FP32, so FP16 products are
// accumulated in FP32. The paper gives only that dedicated FP32 and FP16 MAC
// hardware exists; everything below is this design's own minimal choice:
// results are truncated (round toward zero), subnormal inputs and results
// are flushed to zero, overflow saturates to infinity, NaN is not produced.
module mf_fp_mac #(
  parameter bit FP16 = 1'b0,
  localparam int unsigned EW = FP16 ? 16 : 32
) (
  input  logic [EW-1:0] a,
  input  logic [EW-1:0] b,
  input  logic [31:0]   c,
  output logic [31:0]   y
);

  // FP16 -> FP32 widening (subnormals to zero).
  function automatic logic [31:0] widen(input logic [EW-1:0] x);
    logic [31:0] r;
    if (EW == 32) begin
      r = 32'(x);
    end else begin
      if (x[14:10] == 5'd0)       r = {x[15], 31'd0};
      else if (x[14:10] == 5'h1f) r = {x[15], 8'hff, x[9:0], 13'd0};
      else                        r = {x[15], 8'(x[14:10]) + 8'd112, x[9:0], 13'd0};
    end
    return r;
  endfunction

  logic [31:0] fa, fb;
  assign fa = widen(a);
  assign fb = widen(b);

  // ---- multiply ----
  logic        ps;       // product sign
  logic        pz;       // product is zero
  logic signed [10:0] pe;  // product exponent (biased)
  logic [23:0] pm;       // product mantissa with hidden one
  logic [47:0] mprod;

  always_comb begin
    ps    = fa[31] ^ fb[31];
    pz    = (fa[30:23] == 8'd0) || (fb[30:23] == 8'd0);
    mprod = {1'b1, fa[22:0]} * {1'b1, fb[22:0]};
    pe    = 11'(fa[30:23]) + 11'(fb[30:23]) - 11'sd127;
    if (mprod[47]) begin
      pm = mprod[47:24];
      pe = pe + 11'sd1;
    end else begin
      pm = mprod[46:23];
    end
    if (pe <= 0) pz = 1'b1;
    if (pe >= 255) begin
      pe = 11'sd255;
      pm = 24'h800000;
    end
  end

  // ---- add ----
  logic        cs, cz;
  logic [7:0]  ce;
  logic [23:0] cm;
  logic        bs;
  logic [7:0]  be, se;
  logic [26:0] bm, sm;   // 24-bit mantissa + 3 guard bits
  logic [27:0] sum;
  logic [7:0]  d;
  logic signed [10:0] re;
  logic [4:0]  lz;

  always_comb begin
    cs = c[31];
    cz = (c[30:23] == 8'd0);
    ce = c[30:23];
    cm = {1'b1, c[22:0]};
    y  = 32'd0;
    bs = 1'b0; be = 8'd0; se = 8'd0; bm = '0; sm = '0; sum = '0; d = 8'd0; re = '0; lz = '0;
    if (pz && cz) begin
      y = 32'd0;
    end else if (pz) begin
      y = c;
    end else if (cz || pe == 255) begin
      y = {ps, pe[7:0], pm[22:0]};
    end else if (ce == 8'hff) begin
      y = c;
    end else begin
      // order by magnitude
      if ({pe[7:0], pm} >= {ce, cm}) begin
        bs = ps; be = pe[7:0]; bm = {pm, 3'b0}; se = ce; sm = {cm, 3'b0};
      end else begin
        bs = cs; be = ce; bm = {cm, 3'b0}; se = pe[7:0]; sm = {pm, 3'b0};
      end
      d  = be - se;
      sm = (d > 8'd26) ? 27'd0 : (sm >> d);
      sum = (ps == cs) ? ({1'b0, bm} + {1'b0, sm}) : ({1'b0, bm} - {1'b0, sm});
      re  = 11'(be);
      if (sum == 28'd0) begin
        y = 32'd0;
      end else begin
        if (sum[27]) begin
          sum = sum >> 1;
          re  = re + 11'sd1;
        end else begin
          lz = 5'd0;
          for (int i = 26; i >= 0; i--) begin
            if (sum[i]) break;
            lz = lz + 5'd1;
          end
          sum = sum << lz;
          re  = re - 11'(lz);
        end
        if (re <= 0)        y = 32'd0;
        else if (re >= 255) y = {bs, 8'hff, 23'd0};
        else                y = {bs, re[7:0], sum[25:3]};
      end
    end
  end

endmodule
