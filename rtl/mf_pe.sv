// mf_pe: one processing element (multiply-accumulate) of the systolic array.
// As drawn in the paper's PE detail: A_in and B_in are each captured in a
// register; the two registers feed the multiplier and are forwarded as A_out
// (to the right) and B_out (downwards); the product is added to the
// accumulator register, whose value is Sum_out. An operand presented on
// a_in/b_in in cycle t is in the product of cycle t+1 and in sum_out after
// the clock edge that ends cycle t+1.
// The data type is fixed at build time (one hardware design per type, as in
// the paper). This design's own choices: a 32-bit accumulator for every type
// (INT8/INT16 products sign-extended, INT32 wrapping modulo 2^32, FP16
// accumulated in FP32), a synchronous clear, and an asynchronous active-low
// reset.
module mf_pe
  import mf_pkg::*;
#(
  parameter dtype_e DTYPE = DT_INT32,
  localparam int unsigned EW = elem_bytes(DTYPE) * 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,      // zero the accumulator
  input  logic [EW-1:0]    a_in,
  input  logic [EW-1:0]    b_in,
  output logic [EW-1:0]    a_out,
  output logic [EW-1:0]    b_out,
  output logic [ACC_W-1:0] sum_out
);

  logic [EW-1:0]    a_r, b_r;
  logic [ACC_W-1:0] acc, acc_nxt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_r <= '0;
      b_r <= '0;
    end else begin
      a_r <= a_in;
      b_r <= b_in;
    end
  end

  if (DTYPE == DT_FP32 || DTYPE == DT_FP16) begin : g_fp
    mf_fp_mac #(.FP16(DTYPE == DT_FP16)) u_mac (
      .a(a_r), .b(b_r), .c(acc), .y(acc_nxt)
    );
  end else begin : g_int
    logic signed [2*EW-1:0] prod;
    assign prod    = $signed(a_r) * $signed(b_r);
    assign acc_nxt = acc + ACC_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else          acc <= acc_nxt;
  end

  assign a_out   = a_r;
  assign b_out   = b_r;
  assign sum_out = acc;

endmodule
