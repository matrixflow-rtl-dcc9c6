// mf_systolic_array: W x W output-stationary grid of mf_pe processing elements
// (16 x 16 in the paper).
// Each cycle the caller presents one column of the A block (a_col: element i
// for array row i) and the matching column of the transposed B block (b_row:
// element j for array column j), both for the same k. Row i of A and column j
// of B are delayed by i and j cycles respectively in triangular skew
// registers, so that A[i][k] and B[j][k] meet in PE(i,j) and that PE
// accumulates sum_k A[i][k] * B[j][k]. A flows right and B flows down through
// the PE registers, as in the paper's figures.
// Timing: the k-th pair presented in cycle t0+k has been accumulated by every
// PE by cycle t0+k+2W-1, so after a block of L columns the results can be read
// from cycle t0+L+2W-1 on. Idle cycles must present zeros (they add nothing).
// Read-out: rd_row selects one row of W 32-bit accumulators (64 B for W = 16)
// combinationally; the skew registers, the zero-fill convention and the row
// read-out are this design's own choices, the paper only draws an arrow from
// the array to buffer C.
module mf_systolic_array
  import mf_pkg::*;
#(
  parameter int unsigned W     = 16,
  parameter dtype_e      DTYPE = DT_INT32,
  localparam int unsigned EW   = elem_bytes(DTYPE) * 8,
  localparam int unsigned RW   = (W > 1) ? $clog2(W) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,      // zero every accumulator
  input  logic [W*EW-1:0]      a_col,    // A[0..W-1][k]
  input  logic [W*EW-1:0]      b_row,    // B[0..W-1][k] (B transposed)
  input  logic [RW-1:0]        rd_row,
  output logic [W*ACC_W-1:0]   rd_data   // {PE(r,W-1) .. PE(r,0)}
);

  // a_h[i][j] is the A input of PE(i,j); a_h[i][W] leaves the array.
  logic [EW-1:0]    a_h [W][W+1];
  logic [EW-1:0]    b_v [W+1][W];
  logic [ACC_W-1:0] sums [W][W];

  // Input skew: row/column n is delayed by n registers.
  for (genvar n = 0; n < W; n++) begin : g_skew
    if (n == 0) begin : g_direct
      assign a_h[0][0] = a_col[0 +: EW];
      assign b_v[0][0] = b_row[0 +: EW];
    end else begin : g_delay
      logic [EW-1:0] a_d [n];
      logic [EW-1:0] b_d [n];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < n; s++) begin
            a_d[s] <= '0;
            b_d[s] <= '0;
          end
        end else begin
          a_d[0] <= a_col[n*EW +: EW];
          b_d[0] <= b_row[n*EW +: EW];
          for (int s = 1; s < n; s++) begin
            a_d[s] <= a_d[s-1];
            b_d[s] <= b_d[s-1];
          end
        end
      end
      assign a_h[n][0] = a_d[n-1];
      assign b_v[0][n] = b_d[n-1];
    end
  end

  for (genvar i = 0; i < W; i++) begin : g_row
    for (genvar j = 0; j < W; j++) begin : g_col
      mf_pe #(.DTYPE(DTYPE)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .clr    (clr),
        .a_in   (a_h[i][j]),
        .b_in   (b_v[i][j]),
        .a_out  (a_h[i][j+1]),
        .b_out  (b_v[i+1][j]),
        .sum_out(sums[i][j])
      );
    end
  end

  always_comb begin
    for (int j = 0; j < W; j++) rd_data[j*ACC_W +: ACC_W] = sums[rd_row][j];
  end

endmodule
