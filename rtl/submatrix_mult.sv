// submatrix_mult: one m x k Toeplitz sub-matrix times k raw bits, in one clock.
//
// The sub-seed u (m+k-1 bits, u[0] = first seed bit of this sub-matrix) defines an
// m x k Toeplitz sub-matrix whose column j holds bits u[j] .. u[j+m-1]. Output bit r
// is the GF(2) dot product of row r with the k raw bits:
//     prod[r] = XOR_{j=0..k-1} ( u[r+j] AND d[j] )
// i.e. k one-bit multipliers (AND) and a chain of k-1 one-bit adders (XOR) per row,
// m rows in parallel. Row r here is row m-r of the matrix as printed top-down
// (the bottom row, r = 0, uses u[0..k-1]). The AND/XOR structure and the column
// construction follow the published design; registering the product at the end of
// the cycle is this design's choice of stage boundary.
// Timing: in_valid/u/d sampled on a clock edge appear on out_valid/prod after it.
module submatrix_mult #(
  parameter int unsigned M = 1729,
  parameter int unsigned K = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [M+K-2:0]   u,
  input  logic [K-1:0]     d,
  output logic             out_valid,
  output logic             out_first,
  output logic             out_last,
  output logic [M-1:0]     prod
);
  logic [M-1:0] prod_c;

  always_comb begin
    prod_c = '0;
    for (int unsigned j = 0; j < K; j++)
      prod_c ^= u[j +: M] & {M{d[j]}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0; prod <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      if (in_valid) prod <= prod_c;
    end
  end
endmodule
