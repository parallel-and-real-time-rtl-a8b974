// toeplitz_acc: m one-bit accumulators that sum sub-matrix products over GF(2).
//
// Each bit is the one-bit accumulator cell: a register whose next value is chosen by
// a 2:1 multiplexer between the incoming bit (first sub-product of a hash) and the
// incoming bit XOR the register (every later sub-product). After the n/k-th
// sub-product of a hash the register holds the m-bit hash result; out_valid pulses
// for one clock with result = that value. The cell structure follows the published
// design; the first/last tagging that drives the multiplexer is this design's choice.
// Timing: result is valid the clock after the sub-product tagged in_last arrives.
module toeplitz_acc #(
  parameter int unsigned M = 1729
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         in_first,
  input  logic         in_last,
  input  logic [M-1:0] in_prod,
  output logic         out_valid,
  output logic [M-1:0] result
);
  logic [M-1:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) q <= in_first ? in_prod : (in_prod ^ q);
    end
  end

  assign result = q;
endmodule
