// seed_l2_mem: second-level (sub-seed) memory of one channel.
//
// Each word is one sub-seed of m+k-1 bits, the seed of one m x k Toeplitz
// sub-matrix. Depth b*n/k: the n/k sub-seeds of seed y sit at addresses
// y*n/k .. y*n/k + n/k - 1. The write port has one enable bit per byte, so the
// sub-seed controller can fill one k-bit slice of a word at a time while the data
// bus carries the same k-bit word replicated across all slices. The read port feeds
// the Toeplitz pipeline, one sub-seed per clock, registered (one-cycle latency),
// gated by rea. Width, depth and the byte enables follow the published design; the
// simple-dual-port organisation is this design's choice.
module seed_l2_mem #(
  parameter int unsigned WIDTH = 1760,  // m+k-1, a multiple of 8
  parameter int unsigned DEPTH = 308,   // b*n/k
  localparam int unsigned AW   = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned NBE  = WIDTH / 8
) (
  input  logic             clk,
  input  logic [NBE-1:0]   wea,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] din,
  input  logic             rea,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < NBE; i++)
      if (wea[i] && 32'(waddr) < DEPTH) mem[waddr][i*8 +: 8] <= din[i*8 +: 8];
    if (rea) dout <= mem[raddr];
  end

  initial assert (WIDTH % 8 == 0) else $error("seed_l2_mem: WIDTH must be a multiple of 8");
endmodule
