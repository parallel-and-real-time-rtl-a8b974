// seed_l1_mem: first-level seed memory of one channel.
//
// Holds b raw Toeplitz seeds of m+n-1 bits each, stored as K-bit words: width K,
// depth b*(m+n-1)/K, seed y occupying words y*(m+n-1)/K .. (y+1)*(m+n-1)/K - 1 with
// seed bit s_1 in bit 0 of its first word. The host writes new seeds through the
// write port (din, wea, waddr); the sub-seed controller reads it through the read
// port (raddr, dout). The width, depth and port names follow the published design;
// the simple-dual-port organisation with a one-cycle registered read is this
// design's choice (it maps to a block RAM).
module seed_l1_mem #(
  parameter int unsigned K     = 32,
  parameter int unsigned DEPTH = 524,
  localparam int unsigned AW   = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wea,
  input  logic [AW-1:0] waddr,
  input  logic [K-1:0]  din,
  input  logic          rea,
  input  logic [AW-1:0] raddr,
  output logic [K-1:0]  dout
);
  logic [K-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wea && 32'(waddr) < DEPTH) mem[waddr] <= din;
    if (rea) dout <= mem[raddr];
  end
endmodule
