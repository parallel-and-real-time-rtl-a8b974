// out_packer: gearbox from m-bit hash results to W-bit DMA words for one channel.
//
// Each hash result is an m-bit vector (m = 1729 is not a multiple of any bus width),
// so results are concatenated into one continuous bit stream, bit 0 first, and cut
// into W-bit words. A one-deep holding register takes a new result; it moves into the
// bit buffer when fewer than W bits are left there; one W-bit word leaves per clock
// while at least W bits are buffered and out_ready is high. A result that arrives
// while the holding register is still full is dropped and sets the sticky overflow
// flag (this happens only when the DMA is stalled for longer than one hash). The
// whole block is this design's own choice for the "write random numbers to DDR3" path.
// Requires M >= W.
module out_packer #(
  parameter int unsigned M = 1729,
  parameter int unsigned W = 128,
  localparam int unsigned BUFW = M + W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [M-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready,
  output logic         overflow
);
  localparam int unsigned CW = $clog2(BUFW + 1);

  logic [M-1:0]    hold_q;
  logic            hold_v;
  logic [BUFW-1:0] buf_q;
  logic [CW-1:0]   cnt_q;
  logic            pop, load;

  assign out_valid = (cnt_q >= CW'(W));
  assign out_data  = buf_q[W-1:0];
  assign pop       = out_valid && out_ready;
  assign load      = hold_v && (cnt_q < CW'(W));  // cnt < W here, so no pop this clock

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_q <= '0; hold_v <= 1'b0; buf_q <= '0; cnt_q <= '0; overflow <= 1'b0;
    end else begin
      if (load) begin
        buf_q <= (buf_q & ((BUFW'(1) << cnt_q) - 1'b1)) | (BUFW'(hold_q) << cnt_q);
        cnt_q <= cnt_q + CW'(M);
      end else if (pop) begin
        buf_q <= buf_q >> W;
        cnt_q <= cnt_q - CW'(W);
      end
      if (in_valid) begin
        if (hold_v && !load) overflow <= 1'b1;
        else begin hold_q <= in_data; hold_v <= 1'b1; end
      end else if (load) begin
        hold_v <= 1'b0;
      end
    end
  end

  initial assert (M >= W) else $error("out_packer: M must be at least W");
endmodule
