// lfsr: X-bit Fibonacci linear feedback shift register.
//
// Produces a new X-bit pseudo-random value every clock while en is high. The
// Toeplitz extractor divides the value range 0..2^X-1 into b equal intervals (2^X
// being a multiple of b) and uses the interval index to choose which stored seed the
// next hash uses. That role follows the published design; the feedback polynomials
// (maximal-length taps for the widths below, the X=16 default using
// x^16+x^14+x^13+x^11+1) and the non-zero reset seed are this design's choices.
module lfsr #(
  parameter int unsigned X        = 16,
  parameter logic [X-1:0] SEED    = X'(1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [X-1:0] value
);
  function automatic logic [X-1:0] taps();
    logic [63:0] t;
    case (X)
      3:  t = 64'h6;       4:  t = 64'hC;       5:  t = 64'h14;
      6:  t = 64'h30;      7:  t = 64'h60;      8:  t = 64'hB8;
      9:  t = 64'h110;     10: t = 64'h240;     11: t = 64'h500;
      12: t = 64'hE08;     13: t = 64'h1C80;    14: t = 64'h3802;
      15: t = 64'h6000;    16: t = 64'hB400;    20: t = 64'h90000;
      24: t = 64'hE10000;  32: t = 64'hA3000000;
      default: t = 64'h3 << (X - 2);
    endcase
    return t[X-1:0];
  endfunction

  localparam logic [X-1:0] TAPS = taps();

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  value <= (SEED == '0) ? X'(1) : SEED;
    else if (en) value <= {value[X-2:0], ^(value & TAPS)};
  end
endmodule
