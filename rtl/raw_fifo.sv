// raw_fifo: ADC sample packer and clock-domain-crossing FIFO for one channel.
//
// The ADC delivers one A-bit sample per ADC clock (rate C). The Toeplitz pipeline
// consumes one K-bit raw word per processing clock (rate J), with K = C*A/J. This
// block collects K/A consecutive samples into a K-bit word in the ADC clock domain
// (first sample in the least significant bits), writes that word into a Gray-code
// asynchronous FIFO and presents it in the processing clock domain as a valid-only
// stream (the consumer always takes a word the cycle it is valid).
// The use of a FIFO for this rate/width conversion follows the published design;
// the packing order, FIFO depth, two-flop synchronisers and the drop-on-full
// behaviour with a sticky overflow flag are this design's own choices.
// Timing: a word is visible at rd_valid about three processing clocks after its last
// sample is written.
module raw_fifo #(
  parameter int unsigned A     = 16,
  parameter int unsigned K     = 32,
  parameter int unsigned DEPTH = 16   // power of two
) (
  input  logic         adc_clk,
  input  logic         adc_rst_n,
  input  logic [A-1:0] adc_data,
  input  logic         adc_valid,
  output logic         overflow,     // adc_clk domain, sticky
  input  logic         clk,
  input  logic         rst_n,
  output logic         rd_valid,
  output logic [K-1:0] rd_data
);
  localparam int unsigned SPW = K / A;                 // samples per word
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned SW  = (SPW <= 2) ? 1 : $clog2(SPW);

  // ---------------- write side (ADC clock) ----------------
  logic [K-1:0]   pack_q;
  logic [SW-1:0]  slot_q;
  logic           word_done;
  logic [K-1:0]   word_next;
  logic [AW:0]    wptr_bin, wptr_gray, rptr_gray_w1, rptr_gray_w2;
  logic [K-1:0]   mem [DEPTH];

  always_comb begin
    word_next = pack_q;
    word_next[slot_q*A +: A] = adc_data;
    word_done = adc_valid && (slot_q == SW'(SPW-1));
  end

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  logic full_w;
  assign full_w = (wptr_gray == {~rptr_gray_w2[AW:AW-1], rptr_gray_w2[AW-2:0]});

  always_ff @(posedge adc_clk or negedge adc_rst_n) begin
    if (!adc_rst_n) begin
      pack_q    <= '0;
      slot_q    <= '0;
      wptr_bin  <= '0;
      wptr_gray <= '0;
      overflow  <= 1'b0;
    end else if (adc_valid) begin
      pack_q <= word_next;
      slot_q <= word_done ? '0 : slot_q + 1'b1;
      if (word_done) begin
        if (full_w) begin
          overflow <= 1'b1;
        end else begin
          wptr_bin  <= wptr_bin + 1'b1;
          wptr_gray <= bin2gray(wptr_bin + 1'b1);
        end
      end
    end
  end

  always_ff @(posedge adc_clk) begin
    if (adc_valid && word_done && !full_w) mem[wptr_bin[AW-1:0]] <= word_next;
  end

  // ---------------- read side (processing clock) ----------------
  logic [AW:0] rptr_bin, rptr_gray, wptr_gray_r1, wptr_gray_r2;
  logic        empty;
  assign empty = (rptr_gray == wptr_gray_r2);

  always_ff @(posedge adc_clk or negedge adc_rst_n) begin
    if (!adc_rst_n) begin
      rptr_gray_w1 <= '0;
      rptr_gray_w2 <= '0;
    end else begin
      rptr_gray_w1 <= rptr_gray;
      rptr_gray_w2 <= rptr_gray_w1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr_gray_r1 <= '0;
      wptr_gray_r2 <= '0;
      rptr_bin     <= '0;
      rptr_gray    <= '0;
      rd_valid     <= 1'b0;
      rd_data      <= '0;
    end else begin
      wptr_gray_r1 <= wptr_gray;
      wptr_gray_r2 <= wptr_gray_r1;
      rd_valid     <= !empty;
      if (!empty) begin
        rd_data   <= mem[rptr_bin[AW-1:0]];
        rptr_bin  <= rptr_bin + 1'b1;
        rptr_gray <= bin2gray(rptr_bin + 1'b1);
      end
    end
  end

  initial begin
    assert (K % A == 0) else $error("raw_fifo: K must be a multiple of A");
    assert ((1 << AW) == DEPTH) else $error("raw_fifo: DEPTH must be a power of two");
  end
endmodule
