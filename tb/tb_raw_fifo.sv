// tb_raw_fifo: 16-bit samples at 250 MHz in, 32-bit words at 125 MHz out; every word
// must be {sample 2i+1, sample 2i} in order, one word per processing clock on
// average, no overflow at matched rates; a stalled ADC valid must only delay words.
`timescale 1ns/1ps
module tb_raw_fifo;
  logic adc_clk = 0, clk = 0, adc_rst_n = 0, rst_n = 0;
  always #2 adc_clk = ~adc_clk;
  always #4 clk = ~clk;
  logic [15:0] adc_data = '0;
  logic adc_valid = 0, overflow, rd_valid;
  logic [31:0] rd_data;
  logic [15:0] sent [$];
  int checks = 0, failures = 0, words = 0, samples = 0;

  raw_fifo #(.A(16), .K(32), .DEPTH(16)) dut (.*);

  always @(posedge clk) begin
    #0.1;
    if (rd_valid) begin
      automatic logic [15:0] lo = sent.pop_front();
      automatic logic [15:0] hi = sent.pop_front();
      checks++;
      if (rd_data !== {hi, lo}) begin failures++; if (failures < 5) $display("word %0d got %h exp %h%h", words, rd_data, hi, lo); end
      words++;
    end
  end

  initial begin
    #10 adc_rst_n = 1; rst_n = 1;
    // continuous samples for 4000 ADC clocks
    for (int i = 0; i < 4000; i++) begin
      @(negedge adc_clk);
      adc_valid = ($urandom % 8 != 0) || (i < 2000);
      adc_data = 16'($urandom);
      if (adc_valid) begin sent.push_back(adc_data); samples++; end
    end
    @(negedge adc_clk); adc_valid = 0;
    #200;
    checks++; if (words != samples / 2) begin failures++; $display("words %0d samples %0d", words, samples); end
    checks++; if (overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
