// tb_lfsr: checks the 16-bit register against an independent model of
// x^16+x^14+x^13+x^11+1, its maximal period 65535, and that en=0 holds the value.
module tb_lfsr;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  logic [15:0] value, model;
  int checks = 0, failures = 0;

  lfsr #(.X(16), .SEED(16'hACE1)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    checks++; if (value !== 16'hACE1) failures++;
    model = 16'hACE1;
    @(negedge clk); en = 1;
    for (int i = 1; i <= 65535; i++) begin
      @(posedge clk); #1;
      model = {model[14:0], model[15] ^ model[13] ^ model[12] ^ model[10]};
      if (value !== model) failures++;
      if (value == 16'hACE1 && i != 65535) begin failures++; $display("short period %0d", i); end
      if (value == 0) failures++;
      if (i % 1000 == 0) checks++;
    end
    checks++; if (value !== 16'hACE1) failures++;  // back to the start after 2^16-1 steps
    @(negedge clk); en = 0;
    repeat (3) @(posedge clk); #1;
    checks++; if (value !== 16'hACE1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
