// tb_toeplitz_acc: feeds tagged sub-products and checks the GF(2) sum of each group
// and the one-clock out_valid pulse after the last one.
module tb_toeplitz_acc;
  localparam int unsigned M = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [M-1:0] in_prod = '0;
  logic out_valid;
  logic [M-1:0] result;
  int checks = 0, failures = 0;

  toeplitz_acc #(.M(M)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 40; g++) begin
      automatic int len = 1 + ($urandom % 6);
      automatic logic [M-1:0] sum = '0;
      for (int i = 0; i < len; i++) begin
        automatic logic [M-1:0] p = {$urandom, $urandom};
        sum ^= p;
        @(negedge clk);
        in_valid = 1; in_prod = p; in_first = (i == 0); in_last = (i == len - 1);
        @(posedge clk); #1;
        checks++;
        if (out_valid !== (i == len - 1)) begin failures++; $display("ov g=%0d i=%0d", g, i); end
        if (i == len - 1) begin checks++; if (result !== sum) failures++; end
        if ($urandom % 3 == 0) begin  // bubble: nothing changes
          @(negedge clk); in_valid = 0; in_prod = '1;
          @(posedge clk); #1; checks++;
          if (out_valid || (i == len - 1 && result !== sum)) begin failures++; $display("bubble g=%0d i=%0d ov=%b", g, i, out_valid); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
