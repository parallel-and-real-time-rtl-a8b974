// tb_seed_monitor: hash counting, threshold request, clear and saturation-free counting.
module tb_seed_monitor;
  localparam int unsigned CNT_W = 48;
  logic clk = 0, rst_n = 0, hash_done = 0, clear = 0;
  always #5 clk = ~clk;
  logic [CNT_W-1:0] threshold = 48'd5, count;
  logic update_req;
  int checks = 0, failures = 0;

  seed_monitor #(.CNT_W(CNT_W)) dut (.*);

  task automatic pulse(int n);
    repeat (n) begin @(negedge clk); hash_done = 1; @(negedge clk); hash_done = 0; end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 1; i <= 7; i++) begin
      pulse(1); checks++;
      if (count !== 48'(i) || update_req !== (i >= 5)) failures++;
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (count !== 0 || update_req) failures++;
    pulse(4); checks++; if (update_req) failures++;
    @(negedge clk); threshold = 48'd4; #1;
    checks++; if (!update_req) failures++;
    @(negedge clk); clear = 1; hash_done = 1; @(negedge clk); clear = 0; hash_done = 0;
    checks++; if (count !== 0) failures++;  // clear wins
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
