// tb_out_packer: results of M bits must come out as one continuous bit stream cut
// into W-bit words (bit 0 first), under random back-pressure; a long stall must set
// the overflow flag.
module tb_out_packer;
  localparam int unsigned M = 200, W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid, out_ready = 0, overflow;
  logic [M-1:0] in_data = '0;
  logic [W-1:0] out_data;
  bit stream [$];
  int checks = 0, failures = 0, outw = 0;

  out_packer #(.M(M), .W(W)) dut (.*);

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      automatic logic [W-1:0] e;
      for (int i = 0; i < W; i++) e[i] = stream.pop_front();
      checks++;
      if (out_data !== e) begin failures++; if (failures < 4) $display("word %0d got %h exp %h", outw, out_data, e); end
      outw++;
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      @(negedge clk);
      in_valid = 1; in_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < M; i++) stream.push_back(in_data[i]);
      out_ready = 1'($urandom % 4 != 0);
      @(negedge clk); in_valid = 0;
      repeat (10) begin out_ready = 1'($urandom % 4 != 0); @(negedge clk); end
    end
    out_ready = 1;
    repeat (20) @(negedge clk);
    checks++; if (outw != 60 * M / W) begin failures++; $display("words %0d", outw); end
    checks++; if (overflow) failures++;
    // stall: third result while holding register and buffer are busy
    out_ready = 0;
    for (int r = 0; r < 3; r++) begin
      @(negedge clk); in_valid = 1; in_data = '1;
      @(negedge clk); in_valid = 0;
    end
    checks++; if (!overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
