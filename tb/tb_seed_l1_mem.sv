// tb_seed_l1_mem: random writes and reads against a model array; read latency 1.
module tb_seed_l1_mem;
  localparam int unsigned K = 32, DEPTH = 524, AW = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wea = 0, rea = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [K-1:0] din = '0, dout;
  logic [K-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  seed_l1_mem #(.K(K), .DEPTH(DEPTH)) dut (.*);

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wea = 1; waddr = AW'(a); din = $urandom; model[a] = din;
    end
    @(negedge clk); wea = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom % DEPTH;
      automatic logic [K-1:0] prev = dout;
      @(negedge clk);
      rea = 1; raddr = AW'(a);
      wea = 1'($urandom); waddr = AW'($urandom % DEPTH); din = $urandom;
      @(posedge clk); #1;
      checks++; if (dout !== model[a]) failures++;
      if (wea) model[waddr] = din;
      @(negedge clk); rea = 0; wea = 0; prev = dout;
      @(posedge clk); #1;
      checks++; if (dout !== prev) failures++;  // no read enable: output holds
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
