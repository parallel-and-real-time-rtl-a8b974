// tb_seed_l2_mem: byte-enable writes and registered reads against a model.
module tb_seed_l2_mem;
  localparam int unsigned WIDTH = 64, DEPTH = 12, AW = 4, NBE = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NBE-1:0] wea = '0;
  logic rea = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] din = '0, dout;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  seed_l2_mem #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wea = '1; waddr = AW'(a); din = {$urandom, $urandom}; model[a] = din;
    end
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom % DEPTH;
      @(negedge clk);
      wea = NBE'($urandom); waddr = AW'(a); din = {$urandom, $urandom};
      rea = 0;
      for (int b = 0; b < NBE; b++) if (wea[b]) model[a][b*8 +: 8] = din[b*8 +: 8];
      @(negedge clk);
      wea = '0; rea = 1; raddr = AW'(a);
      @(posedge clk); #1;
      checks++; if (dout !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
