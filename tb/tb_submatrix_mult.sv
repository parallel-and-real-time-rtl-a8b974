// tb_submatrix_mult: checks one sub-matrix product against the Toeplitz matrix
// written out entry by entry (row i, column c holds seed bit s_{m-i+c}, 1-based).
module tb_submatrix_mult;
  localparam int unsigned M = 25, K = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [M+K-2:0] u;
  logic [K-1:0] d;
  logic out_valid, out_first, out_last;
  logic [M-1:0] prod;
  int checks = 0, failures = 0;

  submatrix_mult #(.M(M), .K(K)) dut (.*);

  function automatic logic [M-1:0] ref_prod(logic [M+K-2:0] s, logic [K-1:0] dd);
    logic [M-1:0] a = '0;
    // a_i (i = 1..M, top row first) = XOR_c T[i][c] & d_c, T[i][c] = s_{M-i+c}
    for (int i = 1; i <= M; i++) begin
      logic acc = 0;
      for (int c = 1; c <= K; c++) acc ^= s[M - i + c - 1] & dd[c-1];
      a[M - i] = acc;  // row i is output bit M-i
    end
    return a;
  endfunction

  initial begin
    u = '0; d = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [M+K-2:0] su; logic [K-1:0] sd; logic f, l;
      su = {$urandom, $urandom}; sd = 8'($urandom);
      if (n == 0) sd = 8'h01;
      if (n == 1) sd = 8'h80;
      f = 1'($urandom); l = 1'($urandom);
      @(negedge clk);
      u = su; d = sd; in_valid = 1; in_first = f; in_last = l;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || prod !== ref_prod(su, sd) || out_first !== f || out_last !== l) begin
        failures++;
        if (failures < 5) $display("mismatch n=%0d got %h exp %h", n, prod, ref_prod(su, sd));
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1; checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
