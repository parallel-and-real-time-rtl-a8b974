// tb_qrng_top_full: the end-to-end scenario of qrng_top_env with the core at its
// default sizes (m = 1729, n = 2464/2464/2432/2432, k = 32, b = 4).
`timescale 1ns/1ps
module tb_qrng_top_full;
  logic done;
  int checks, failures;
  qrng_top_env #(.FULL(1'b1), .M(1729), .N_CH('{2464, 2464, 2432, 2432}), .HASHES(3)) env (.*);
  always @(posedge done) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #50ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
