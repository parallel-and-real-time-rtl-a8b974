// tb_qrng_top: end-to-end run of the four-channel core at reduced matrix sizes
// (m = 129, n = 256/256/224/224, k = 32, b = 4); see qrng_top_env.
`timescale 1ns/1ps
module tb_qrng_top;
  logic done;
  int checks, failures;
  qrng_top_env #(.FULL(1'b0), .M(129), .N_CH('{256, 256, 224, 224}), .HASHES(8)) env (.*);
  always @(posedge done) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
