// tb_stream_arbiter: four sources with random valid; every word must arrive once, in
// order per source, tagged with its source; with all sources busy the grant must
// rotate 0,1,2,3.
module tb_stream_arbiter;
  localparam int unsigned NCH = 4, W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NCH-1:0] in_valid = '0, in_ready;
  logic [NCH-1:0][W-1:0] in_data = '0;
  logic out_valid, out_ready = 0;
  logic [W-1:0] out_data;
  logic [1:0] out_ch;
  int sent [NCH], got [NCH];
  int checks = 0, failures = 0, prev_ch = -1, rot_checks = 0;
  logic all_busy = 0;

  stream_arbiter #(.NCH(NCH), .W(W)) dut (.*);

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== {8'(out_ch), 24'(got[out_ch])}) failures++;
      got[out_ch]++;
      if (all_busy && prev_ch >= 0) begin checks++; if (int'(out_ch) != (prev_ch + 1) % NCH) failures++; end
      prev_ch = int'(out_ch);
    end
    for (int c = 0; c < NCH; c++) if (in_valid[c] && in_ready[c]) sent[c]++;
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin sent[c] = 0; got[c] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      all_busy = (i >= 2000);
      for (int c = 0; c < NCH; c++) begin
        if (!in_valid[c] || in_ready[c]) in_valid[c] = all_busy ? 1'b1 : 1'($urandom % 3 == 0);
        in_data[c] = {8'(c), 24'(sent[c])};
      end
      out_ready = all_busy ? 1'b1 : 1'($urandom % 4 != 0);
    end
    @(negedge clk); in_valid = '0;
    repeat (3) @(negedge clk);
    for (int c = 0; c < NCH; c++) begin checks++; if (got[c] != sent[c] || got[c] < 100) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
