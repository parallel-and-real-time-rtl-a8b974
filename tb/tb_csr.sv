// tb_csr: register writes and reads, start pulses, sticky seeds-ready and the
// status and counter read-back.
module tb_csr;
  localparam int unsigned NCH = 4, CNT_W = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0; logic [5:0] waddr = '0, raddr = '0; logic [31:0] wdata = '0, rdata;
  logic [NCH-1:0] gen_start, seeds_ready;
  logic extract_en; logic [CNT_W-1:0] threshold;
  logic [NCH-1:0] gen_busy = '0, gen_done = '0, update_req = '0, pack_ovf = '0, fifo_ovf = '0;
  logic dma_err = 0; logic [31:0] dma_ptr = 32'h1234_5670;
  logic [NCH-1:0][CNT_W-1:0] hash_cnt;
  int checks = 0, failures = 0;

  csr #(.NCH(NCH), .CNT_W(CNT_W)) dut (.*);

  task automatic wr(int r, logic [31:0] v);
    @(negedge clk); we = 1; waddr = 6'(r); wdata = v; @(negedge clk); we = 0;
  endtask
  task automatic rd(int r, output logic [31:0] v);
    raddr = 6'(r); #1; v = rdata;
  endtask

  initial begin
    logic [31:0] v;
    for (int c = 0; c < NCH; c++) hash_cnt[c] = 48'(c * 1000 + 7);
    repeat (2) @(posedge clk); rst_n = 1;
    checks++; if (threshold != 48'd140_259_740_260 || extract_en || gen_start != 0) failures++;
    @(negedge clk); we = 1; waddr = 6'd0; wdata = 32'h0000_0105;
    @(posedge clk); #1;
    checks++; if (gen_start != 4'b0101 || !extract_en) failures++;
    @(negedge clk); we = 0;
    @(posedge clk); #1;
    checks++; if (gen_start != 0 || !extract_en) failures++;  // start is a pulse
    wr(2, 32'hDEAD_BEEF); wr(3, 32'h0000_00AB);
    checks++; if (threshold != 48'h00AB_DEAD_BEEF) failures++;
    rd(2, v); checks++; if (v != 32'hDEAD_BEEF) failures++;
    rd(3, v); checks++; if (v != 32'h0000_00AB) failures++;
    @(negedge clk); gen_done = 4'b0010; @(negedge clk); gen_done = '0;
    gen_busy = 4'b1000; update_req = 4'b0100; pack_ovf = 4'b0001; fifo_ovf = 4'b1000; dma_err = 1;
    rd(1, v); checks++; if (v != {11'b0, 1'b1, 4'b1000, 4'b0001, 4'b0100, 4'b0010, 4'b1000}) begin failures++; $display("status %h", v); end
    rd(4, v); checks++; if (v != 32'h1234_5670) failures++;
    for (int c = 0; c < NCH; c++) begin rd(8 + c, v); checks++; if (v != 32'(c * 1000 + 7)) failures++; end
    rd(0, v); checks++; if (v != 32'h100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
