// tb_dma_writer: streams numbered 128-bit words into the writer; the DDR model must
// receive them at consecutive ring addresses in INCR bursts of BURST beats with WLAST
// on the last beat, the ring must wrap, and done_off must follow the acknowledged bursts.
module tb_dma_writer;
  localparam int unsigned DW = 128, BURST = 4, RING = 1024;  // 16 bytes x 4 = 64 B bursts, 16 per ring
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready;
  logic [DW-1:0] in_data = '0;
  logic [31:0] m_awaddr; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready, err;
  logic [DW-1:0] m_wdata; logic [DW/8-1:0] m_wstrb; logic [1:0] m_bresp;
  logic [31:0] done_off;
  logic arready, rlast, rvalid; logic [31:0] rdata; logic [1:0] rresp;
  int bursts, wlast_errors;
  int checks = 0, failures = 0, sent = 0;

  dma_writer #(.DW(DW), .BURST(BURST), .FIFO_DEPTH(16), .RING_BASE(32'h8000_0000), .RING_BYTES(RING)) dut (.*);

  axi_ddr_model #(.DW(DW)) ddr (
    .clk(clk), .rst_n(rst_n), .stall_w(1'b0),
    .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready),
    .araddr('0), .arlen('0), .arvalid(1'b0), .arready(arready), .rdata(rdata), .rresp(rresp),
    .rlast(rlast), .rvalid(rvalid), .rready(1'b1), .bursts(bursts), .wlast_errors(wlast_errors)
  );

  always @(posedge clk) if (m_awvalid && m_awready) begin
    checks++;
    if (m_awlen != 8'(BURST - 1) || m_awsize != 3'd4 || m_awburst != 2'b01 || m_awaddr[31:10] != 22'h200000) failures++;
  end

  task automatic check_ring(int first_word, int nwords);
    for (int w = first_word; w < first_word + nwords; w++) begin
      automatic int unsigned a = 32'h8000_0000 + (w * 16) % RING;
      automatic logic [DW-1:0] v;
      for (int b = 0; b < 16; b++) v[b*8 +: 8] = ddr.peek(a + b);
      checks++;
      if (v !== {96'hC0FFEE, 32'(w)}) begin failures++; if (failures < 4) $display("word %0d got %h", w, v); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // 48 words = 12 bursts (no wrap yet)
    while (sent < 48) begin
      @(negedge clk);
      if (in_valid && in_ready) sent++;
      in_valid = (sent < 48) && ($urandom % 3 != 0);
      in_data = {96'hC0FFEE, 32'(sent)};
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(negedge clk);
    check_ring(0, 48);
    checks++; if (done_off != 32'(48 * 16)) begin failures++; $display("done_off %0d", done_off); end
    // 32 more words: wraps the 1 KiB ring
    while (sent < 80) begin
      @(negedge clk);
      if (in_valid && in_ready) sent++;
      in_valid = (sent < 80);
      in_data = {96'hC0FFEE, 32'(sent)};
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(negedge clk);
    check_ring(64, 16);
    checks++; if (done_off != 32'((80 * 16) % RING)) failures++;
    checks++; if (bursts != 20 || wlast_errors != 0 || err) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
