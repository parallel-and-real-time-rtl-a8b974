// tb_axi_arbiter: host write bursts must appear as local-bus writes at incrementing
// addresses; host reads below 2 GiB must return local read data (here a function of
// the address); reads at or above 2 GiB must be forwarded to the DDR3 port with their
// data passed back; writes to the DDR3 window must be answered SLVERR.
module tb_axi_arbiter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] s_awaddr = '0, s_wdata = '0, s_araddr = '0;
  logic [7:0] s_awlen = '0, s_arlen = '0;
  logic [1:0] s_awburst = 2'b01, s_arburst = 2'b01;
  logic s_awvalid = 0, s_wlast = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rlast, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic [31:0] m_araddr; logic [7:0] m_arlen; logic [1:0] m_arburst; logic m_arvalid, m_arready;
  logic [31:0] m_rdata; logic [1:0] m_rresp; logic m_rlast, m_rvalid, m_rready;
  logic lb_we, lb_re; logic [31:0] lb_waddr, lb_wdata, lb_raddr, lb_rdata;
  logic awready_unused, wready_unused, bvalid_unused; logic [1:0] bresp_unused;
  int bursts, wlast_errors;
  int checks = 0, failures = 0;
  logic [31:0] lb_log_a [$], lb_log_d [$];

  axi_arbiter #(.DW(32)) dut (.*);

  assign lb_rdata = lb_raddr ^ 32'h5A5A_0000;
  always @(posedge clk) if (lb_we) begin lb_log_a.push_back(lb_waddr); lb_log_d.push_back(lb_wdata); end

  axi_ddr_model #(.DW(32)) ddr (
    .clk(clk), .rst_n(rst_n), .stall_w(1'b1),
    .awaddr('0), .awlen('0), .awvalid(1'b0), .awready(awready_unused),
    .wdata('0), .wlast(1'b0), .wvalid(1'b0), .wready(wready_unused),
    .bresp(bresp_unused), .bvalid(bvalid_unused), .bready(1'b1),
    .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .bursts(bursts), .wlast_errors(wlast_errors)
  );

  task automatic host_write(logic [31:0] a, int len, output logic [1:0] resp);
    @(negedge clk); s_awaddr = a; s_awlen = 8'(len - 1); s_awvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk); s_awvalid = 0;
    for (int i = 0; i < len; i++) begin
      s_wdata = a + 32'(i * 4) + 32'h1000_0000; s_wlast = (i == len - 1); s_wvalid = 1;
      do @(posedge clk); while (!s_wready);
      @(negedge clk);
    end
    s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp;
    @(negedge clk); s_bready = 0;
  endtask

  task automatic host_read(logic [31:0] a, int len, ref logic [31:0] d [$]);
    @(negedge clk); s_araddr = a; s_arlen = 8'(len - 1); s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    for (int i = 0; i < len; i++) begin
      s_rready = 1'($urandom % 2);
      @(posedge clk);
      while (!(s_rvalid && s_rready)) begin @(negedge clk); s_rready = 1'($urandom % 2); @(posedge clk); end
      d.push_back(s_rdata);
      checks++; if (s_rlast !== (i == len - 1)) failures++;
      @(negedge clk); s_rready = 0;
    end
  endtask

  initial begin
    logic [1:0] resp;
    logic [31:0] rd [$];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 10; b++) begin
      automatic logic [31:0] a = {12'h000, 20'($urandom) & 20'hFFFFC};
      automatic int len = 1 + $urandom % 8;
      host_write(a, len, resp);
      checks++; if (resp != 2'b00 || lb_log_a.size() != len) failures++;
      for (int i = 0; i < len; i++) begin
        checks++;
        if (lb_log_a.pop_front() != a + 32'(4 * i) || lb_log_d.pop_front() != a + 32'(i * 4) + 32'h1000_0000) failures++;
      end
    end
    host_write(32'h8000_0040, 2, resp);
    checks++; if (resp != 2'b10 || lb_log_a.size() != 0) failures++;
    // local reads
    rd.delete();
    host_read(32'h0010_0010, 4, rd);
    for (int i = 0; i < 4; i++) begin checks++; if (rd[i] != ((32'h0010_0010 + 32'(4 * i)) ^ 32'h5A5A_0000)) failures++; end
    // DDR3 window reads: preload model memory
    for (int i = 0; i < 64; i++) ddr.mem[32'h0000_0100 + i] = 8'(i * 7 + 1);
    rd.delete();
    host_read(32'h8000_0100, 16, rd);
    for (int i = 0; i < 16; i++) begin
      automatic logic [31:0] e = {8'((4*i+3)*7+1), 8'((4*i+2)*7+1), 8'((4*i+1)*7+1), 8'(4*i*7+1)};
      checks++; if (rd[i] !== e) begin failures++; $display("ddr rd %0d got %h exp %h", i, rd[i], e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
