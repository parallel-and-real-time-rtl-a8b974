// axi_ddr_model: behavioural stand-in for the DDR3 memory and its controller, for
// simulation only. A byte-addressed sparse memory with an AXI4 write port of DW
// bits (INCR bursts, full strobes) and an AXI4 read port of 32 bits. Ready signals
// are randomly throttled; stall_w forces the write side to stop accepting.
module axi_ddr_model #(
  parameter int unsigned DW = 128,
  parameter int unsigned W_STALL_MOD = 5   // wready low on about one clock in W_STALL_MOD
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          stall_w,
  input  logic [31:0]   awaddr,
  input  logic [7:0]    awlen,
  input  logic          awvalid,
  output logic          awready,
  input  logic [DW-1:0] wdata,
  input  logic          wlast,
  input  logic          wvalid,
  output logic          wready,
  output logic [1:0]    bresp,
  output logic          bvalid,
  input  logic          bready,
  input  logic [31:0]   araddr,
  input  logic [7:0]    arlen,
  input  logic          arvalid,
  output logic          arready,
  output logic [31:0]   rdata,
  output logic [1:0]    rresp,
  output logic          rlast,
  output logic          rvalid,
  input  logic          rready,
  output int            bursts,
  output int            wlast_errors
);
  logic [7:0] mem [int unsigned];
  int unsigned aw_q [$];
  int unsigned awlen_q [$];
  int          pend_b;
  int unsigned wa;
  int          wbeat;
  logic        in_burst;
  int unsigned ra;
  int          rleft;
  logic        rbusy;

  assign bresp = 2'b00;
  assign rresp = 2'b00;

  function automatic logic [7:0] rd8(int unsigned a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awready <= 0; wready <= 0; bvalid <= 0; arready <= 0; rvalid <= 0; rlast <= 0; rdata <= '0;
      pend_b = 0; in_burst = 0; wbeat = 0; rbusy = 0; bursts = 0; wlast_errors = 0;
    end else begin
      if (awvalid && awready) begin aw_q.push_back(awaddr); awlen_q.push_back(32'(awlen)); end
      if (wvalid && wready) begin
        if (!in_burst) begin wa = aw_q.pop_front(); wbeat = 0; in_burst = 1; end
        for (int b = 0; b < DW / 8; b++) mem[wa + wbeat * (DW / 8) + b] = wdata[b*8 +: 8];
        if (wlast !== (wbeat == int'(awlen_q[0]))) wlast_errors++;
        wbeat++;
        if (wlast) begin in_burst = 0; void'(awlen_q.pop_front()); pend_b++; bursts++; end
      end
      if (bvalid && bready) pend_b--;
      bvalid  <= (pend_b > 0) && ($urandom % 2 == 0);
      awready <= !stall_w && ($urandom % 4 != 0);
      wready  <= !stall_w && ($urandom % W_STALL_MOD != 0) && (aw_q.size() > 0 || in_burst);
      // read side
      arready <= !rbusy && ($urandom % 2 == 0);
      if (arvalid && arready) begin ra = araddr; rleft = int'(arlen) + 1; rbusy = 1; end
      if (rvalid && rready) begin
        rvalid <= 0;
      end else if (rbusy && !rvalid && ($urandom % 3 != 0)) begin
        rdata  <= {rd8(ra + 3), rd8(ra + 2), rd8(ra + 1), rd8(ra)};
        rlast  <= (rleft == 1);
        rvalid <= 1;
        ra += 4; rleft--;
        if (rleft == 0) rbusy = 0;
      end
    end
  end

  function automatic logic [7:0] peek(int unsigned a);
    return rd8(a);
  endfunction
endmodule
