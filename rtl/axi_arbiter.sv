// axi_arbiter: routes host (PCIe AXI4 master) transactions to their slave.
//
// The host is the only master on this port. Each transaction goes to one slave,
// chosen by its address:
//   reads,  addr[31] = 1 : DDR3 controller. AR is forwarded on the m_ar* port with
//                          bit 31 cleared (host 0x8000_0000 = DDR3 address 0) and
//                          the R beats are passed back until RLAST.
//   reads,  addr[31] = 0 : local registers over the local bus, one beat per two
//                          clocks (lb_re and lb_raddr, with lb_rdata a combinational
//                          function of lb_raddr, sampled in the same clock).
//   writes, addr[31] = 0 : local bus (level-1 seed memories and registers), one
//                          lb_we per W beat, address advancing by 4 for INCR bursts.
//   writes, addr[31] = 1 : rejected: data beats are drained, response SLVERR.
// One read and one write transaction are in flight at a time (reads and writes are
// independent). Choosing a slave per transaction follows the published design; the
// address map, the local bus and the 32-bit data width are this design's choices.
// Some outputs are constant or wired through by design: m_araddr[31] is always 0,
// s_bresp is only OKAY or SLVERR (bit 0 stays 0), and lb_wdata is s_wdata itself.
module axi_arbiter #(
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // host AXI4 slave port
  input  logic [31:0]   s_awaddr,
  input  logic [7:0]    s_awlen,
  input  logic [1:0]    s_awburst,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [DW-1:0] s_wdata,
  input  logic          s_wlast,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [31:0]   s_araddr,
  input  logic [7:0]    s_arlen,
  input  logic [1:0]    s_arburst,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [DW-1:0] s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rlast,
  output logic          s_rvalid,
  input  logic          s_rready,
  // DDR3 controller read port
  output logic [31:0]   m_araddr,
  output logic [7:0]    m_arlen,
  output logic [1:0]    m_arburst,
  output logic          m_arvalid,
  input  logic          m_arready,
  input  logic [DW-1:0] m_rdata,
  input  logic [1:0]    m_rresp,
  input  logic          m_rlast,
  input  logic          m_rvalid,
  output logic          m_rready,
  // local bus
  output logic          lb_we,
  output logic [31:0]   lb_waddr,
  output logic [DW-1:0] lb_wdata,
  output logic          lb_re,
  output logic [31:0]   lb_raddr,
  input  logic [DW-1:0] lb_rdata
);
  // ---------------- write path ----------------
  typedef enum logic [1:0] {W_IDLE, W_DATA, W_RESP} wstate_t;
  wstate_t     ws;
  logic [31:0] waddr_q;
  logic        wincr_q, wbad_q;

  assign s_awready = (ws == W_IDLE);
  assign s_wready  = (ws == W_DATA);
  assign s_bvalid  = (ws == W_RESP);
  assign s_bresp   = wbad_q ? 2'b10 : 2'b00;
  assign lb_we     = (ws == W_DATA) && s_wvalid && !wbad_q;
  assign lb_waddr  = waddr_q;
  assign lb_wdata  = s_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_IDLE; waddr_q <= '0; wincr_q <= 1'b0; wbad_q <= 1'b0;
    end else begin
      unique case (ws)
        W_IDLE: if (s_awvalid) begin
          ws      <= W_DATA;
          waddr_q <= s_awaddr;
          wincr_q <= (s_awburst == 2'b01);
          wbad_q  <= s_awaddr[31];
        end
        W_DATA: if (s_wvalid) begin
          if (wincr_q) waddr_q <= waddr_q + 32'd4;
          if (s_wlast) ws <= W_RESP;
        end
        W_RESP: if (s_bready) ws <= W_IDLE;
        default: ws <= W_IDLE;
      endcase
    end
  end

  // ---------------- read path ----------------
  typedef enum logic [2:0] {R_IDLE, R_DDR_AR, R_DDR_DATA, R_LOC_REQ, R_LOC_RESP} rstate_t;
  rstate_t     rs;
  logic [31:0] raddr_q;
  logic [7:0]  rlen_q, rbeat_q;
  logic        rincr_q;
  logic [DW-1:0] rdata_q;

  assign s_arready = (rs == R_IDLE);
  assign m_araddr  = {1'b0, raddr_q[30:0]};  // DDR3 window starts at DDR3 address 0
  assign m_arlen   = rlen_q;
  assign m_arburst = rincr_q ? 2'b01 : 2'b00;
  assign m_arvalid = (rs == R_DDR_AR);
  assign m_rready  = (rs == R_DDR_DATA) && s_rready;
  assign lb_re     = (rs == R_LOC_REQ);
  assign lb_raddr  = raddr_q;

  always_comb begin
    if (rs == R_DDR_DATA) begin
      s_rvalid = m_rvalid;
      s_rdata  = m_rdata;
      s_rresp  = m_rresp;
      s_rlast  = m_rlast;
    end else begin
      s_rvalid = (rs == R_LOC_RESP);
      s_rdata  = rdata_q;
      s_rresp  = 2'b00;
      s_rlast  = (rbeat_q == rlen_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; raddr_q <= '0; rlen_q <= '0; rbeat_q <= '0; rincr_q <= 1'b0; rdata_q <= '0;
    end else begin
      unique case (rs)
        R_IDLE: if (s_arvalid) begin
          raddr_q <= s_araddr;
          rlen_q  <= s_arlen;
          rincr_q <= (s_arburst == 2'b01);
          rbeat_q <= '0;
          rs      <= s_araddr[31] ? R_DDR_AR : R_LOC_REQ;
        end
        R_DDR_AR:   if (m_arready) rs <= R_DDR_DATA;
        R_DDR_DATA: if (m_rvalid && s_rready && m_rlast) rs <= R_IDLE;
        R_LOC_REQ:  rs <= R_LOC_RESP;
        R_LOC_RESP: begin
          if (s_rready) begin
            if (rbeat_q == rlen_q) rs <= R_IDLE;
            else begin
              rs      <= R_LOC_REQ;
              rbeat_q <= rbeat_q + 1'b1;
              if (rincr_q) raddr_q <= raddr_q + 32'd4;
            end
          end
        end
        default: rs <= R_IDLE;
      endcase
      if (rs == R_LOC_REQ) rdata_q <= lb_rdata;
    end
  end

  // AXI4 rules on the host port: response VALID held with stable payload until READY.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (rs == R_LOC_RESP) && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
