// dma_writer: AXI4 write master that streams random words into a DDR3 ring buffer.
//
// Words from the stream input collect in a FIFO. Whenever BURST words are present
// that no burst has claimed yet, an INCR write burst of BURST beats is issued at
// RING_BASE + wr_off; wr_off advances by one burst and wraps at RING_BYTES. Data
// beats follow from the FIFO in order, WLAST on the last beat of each burst. Up to
// MAX_OUT bursts may wait for their write response. done_off is the ring offset up
// to which all bursts have been acknowledged: the host reads random numbers from
// the ring up to that point. A non-OKAY response sets the sticky err flag. Words
// that do not fill a burst wait for more data (no flush).
// Writing the results into DDR3 by DMA follows the published design; the ring
// buffer, burst size and pointer reporting are this design's choices.
// AWLEN, AWSIZE, AWBURST, WSTRB and BREADY are constant outputs: every burst has
// the same shape (BURST full-width beats, INCR) and responses are always accepted.
module dma_writer #(
  parameter int unsigned DW         = 128,
  parameter int unsigned AW         = 32,
  parameter int unsigned BURST      = 16,
  parameter int unsigned FIFO_DEPTH = 64,          // power of two, >= 2*BURST
  parameter int unsigned MAX_OUT    = 4,
  parameter logic [AW-1:0] RING_BASE  = '0,
  parameter int unsigned RING_BYTES = 32'h1000_0000 // multiple of BURST*DW/8
) (
  input  logic            clk,
  input  logic            rst_n,
  // stream in
  input  logic            in_valid,
  input  logic [DW-1:0]   in_data,
  output logic            in_ready,
  // AXI4 write address
  output logic [AW-1:0]   m_awaddr,
  output logic [7:0]      m_awlen,
  output logic [2:0]      m_awsize,
  output logic [1:0]      m_awburst,
  output logic            m_awvalid,
  input  logic            m_awready,
  // AXI4 write data
  output logic [DW-1:0]   m_wdata,
  output logic [DW/8-1:0] m_wstrb,
  output logic            m_wlast,
  output logic            m_wvalid,
  input  logic            m_wready,
  // AXI4 write response
  input  logic [1:0]      m_bresp,
  input  logic            m_bvalid,
  output logic            m_bready,
  // status
  output logic [31:0]     done_off,
  output logic            err
);
  localparam int unsigned FA     = $clog2(FIFO_DEPTH);
  localparam int unsigned BBYTES = BURST * DW / 8;
  localparam int unsigned OW     = $clog2(MAX_OUT + 1);
  localparam int unsigned BW     = (BURST <= 2) ? 1 : $clog2(BURST);

  logic [DW-1:0] fifo [FIFO_DEPTH];
  logic [FA:0]   wr_q, rd_q;       // FIFO pointers
  logic [FA:0]   claim_q;          // words claimed by issued AW
  logic [FA:0]   level, unclaimed;
  logic [31:0]   wr_off;
  logic [OW-1:0] outstanding;
  logic [OW-1:0] w_bursts;         // bursts whose data is still to be sent
  logic [BW-1:0] beat_q;

  assign level     = wr_q - rd_q;
  assign unclaimed = wr_q - claim_q;
  assign in_ready  = (level != (FA+1)'(FIFO_DEPTH));

  logic push, aw_hs, w_hs, b_hs;
  assign push  = in_valid && in_ready;
  assign aw_hs = m_awvalid && m_awready;
  assign w_hs  = m_wvalid && m_wready;
  assign b_hs  = m_bvalid && m_bready;

  assign m_awaddr  = RING_BASE + AW'(wr_off);
  assign m_awlen   = 8'(BURST - 1);
  assign m_awsize  = 3'($clog2(DW / 8));
  assign m_awburst = 2'b01;
  assign m_awvalid = (unclaimed >= (FA+1)'(BURST)) && (outstanding < OW'(MAX_OUT));

  assign m_wvalid  = (w_bursts != 0) && (level != 0);
  assign m_wdata   = fifo[rd_q[FA-1:0]];
  assign m_wstrb   = '1;
  assign m_wlast   = (beat_q == BW'(BURST - 1));
  assign m_bready  = 1'b1;

  always_ff @(posedge clk) begin
    if (push) fifo[wr_q[FA-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q <= '0; rd_q <= '0; claim_q <= '0; wr_off <= '0; done_off <= '0;
      outstanding <= '0; w_bursts <= '0; beat_q <= '0; err <= 1'b0;
    end else begin
      if (push) wr_q <= wr_q + 1'b1;
      if (aw_hs) begin
        claim_q <= claim_q + (FA+1)'(BURST);
        wr_off  <= (wr_off + BBYTES >= RING_BYTES) ? '0 : wr_off + BBYTES;
      end
      outstanding <= outstanding + OW'(aw_hs) - OW'(b_hs);
      w_bursts    <= w_bursts + OW'(aw_hs) - OW'(w_hs && m_wlast);
      if (w_hs) begin
        rd_q   <= rd_q + 1'b1;
        beat_q <= m_wlast ? '0 : beat_q + 1'b1;
      end
      if (b_hs) begin
        done_off <= (done_off + BBYTES >= RING_BYTES) ? '0 : done_off + BBYTES;
        if (m_bresp != 2'b00) err <= 1'b1;
      end
    end
  end

  // AXI4 rules: a raised VALID stays high with stable payload until READY.
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata) && $stable(m_wlast));

  initial begin
    assert (FIFO_DEPTH >= 2 * BURST) else $error("dma_writer: FIFO_DEPTH must be >= 2*BURST");
    assert (RING_BYTES % BBYTES == 0) else $error("dma_writer: RING_BYTES must be a multiple of the burst size");
  end
endmodule
