// qrng_top: four-channel real-time Toeplitz post-processing core of a CV-QRNG.
//
// Four ADC channels, one per quantum sideband, each feed their own extractor:
//   raw_fifo           - packs 16-bit samples (ADC clock) into k-bit words (clk)
//   toeplitz_extractor - m x n Toeplitz hash, one m x k sub-matrix per clock,
//                        sub-seed chosen per hash by an LFSR among b stored seeds
//   seed_l1_mem        - b raw seeds of m+n-1 bits, k bits wide, written by the host
//   subseed_gen        - copies the seeds into seed_l2_mem as (m+k-1)-bit sub-seeds
//   seed_l2_mem        - b*n/k sub-seeds, read once per clock by the extractor
//   seed_monitor       - counts hashes per seed set, flags when renewal is due
//   out_packer         - m-bit results to 128-bit words
// The channels' words are merged by stream_arbiter and written by dma_writer into a
// DDR3 ring buffer (m_aw*/m_w*/m_b* port, towards an external DDR3 controller). The
// host (PCIe AXI4 master, external) reaches the core through axi_arbiter (s_* port):
// seed writes go to the level-1 memories, register accesses to csr, reads of the DDR3
// window are forwarded on the m_ar*/m_r* port.
// Default sizes are the published ones: m = 1729, n = 2464, 2464, 2432, 2432; k = 32
// and b = 4 are this design's choices. Clocks: clk (processing, 125 MHz intended,
// k = 250 MHz * 16 / 125 MHz) and adc_clk (250 MHz); resets are active low.
//
// Host address map: addr[31]=1 DDR3 window (read only); addr[31]=0 and addr[20]=0
// level-1 seed memory of channel addr[19:18], word addr[17:2]; addr[20]=1 registers
// (see csr). Seed y of a channel starts at word y*(m+n-1)/k, seed bit s_1 in bit 0.
module qrng_top #(
  parameter int unsigned M        = qrng_pkg::M_BITS,
  parameter qrng_pkg::ch_uint_t N_CH     = qrng_pkg::N_CH,
  parameter int unsigned K        = qrng_pkg::K,
  parameter int unsigned B_SEEDS  = qrng_pkg::B_SEEDS,
  parameter int unsigned X        = qrng_pkg::X_LFSR,
  parameter int unsigned DW       = qrng_pkg::DMA_W,
  parameter int unsigned BURST    = 16,
  parameter int unsigned CNT_W    = 48,
  parameter int unsigned RING_BYTES = 32'h1000_0000,
  localparam int unsigned NCH     = qrng_pkg::NUM_CH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       adc_clk,
  input  logic                       adc_rst_n,
  input  logic [NCH-1:0][qrng_pkg::ADC_W-1:0]  adc_data,
  input  logic [NCH-1:0]             adc_valid,
  // host AXI4 slave (from the PCIe controller)
  input  logic [31:0]   s_awaddr,
  input  logic [7:0]    s_awlen,
  input  logic [1:0]    s_awburst,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
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
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rlast,
  output logic          s_rvalid,
  input  logic          s_rready,
  // DDR3 controller: host read port
  output logic [31:0]   m_araddr,
  output logic [7:0]    m_arlen,
  output logic [1:0]    m_arburst,
  output logic          m_arvalid,
  input  logic          m_arready,
  input  logic [31:0]   m_rdata,
  input  logic [1:0]    m_rresp,
  input  logic          m_rlast,
  input  logic          m_rvalid,
  output logic          m_rready,
  // DDR3 controller: DMA write port
  output logic [31:0]   m_awaddr,
  output logic [7:0]    m_awlen,
  output logic [2:0]    m_awsize,
  output logic [1:0]    m_awburst,
  output logic          m_awvalid,
  input  logic          m_awready,
  output logic [DW-1:0] m_wdata,
  output logic [DW/8-1:0] m_wstrb,
  output logic          m_wlast,
  output logic          m_wvalid,
  input  logic          m_wready,
  input  logic [1:0]    m_bresp,
  input  logic          m_bvalid,
  output logic          m_bready,
  // per-channel hash completion and the seed index each hash used (observation)
  output logic [NCH-1:0] hash_valid,
  output logic [NCH-1:0][((B_SEEDS <= 2) ? 1 : $clog2(B_SEEDS))-1:0] hash_seed,
  output logic [NCH-1:0] seed_update_req
);
  localparam int unsigned YW = (B_SEEDS <= 2) ? 1 : $clog2(B_SEEDS);

  // local bus
  logic        lb_we, lb_re;
  logic [31:0] lb_waddr, lb_raddr, lb_wdata, lb_rdata;

  // control / status
  logic [NCH-1:0] gen_start, gen_busy, gen_done, seeds_ready, pack_ovf, fifo_ovf;
  logic           extract_en, dma_err;
  logic [CNT_W-1:0] threshold;
  logic [NCH-1:0][CNT_W-1:0] hash_cnt;
  logic [31:0]    dma_ptr;

  // packed words per channel
  logic [NCH-1:0]         pk_valid, pk_ready;
  logic [NCH-1:0][DW-1:0] pk_data;

  for (genvar g = 0; g < NCH; g++) begin : g_ch
    localparam int unsigned NC   = N_CH[g];
    localparam int unsigned SUBW = M + K - 1;
    localparam int unsigned D1   = B_SEEDS * (M + NC - 1) / K;
    localparam int unsigned D2   = B_SEEDS * NC / K;
    localparam int unsigned A1   = (D1 <= 2) ? 1 : $clog2(D1);
    localparam int unsigned A2   = (D2 <= 2) ? 1 : $clog2(D2);

    logic          raw_valid;
    logic [K-1:0]  raw_data;
    logic          l1_we, l1_re;
    logic [A1-1:0] l1_raddr;
    logic [K-1:0]  l1_dout;
    logic [SUBW/8-1:0] l2_wea;
    logic [A2-1:0] l2_waddr, l2_raddr;
    logic [SUBW-1:0] l2_din, l2_dout;
    logic          l2_re;
    logic          h_valid;
    logic [M-1:0]  h_data;
    logic [YW-1:0] h_seed;

    raw_fifo #(.A(qrng_pkg::ADC_W), .K(K)) u_fifo (
      .adc_clk(adc_clk), .adc_rst_n(adc_rst_n), .adc_data(adc_data[g]), .adc_valid(adc_valid[g]),
      .overflow(fifo_ovf[g]), .clk(clk), .rst_n(rst_n), .rd_valid(raw_valid), .rd_data(raw_data)
    );

    assign l1_we = lb_we && !lb_waddr[20] && (lb_waddr[19:18] == 2'(g));

    seed_l1_mem #(.K(K), .DEPTH(D1)) u_l1 (
      .clk(clk), .wea(l1_we), .waddr(A1'(lb_waddr[17:2])), .din(lb_wdata),
      .rea(l1_re), .raddr(l1_raddr), .dout(l1_dout)
    );

    subseed_gen #(.M(M), .N(NC), .K(K), .B_SEEDS(B_SEEDS)) u_gen (
      .clk(clk), .rst_n(rst_n), .start(gen_start[g]), .busy(gen_busy[g]), .done(gen_done[g]),
      .l1_rea(l1_re), .l1_raddr(l1_raddr), .l1_dout(l1_dout),
      .l2_wea(l2_wea), .l2_waddr(l2_waddr), .l2_din(l2_din)
    );

    seed_l2_mem #(.WIDTH(SUBW), .DEPTH(D2)) u_l2 (
      .clk(clk), .wea(l2_wea), .waddr(l2_waddr), .din(l2_din),
      .rea(l2_re), .raddr(l2_raddr), .dout(l2_dout)
    );

    toeplitz_extractor #(.M(M), .N(NC), .K(K), .B_SEEDS(B_SEEDS), .X(X),
                         .LFSR_SEED(X'(16'hACE1 + 16'(g) * 16'h1357))) u_tx (
      .clk(clk), .rst_n(rst_n), .en(extract_en && seeds_ready[g]),
      .raw_valid(raw_valid), .raw_data(raw_data),
      .l2_rea(l2_re), .l2_raddr(l2_raddr), .l2_dout(l2_dout),
      .out_valid(h_valid), .out_data(h_data), .out_seed(h_seed)
    );

    seed_monitor #(.CNT_W(CNT_W)) u_mon (
      .clk(clk), .rst_n(rst_n), .hash_done(h_valid), .clear(gen_start[g]),
      .threshold(threshold), .count(hash_cnt[g]), .update_req(seed_update_req[g])
    );

    out_packer #(.M(M), .W(DW)) u_pack (
      .clk(clk), .rst_n(rst_n), .in_valid(h_valid), .in_data(h_data),
      .out_valid(pk_valid[g]), .out_data(pk_data[g]), .out_ready(pk_ready[g]),
      .overflow(pack_ovf[g])
    );

    assign hash_valid[g] = h_valid;
    assign hash_seed[g]  = h_seed;
  end

  logic          st_valid, st_ready;
  logic [DW-1:0] st_data;
  logic [1:0]    st_ch;

  stream_arbiter #(.NCH(NCH), .W(DW)) u_merge (
    .clk(clk), .rst_n(rst_n), .in_valid(pk_valid), .in_data(pk_data), .in_ready(pk_ready),
    .out_valid(st_valid), .out_data(st_data), .out_ch(st_ch), .out_ready(st_ready)
  );

  dma_writer #(.DW(DW), .AW(32), .BURST(BURST), .RING_BYTES(RING_BYTES)) u_dma (
    .clk(clk), .rst_n(rst_n), .in_valid(st_valid), .in_data(st_data), .in_ready(st_ready),
    .m_awaddr(m_awaddr), .m_awlen(m_awlen), .m_awsize(m_awsize), .m_awburst(m_awburst),
    .m_awvalid(m_awvalid), .m_awready(m_awready),
    .m_wdata(m_wdata), .m_wstrb(m_wstrb), .m_wlast(m_wlast), .m_wvalid(m_wvalid), .m_wready(m_wready),
    .m_bresp(m_bresp), .m_bvalid(m_bvalid), .m_bready(m_bready),
    .done_off(dma_ptr), .err(dma_err)
  );

  axi_arbiter #(.DW(32)) u_arb (
    .clk(clk), .rst_n(rst_n),
    .s_awaddr(s_awaddr), .s_awlen(s_awlen), .s_awburst(s_awburst), .s_awvalid(s_awvalid), .s_awready(s_awready),
    .s_wdata(s_wdata), .s_wlast(s_wlast), .s_wvalid(s_wvalid), .s_wready(s_wready),
    .s_bresp(s_bresp), .s_bvalid(s_bvalid), .s_bready(s_bready),
    .s_araddr(s_araddr), .s_arlen(s_arlen), .s_arburst(s_arburst), .s_arvalid(s_arvalid), .s_arready(s_arready),
    .s_rdata(s_rdata), .s_rresp(s_rresp), .s_rlast(s_rlast), .s_rvalid(s_rvalid), .s_rready(s_rready),
    .m_araddr(m_araddr), .m_arlen(m_arlen), .m_arburst(m_arburst), .m_arvalid(m_arvalid), .m_arready(m_arready),
    .m_rdata(m_rdata), .m_rresp(m_rresp), .m_rlast(m_rlast), .m_rvalid(m_rvalid), .m_rready(m_rready),
    .lb_we(lb_we), .lb_waddr(lb_waddr), .lb_wdata(lb_wdata),
    .lb_re(lb_re), .lb_raddr(lb_raddr), .lb_rdata(lb_rdata)
  );

  csr #(.NCH(NCH), .CNT_W(CNT_W)) u_csr (
    .clk(clk), .rst_n(rst_n),
    .we(lb_we && lb_waddr[20]), .waddr(lb_waddr[7:2]), .wdata(lb_wdata),
    .raddr(lb_raddr[7:2]), .rdata(lb_rdata),
    .gen_start(gen_start), .extract_en(extract_en), .threshold(threshold),
    .gen_busy(gen_busy), .gen_done(gen_done), .seeds_ready(seeds_ready), .update_req(seed_update_req),
    .pack_ovf(pack_ovf), .fifo_ovf(fifo_ovf), .dma_err(dma_err), .dma_ptr(dma_ptr), .hash_cnt(hash_cnt)
  );
endmodule
