// qrng_top_env: end-to-end environment for qrng_top, shared by the reduced-size and
// the full-size testbench (FULL = 1 instantiates the top with no parameter override).
//
// Scenario, as a host would run the core:
//   1. program a small seed-update threshold, write b random seeds per channel into
//      the level-1 memories through the host AXI4 port, start sub-seed generation of
//      all channels and enable extraction; poll STATUS until all seeds are ready;
//   2. drive random 16-bit samples on all four ADC inputs; for every hash result
//      compute the m x n Toeplitz product of the channel's raw bits with the seed the
//      core reports using, and append it to that channel's expected bit stream;
//      every 128-bit beat the DMA writes to DDR3 must be the next expected word of one
//      channel;
//   3. regenerate channel 0's sub-seeds while extraction keeps running;
//   4. pause the ADCs, write new seeds for all channels, regenerate, resume, and
//      check results against the new seeds;
//   5. read the DMA pointer and ring data back through the host port (DDR3 window);
//   6. stall DDR3 writes until the packers overflow and check the status bit.
// Counts each mechanism (random seed choice, seed-update request, regeneration while
// running, seed renewal, DMA bursts, DDR3 back-pressure, host DDR3 read, overflow) and
// fails if one never happened. While samples arrive every ADC clock, consecutive
// results of a channel must be exactly n/k processing clocks apart (rate check); the
// output rate this implies at a 125 MHz clock is printed.
`timescale 1ns/1ps
module qrng_top_env #(
  parameter bit          FULL    = 1'b0,
  parameter int unsigned M       = 129,
  parameter qrng_pkg::ch_uint_t N_CH = '{256, 256, 224, 224},
  parameter int unsigned HASHES  = 8      // hashes per channel per run phase
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned K = 32, B = 4, NCH = 4, DW = 128;
  localparam int unsigned MAXN = 2464;

  logic clk = 0, adc_clk = 0, rst_n = 0, adc_rst_n = 0;
  always #4 clk = ~clk;
  always #2 adc_clk = ~adc_clk;

  logic [NCH-1:0][15:0] adc_data;
  logic [NCH-1:0]       adc_valid;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic [7:0]  s_awlen, s_arlen;
  logic [1:0]  s_awburst, s_arburst, s_bresp, s_rresp;
  logic s_awvalid, s_awready, s_wlast, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rlast, s_rvalid, s_rready;
  logic [31:0] m_araddr, m_rdata, m_awaddr;
  logic [7:0]  m_arlen, m_awlen;
  logic [1:0]  m_arburst, m_rresp, m_awburst, m_bresp;
  logic [2:0]  m_awsize;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [DW-1:0] m_wdata;
  logic [DW/8-1:0] m_wstrb;
  logic [NCH-1:0] hash_valid, seed_update_req;
  logic [NCH-1:0][1:0] hash_seed;
  logic stall_w = 0;
  int bursts, wlast_errors;

  if (FULL) begin : g_full
    qrng_top dut (.*);
  end else begin : g_small
    qrng_top #(.M(M), .N_CH(N_CH)) dut (.*);
  end

  axi_ddr_model #(.DW(DW), .W_STALL_MOD(16)) ddr (
    .clk(clk), .rst_n(rst_n), .stall_w(stall_w),
    .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready),
    .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .bursts(bursts), .wlast_errors(wlast_errors)
  );

  // ---------------- reference state ----------------
  logic [M+MAXN-2:0] seed [NCH][B];
  logic [K-1:0]      words [NCH][$];     // raw words in arrival order
  int                used_words [NCH];   // words consumed by checked hashes
  bit                exp_bits [NCH][$];  // expected output bit stream
  logic [DW-1:0]     exp_words [NCH][$];
  int                hashes [NCH];
  bit                seed_seen [NCH][B];
  bit                checking = 1;
  // mechanism counters
  int n_rand_seeds = 0, n_update_req = 0, n_regen_running = 0, n_renew = 0;
  int n_ddr_stall = 0, n_host_ddr_read = 0, n_overflow = 0, n_ddr_words = 0;
  // rate: with samples every ADC clock, one result per n/k processing clocks
  longint cyc = 0;
  longint last_hash_cyc [NCH];
  longint last_gap_cyc [NCH];
  int     n_rate_checks = 0;
  real    rate_gbps [NCH];
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge adc_clk)
    for (int c = 0; c < NCH; c++) if (!adc_valid[c] || !adc_rst_n) last_gap_cyc[c] = cyc;

  initial begin
    checks = 0; failures = 0; done = 0;
    adc_valid = '0; adc_data = '0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_awlen = '0; s_awburst = 2'b01; s_wdata = '0; s_wlast = 0;
    s_araddr = '0; s_arlen = '0; s_arburst = 2'b01;
    for (int c = 0; c < NCH; c++) begin used_words[c] = 0; hashes[c] = 0; last_hash_cyc[c] = -1; last_gap_cyc[c] = 0; rate_gbps[c] = 0.0; for (int y = 0; y < B; y++) seed_seen[c][y] = 0; end
  end

  // ADC sample packing: word w = {sample 2w+1, sample 2w}
  logic [15:0] lo_sample [NCH];
  bit          have_lo [NCH];
  initial for (int c = 0; c < NCH; c++) have_lo[c] = 0;
  always @(posedge adc_clk) begin
    for (int c = 0; c < NCH; c++) if (adc_valid[c] && adc_rst_n) begin
      if (!have_lo[c]) begin lo_sample[c] = adc_data[c]; have_lo[c] = 1; end
      else begin words[c].push_back({adc_data[c], lo_sample[c]}); have_lo[c] = 0; end
    end
  end

  function automatic int nk_of(int c);
    return int'(N_CH[c] / K);
  endfunction

  // expected hash per result
  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++) if (hash_valid[c] && rst_n) begin
      automatic int y = int'(hash_seed[c]);
      automatic int n = int'(N_CH[c]);
      automatic logic [M-1:0] a = '0;
      automatic logic [MAXN-1:0] d = '0;
      for (int w = 0; w < nk_of(c); w++) d[w*K +: K] = words[c][used_words[c] + w];
      used_words[c] += nk_of(c);
      // a_r = XOR_c s[r+c] d[c]: full Toeplitz product, column by column
      for (int j = 0; j < n; j++) if (d[j]) a ^= seed[c][y][j +: M];
      if (!seed_seen[c][y]) begin seed_seen[c][y] = 1; n_rand_seeds++; end
      if (last_hash_cyc[c] >= 0 && last_gap_cyc[c] + 16 < last_hash_cyc[c]) begin
        checks++; n_rate_checks++;
        if (cyc - last_hash_cyc[c] != longint'(nk_of(c))) begin
          failures++;
          $display("channel %0d: %0d clocks between results, expected %0d", c, cyc - last_hash_cyc[c], nk_of(c));
        end
        // output rate at a 125 MHz processing clock
        rate_gbps[c] = real'(M) * 0.125 / real'(cyc - last_hash_cyc[c]);
      end
      last_hash_cyc[c] = cyc;
      hashes[c]++;
      for (int i = 0; i < M; i++) exp_bits[c].push_back(a[i]);
      while (exp_bits[c].size() >= DW) begin
        automatic logic [DW-1:0] wv;
        for (int i = 0; i < DW; i++) wv[i] = exp_bits[c].pop_front();
        exp_words[c].push_back(wv);
      end
    end
  end

  // DMA beats towards DDR3
  always @(posedge clk) begin
    if (m_awvalid && !m_awready) n_ddr_stall++;
    if (m_wvalid && m_wready && checking && rst_n) begin
      automatic bit hit = 0;
      for (int c = 0; c < NCH; c++)
        if (!hit && exp_words[c].size() > 0 && exp_words[c][0] === m_wdata) begin
          void'(exp_words[c].pop_front()); hit = 1;
        end
      checks++; n_ddr_words++;
      if (!hit) begin failures++; if (failures < 5) $display("DDR beat %0d matches no channel: %h", n_ddr_words, m_wdata); end
    end
  end

  logic [NCH-1:0] req_q = '0;
  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++) if (seed_update_req[c] && !req_q[c] && rst_n) n_update_req++;
    req_q <= seed_update_req;
  end

  // ---------------- host port tasks ----------------
  task automatic host_write(logic [31:0] a, logic [31:0] data [$]);
    @(negedge clk); s_awaddr = a; s_awlen = 8'(data.size() - 1); s_awburst = 2'b01; s_awvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk); s_awvalid = 0;
    for (int i = 0; i < data.size(); i++) begin
      s_wdata = data[i]; s_wlast = (i == data.size() - 1); s_wvalid = 1;
      do @(posedge clk); while (!s_wready);
      @(negedge clk);
    end
    s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    checks++; if (s_bresp != 2'b00) failures++;
    @(negedge clk); s_bready = 0;
  endtask

  task automatic host_reg_write(int r, logic [31:0] v);
    logic [31:0] q [$];
    q.push_back(v);
    host_write(32'h0010_0000 + 32'(r * 4), q);
  endtask

  task automatic host_read(logic [31:0] a, int len, ref logic [31:0] d [$]);
    @(negedge clk); s_araddr = a; s_arlen = 8'(len - 1); s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    for (int i = 0; i < len; i++) begin
      do @(posedge clk); while (!s_rvalid);
      d.push_back(s_rdata);
      @(negedge clk);
    end
    s_rready = 0;
  endtask

  task automatic host_reg_read(int r, output logic [31:0] v);
    logic [31:0] q [$];
    host_read(32'h0010_0000 + 32'(r * 4), 1, q);
    v = q[0];
  endtask

  task automatic load_seeds(int c);
    int sw = int'((M + N_CH[c] - 1) / K);
    for (int y = 0; y < B; y++) begin
      for (int i = 0; i < M + N_CH[c] - 1; i++) seed[c][y][i] = 1'($urandom);
      for (int w0 = 0; w0 < sw; w0 += 64) begin
        logic [31:0] q [$];
        for (int w = w0; w < w0 + 64 && w < sw; w++) q.push_back(seed[c][y][w*K +: K]);
        host_write(32'(c << 18) + 32'((y * sw + w0) * 4), q);
      end
    end
  endtask

  task automatic wait_ready(logic [3:0] mask);
    logic [31:0] st;
    do begin repeat (50) @(posedge clk); host_reg_read(1, st); end
    while ((st[3:0] & mask) != 0 || (st[7:4] & mask) != mask);
  endtask

  task automatic run_adc(int nhash);
    // nhash more results per channel; the ADC feeds all channels every ADC clock
    int target [NCH];
    bit more;
    for (int c = 0; c < NCH; c++) target[c] = hashes[c] + nhash;
    do begin
      @(negedge adc_clk);
      adc_valid = '1;
      for (int c = 0; c < NCH; c++) adc_data[c] = 16'($urandom);
      more = 0;
      for (int c = 0; c < NCH; c++) if (hashes[c] < target[c]) more = 1;
    end while (more);
  endtask

  task automatic pause_adc();
    // stop every channel at a hash boundary, so no hash mixes old and new seeds
    do begin
      @(negedge adc_clk);
      for (int c = 0; c < NCH; c++)
        if (!have_lo[c] && (words[c].size() % nk_of(c)) == 0) adc_valid[c] = 0;
        else if (adc_valid[c]) adc_data[c] = 16'($urandom);
    end while (adc_valid != '0);
  endtask

  task automatic drain();
    repeat (400) @(posedge clk);
  endtask

  initial begin
    logic [31:0] st;
    logic [31:0] rd [$];
    #20 rst_n = 1; adc_rst_n = 1;
    // 1. seeds, threshold, generation
    host_reg_write(2, 32'd3);
    host_reg_write(3, 32'd0);
    for (int c = 0; c < NCH; c++) load_seeds(c);
    host_reg_write(0, 32'h0000_010F);
    wait_ready(4'hF);
    // 2. run
    run_adc(HASHES);
    // 3. regenerate channel 0 from the same seeds while it keeps hashing
    host_reg_write(0, 32'h0000_0101);
    fork
      run_adc(HASHES);
      begin
        repeat (5) @(posedge clk);
        host_reg_read(1, st);
        if (st[0]) n_regen_running++;
      end
    join
    wait_ready(4'h1);
    // 4. renew all seeds
    pause_adc();
    drain();
    for (int c = 0; c < NCH; c++) load_seeds(c);
    host_reg_write(0, 32'h0000_010F);
    wait_ready(4'hF);
    n_renew++;
    run_adc(HASHES);
    pause_adc();
    drain();
    for (int c = 0; c < NCH; c++) begin
      checks++; if (hashes[c] < 3 * HASHES) failures++;
    end
    // 5. host reads the ring through the DDR3 window
    host_reg_read(4, st);
    checks++; if (st == 0) failures++;
    rd.delete();
    host_read(32'h8000_0000, 16, rd);
    for (int i = 0; i < 16; i++) begin
      automatic logic [31:0] e = {ddr.peek(4*i+3), ddr.peek(4*i+2), ddr.peek(4*i+1), ddr.peek(4*i)};
      checks++; if (rd[i] !== e) failures++;
    end
    n_host_ddr_read++;
    // every expected word was written (less than one burst may wait in the DMA FIFO)
    begin
      automatic int left = 0;
      for (int c = 0; c < NCH; c++) left += exp_words[c].size();
      checks++; if (left > 32) begin failures++; $display("words not written: %0d", left); end
    end
    // 6. overflow under a DDR3 stall
    checking = 0;
    stall_w = 1;
    run_adc(40);
    pause_adc();
    host_reg_read(1, st);
    if (st[15:12] != 0) n_overflow++;
    stall_w = 0;
    drain();
    // mechanism coverage
    $display("mechanisms: seeds_seen=%0d update_req=%0d regen_running=%0d renew=%0d ddr_stall=%0d host_ddr_read=%0d overflow=%0d ddr_words=%0d bursts=%0d",
             n_rand_seeds, n_update_req, n_regen_running, n_renew, n_ddr_stall, n_host_ddr_read, n_overflow, n_ddr_words, bursts);
    $display("output rate at 125 MHz: %.3f + %.3f + %.3f + %.3f = %.2f Gb/s (%0d interval checks)",
             rate_gbps[0], rate_gbps[1], rate_gbps[2], rate_gbps[3],
             rate_gbps[0] + rate_gbps[1] + rate_gbps[2] + rate_gbps[3], n_rate_checks);
    checks++; if (n_rate_checks < NCH) failures++;
    checks++; if (n_rand_seeds < 2 * NCH) failures++;
    checks++; if (n_update_req < NCH) failures++;
    checks++; if (n_regen_running == 0) failures++;
    checks++; if (n_renew == 0) failures++;
    checks++; if (n_ddr_stall == 0) failures++;
    checks++; if (n_host_ddr_read == 0) failures++;
    checks++; if (n_overflow == 0) failures++;
    checks++; if (n_ddr_words == 0 || wlast_errors != 0) failures++;
    done = 1;
  end
endmodule
