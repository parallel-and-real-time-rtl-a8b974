// tb_toeplitz_extractor: the level-2 memory is modelled here. Each result is checked
// against the full m x n Toeplitz product of the raw bits with the seed that an
// independent LFSR model says was selected; the rate (one result per n/k words),
// the 3-clock latency and gaps in the raw stream are checked too.
module tb_toeplitz_extractor;
  localparam int unsigned M = 25, N = 64, K = 8, B = 4, X = 16;
  localparam int unsigned NK = N / K, SUBW = M + K - 1, D2 = B * NK, A2 = $clog2(D2);
  logic clk = 0, rst_n = 0, en = 0, raw_valid = 0;
  always #5 clk = ~clk;
  logic [K-1:0] raw_data = '0;
  logic l2_rea;
  logic [A2-1:0] l2_raddr;
  logic [SUBW-1:0] l2_dout;
  logic out_valid;
  logic [M-1:0] out_data;
  logic [1:0] out_seed;
  logic [M+N-2:0] seed [B];
  logic [SUBW-1:0] l2 [D2];
  logic [15:0] lf;
  int checks = 0, failures = 0, results = 0, cyc = 0, last_word_cyc = 0;
  logic [N-1:0] blockbits [$];
  int ysel [$];
  logic [N-1:0] cur;
  int widx = 0;

  toeplitz_extractor #(.M(M), .N(N), .K(K), .B_SEEDS(B), .X(X), .LFSR_SEED(16'hACE1)) dut (.*);

  always_ff @(posedge clk) if (l2_rea) l2_dout <= l2[l2_raddr];

  // independent LFSR model, free running from reset like the design's
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) lf <= 16'hACE1;
    else        lf <= {lf[14:0], lf[15] ^ lf[13] ^ lf[12] ^ lf[10]};
  always_ff @(posedge clk) cyc <= cyc + 1;

  function automatic logic [M-1:0] hash(logic [M+N-2:0] s, logic [N-1:0] d);
    logic [M-1:0] a = '0;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) a[r] ^= s[r + c] & d[c];
    return a;
  endfunction

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      automatic logic [N-1:0] d = blockbits.pop_front();
      automatic int y = ysel.pop_front();
      checks += 3;
      if (out_data !== hash(seed[y], d)) begin failures++; $display("hash mismatch result %0d", results); end
      if (out_seed !== 2'(y)) failures++;
      if (cyc - last_word_cyc != 2 && !(results > 0 && last_word_cyc == 0)) begin
        failures++; $display("latency %0d", cyc - last_word_cyc);
      end
      results++;
    end
  end

  task automatic send(logic gap_ok);
    if (gap_ok) while ($urandom % 4 == 0) begin @(negedge clk); raw_valid = 0; end
    @(negedge clk);
    raw_valid = 1; raw_data = 8'($urandom);
    if (widx == 0) ysel.push_back(int'(lf[15:14]));
    cur[widx*K +: K] = raw_data;
    widx++;
    if (widx == NK) begin blockbits.push_back(cur); widx = 0; last_word_cyc = cyc + 1; end
  endtask

  initial begin
    for (int y = 0; y < B; y++) begin
      for (int i = 0; i < M + N - 1; i++) seed[y][i] = 1'($urandom);
      for (int t = 0; t < NK; t++) l2[y*NK + t] = seed[y][t*K +: SUBW];
    end
    l2_dout = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); en = 1;
    // back-to-back: one result every NK clocks
    begin
      automatic int first_cyc = 0;
      for (int w = 0; w < 6 * NK; w++) send(0);
      @(negedge clk); raw_valid = 0;
      repeat (5) @(posedge clk);
      checks++; if (results != 6) begin failures++; $display("results %0d", results); end
    end
    // with gaps
    for (int w = 0; w < 30 * NK; w++) send(1);
    @(negedge clk); raw_valid = 0;
    repeat (6) @(posedge clk);
    checks++; if (results != 36) failures++;
    // seed choices spread over all b seeds
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rate: with words every clock, results are NK clocks apart
  int prev_res_cyc = -1, gaps_ok = 0;
  always @(posedge clk) begin
    #2;
    if (out_valid && results <= 6) begin
      if (prev_res_cyc >= 0) begin checks++; if (cyc - prev_res_cyc != NK) failures++; end
      prev_res_cyc = cyc;
    end
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
