// tb_subseed_gen: level-1 and level-2 memories modelled here; after a run every
// level-2 word y*n/k+t must equal seed bits t*k .. t*k+m+k-2 of seed y, and the run
// must take b*(n/k)*((m+k-1)/k) + 2 clocks. A second run over new seeds checks restart.
module tb_subseed_gen;
  localparam int unsigned M = 25, N = 64, K = 8, B = 2;
  localparam int unsigned SUBW = M + K - 1, W = SUBW / K, NK = N / K, SEEDW = (M + N - 1) / K;
  localparam int unsigned D1 = B * SEEDW, D2 = B * NK, A1 = $clog2(D1), A2 = $clog2(D2);
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic busy, done, l1_rea;
  logic [A1-1:0] l1_raddr;
  logic [K-1:0] l1_dout;
  logic [SUBW/8-1:0] l2_wea;
  logic [A2-1:0] l2_waddr;
  logic [SUBW-1:0] l2_din;
  logic [K-1:0] l1 [D1];
  logic [SUBW-1:0] l2 [D2];
  logic [M+N-2:0] seed [B];
  int checks = 0, failures = 0;

  subseed_gen #(.M(M), .N(N), .K(K), .B_SEEDS(B)) dut (.*);

  always_ff @(posedge clk) begin
    if (l1_rea) l1_dout <= l1[l1_raddr];
    for (int b = 0; b < SUBW / 8; b++) if (l2_wea[b]) l2[l2_waddr][b*8 +: 8] <= l2_din[b*8 +: 8];
  end

  task automatic run_once();
    int cyc = 0;
    for (int y = 0; y < B; y++) begin
      for (int i = 0; i < M + N - 1; i++) seed[y][i] = 1'($urandom);
      for (int w = 0; w < SEEDW; w++) l1[y*SEEDW + w] = seed[y][w*K +: K];
    end
    for (int a = 0; a < D2; a++) l2[a] = '0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc + 1 != B * NK * W + 2) begin failures++; $display("cycles %0d", cyc + 1); end
    for (int y = 0; y < B; y++)
      for (int t = 0; t < NK; t++) begin
        checks++;
        if (l2[y*NK + t] !== seed[y][t*K +: SUBW]) begin
          failures++;
          if (failures < 4) $display("y=%0d t=%0d got %h exp %h", y, t, l2[y*NK+t], seed[y][t*K +: SUBW]);
        end
      end
    checks++; if (busy) failures++;
  endtask

  initial begin
    l1_dout = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_once();
    run_once();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
