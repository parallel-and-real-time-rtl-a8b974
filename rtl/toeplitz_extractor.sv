// toeplitz_extractor: three-stage real-time Toeplitz hash of one channel.
//
// Hashes every n consecutive raw bits (n/k words of k bits) into m output bits with
// an m x n Toeplitz matrix, one m x k sub-matrix per accepted raw word:
//   Phase I   (address): the level-2 read address is the "random address" on the
//             first word of a hash and the "sequence address" (start + t) on the
//             others. The random address is y*n/k, where the seed index y is the
//             interval of the x-bit LFSR value: 2^x split into b equal intervals,
//             i.e. the top log2(b) bits. The level-2 memory returns the sub-seed one
//             clock later.
//   Phase II  (submatrix_mult): sub-matrix built from the sub-seed, AND/XOR with
//             the k raw bits, registered.
//   Phase III (toeplitz_acc): m one-bit accumulators; the result is valid after the
//             n/k-th word.
// The pipeline has no back-pressure: every raw word with raw_valid is processed,
// so the output rate is m bits per n/k valid words (one m-bit result every 77 clocks
// at the default sizes when raw words arrive every clock). out_valid rises two
// clocks after the clock edge that accepts the last word of a hash (memory read,
// product register, accumulator register).
// The three phases, address multiplexer and LFSR interval selection follow the
// published design; the raw bit order (bit 0 of a word is the first raw bit), the
// LFSR polynomial, and the en input that holds the pipeline in reset state until
// seeds exist are this design's choices.
module toeplitz_extractor #(
  parameter int unsigned M       = 1729,
  parameter int unsigned N       = 2464,
  parameter int unsigned K       = 32,
  parameter int unsigned B_SEEDS = 4,     // power of two
  parameter int unsigned X       = 16,
  parameter logic [X-1:0] LFSR_SEED = X'(16'hACE1),
  localparam int unsigned NK     = N / K,
  localparam int unsigned D2     = B_SEEDS * NK,
  localparam int unsigned A2     = (D2 <= 2) ? 1 : $clog2(D2),
  localparam int unsigned YW     = (B_SEEDS <= 2) ? 1 : $clog2(B_SEEDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,         // extraction enabled (seeds present)
  input  logic            raw_valid,
  input  logic [K-1:0]    raw_data,
  // level-2 memory read port
  output logic            l2_rea,
  output logic [A2-1:0]   l2_raddr,
  input  logic [M+K-2:0]  l2_dout,
  // result
  output logic            out_valid,
  output logic [M-1:0]    out_data,
  output logic [YW-1:0]   out_seed    // seed index used by the result on out_data
);
  // ---------------- Phase I: address generation ----------------
  logic [X-1:0]          lfsr_val;
  logic [$clog2(NK+1)-1:0] t_q;
  logic [A2-1:0]         base_q;
  logic [YW-1:0]         y_rand, y_q;
  logic [A2-1:0]         rand_addr;
  logic                  take;

  lfsr #(.X(X), .SEED(LFSR_SEED)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .en(1'b1), .value(lfsr_val)
  );

  assign take      = en && raw_valid;
  assign y_rand    = (B_SEEDS == 1) ? '0 : YW'(lfsr_val[X-1 -: YW]);
  assign rand_addr = A2'(y_rand) * A2'(NK);
  // address multiplexer: 1 = random address (first sub-seed), 0 = sequence address
  assign l2_raddr  = (t_q == 0) ? rand_addr : base_q + A2'(t_q);
  assign l2_rea    = take;

  logic          s1_valid, s1_first, s1_last;
  logic [K-1:0]  s1_d;
  logic [YW-1:0] s1_y, s2_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q <= '0; base_q <= '0; y_q <= '0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_d <= '0; s1_y <= '0;
    end else begin
      s1_valid <= take;
      if (!en) begin
        t_q <= '0;
      end else if (take) begin
        s1_first <= (t_q == 0);
        s1_last  <= (32'(t_q) == NK - 1);
        s1_d     <= raw_data;
        s1_y     <= (t_q == 0) ? y_rand : y_q;
        if (t_q == 0) begin
          base_q <= rand_addr;
          y_q    <= y_rand;
        end
        t_q <= (32'(t_q) == NK - 1) ? '0 : t_q + 1'b1;
      end
    end
  end

  // ---------------- Phase II: sub-matrix multiply ----------------
  logic         s2_valid, s2_first, s2_last;
  logic [M-1:0] s2_prod;

  submatrix_mult #(.M(M), .K(K)) u_mult (
    .clk(clk), .rst_n(rst_n),
    .in_valid(s1_valid), .in_first(s1_first), .in_last(s1_last),
    .u(l2_dout), .d(s1_d),
    .out_valid(s2_valid), .out_first(s2_first), .out_last(s2_last), .prod(s2_prod)
  );

  // ---------------- Phase III: accumulate ----------------
  toeplitz_acc #(.M(M)) u_acc (
    .clk(clk), .rst_n(rst_n),
    .in_valid(s2_valid), .in_first(s2_first), .in_last(s2_last), .in_prod(s2_prod),
    .out_valid(out_valid), .result(out_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_y <= '0; out_seed <= '0;
    end else begin
      if (s1_valid) s2_y <= s1_y;
      if (s2_valid && s2_last) out_seed <= s2_y;
    end
  end

  initial begin
    assert (N % K == 0) else $error("toeplitz_extractor: n must be a multiple of k");
    assert ((1 << YW) == B_SEEDS || B_SEEDS == 1) else $error("toeplitz_extractor: b must be a power of two");
  end
endmodule
