// subseed_gen: sub-seed generation controller ("ram controller") of one channel.
//
// The Toeplitz matrix of seed y is built from seed bits s_1..s_{m+n-1}. Sub-matrix t
// (t = 0..n/k-1) needs bits s_{tk+1}..s_{tk+m+k-1}, a window that moves by k bits per
// sub-matrix. Instead of a wide shift register, the controller copies the seed from
// the k-bit-wide level-1 memory into the (m+k-1)-bit-wide level-2 memory: for
// sub-seed t it reads level-1 words t, t+1, ..., t+W-1 (W = (m+k-1)/k) of seed y and
// writes each into slice p (bits p*k..p*k+k-1) of level-2 word y*n/k + t. The data
// bus carries the k-bit word replicated W times; only the k/8 byte enables of slice p
// are set, so the enable pattern shifts by k/8 bits per write. After W writes a
// sub-seed is complete; n/k sub-seeds make one seed, b seeds make a run.
// This copy scheme follows the published design; the start/busy/done handshake is
// this design's own.
// Timing: one level-1 read per clock, the matching level-2 write one clock later;
// a run takes b*(n/k)*W + 2 clocks from start to done.
// l2_din is l1_dout replicated (m+k-1)/k times with no logic in between; the byte
// enables alone select which slice of the level-2 word is written.
module subseed_gen #(
  parameter int unsigned M       = 1729,
  parameter int unsigned N       = 2464,
  parameter int unsigned K       = 32,
  parameter int unsigned B_SEEDS = 4,
  localparam int unsigned SUBW   = M + K - 1,
  localparam int unsigned W      = SUBW / K,              // slices per sub-seed
  localparam int unsigned NK     = N / K,                 // sub-seeds per seed
  localparam int unsigned SEEDW  = (M + N - 1) / K,       // level-1 words per seed
  localparam int unsigned D1     = B_SEEDS * SEEDW,
  localparam int unsigned D2     = B_SEEDS * NK,
  localparam int unsigned A1     = (D1 <= 2) ? 1 : $clog2(D1),
  localparam int unsigned A2     = (D2 <= 2) ? 1 : $clog2(D2),
  localparam int unsigned NBE    = SUBW / 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,     // pulse: (re)build all sub-seeds
  output logic            busy,
  output logic            done,      // one-cycle pulse at the end of a run
  // level-1 read port
  output logic            l1_rea,
  output logic [A1-1:0]   l1_raddr,
  input  logic [K-1:0]    l1_dout,
  // level-2 write port
  output logic [NBE-1:0]  l2_wea,
  output logic [A2-1:0]   l2_waddr,
  output logic [SUBW-1:0] l2_din
);
  logic [$clog2(B_SEEDS+1)-1:0] y_q;
  logic [$clog2(NK+1)-1:0]      t_q;
  logic [$clog2(W+1)-1:0]       p_q;
  logic [A1-1:0]                seed_base_q;  // y*SEEDW
  logic [A2-1:0]                sub_base_q;   // y*NK

  // write stage, one clock behind the read
  logic                         wr_q;
  logic [$clog2(W+1)-1:0]       wp_q;
  logic [A2-1:0]                waddr_q;
  logic                         last_q;

  logic last_read;
  assign last_read = (32'(p_q) == W - 1) && (32'(t_q) == NK - 1) && (32'(y_q) == B_SEEDS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; y_q <= '0; t_q <= '0; p_q <= '0;
      seed_base_q <= '0; sub_base_q <= '0;
      wr_q <= 1'b0; wp_q <= '0; waddr_q <= '0; last_q <= 1'b0; done <= 1'b0;
    end else begin
      wr_q   <= busy;
      wp_q   <= p_q;
      waddr_q <= sub_base_q + A2'(t_q);
      last_q <= busy && last_read;
      done   <= last_q;
      if (start && !busy) begin
        busy <= 1'b1; y_q <= '0; t_q <= '0; p_q <= '0;
        seed_base_q <= '0; sub_base_q <= '0;
      end else if (busy) begin
        if (32'(p_q) != W - 1) begin
          p_q <= p_q + 1'b1;
        end else begin
          p_q <= '0;
          if (32'(t_q) != NK - 1) begin
            t_q <= t_q + 1'b1;
          end else begin
            t_q <= '0;
            if (32'(y_q) != B_SEEDS - 1) begin
              y_q <= y_q + 1'b1;
              seed_base_q <= seed_base_q + A1'(SEEDW);
              sub_base_q  <= sub_base_q + A2'(NK);
            end else begin
              busy <= 1'b0;
            end
          end
        end
      end
    end
  end

  assign l1_rea   = busy;
  assign l1_raddr = seed_base_q + A1'(t_q) + A1'(p_q);

  always_comb begin
    l2_waddr = waddr_q;
    l2_din   = {W{l1_dout}};
    l2_wea   = '0;
    if (wr_q) l2_wea[wp_q*(K/8) +: K/8] = '1;
  end

  initial begin
    assert (K % 8 == 0)          else $error("subseed_gen: K must be a multiple of 8");
    assert (SUBW % K == 0)       else $error("subseed_gen: m+k-1 must be a multiple of k");
    assert (N % K == 0)          else $error("subseed_gen: n must be a multiple of k");
    assert ((M + N - 1) % K == 0) else $error("subseed_gen: m+n-1 must be a multiple of k");
  end
endmodule
