// seed_monitor: seed-reuse counter of one channel.
//
// The security parameter of a run of N hashes with the same seeds grows as
// eps = N*eps_hash + eps_seed. Rather than evaluate eps in hardware, the block
// counts the hashes N completed since the channel's sub-seeds were last rebuilt and
// raises update_req once N reaches the host-programmed threshold, the count at which
// eps reaches the chosen limit. The host then writes fresh seeds and restarts the
// sub-seed generation, which clears the count (clear input). Counting up to a
// threshold follows the published seed-renewal scheme; expressing the threshold as a
// hash count, the counter width and the clear rule are this design's choices.
// Timing: count and update_req change the clock after hash_done / clear.
module seed_monitor #(
  parameter int unsigned CNT_W = 48
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             hash_done,
  input  logic             clear,
  input  logic [CNT_W-1:0] threshold,
  output logic [CNT_W-1:0] count,
  output logic             update_req
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (hash_done && count != '1) begin
      count <= count + 1'b1;
    end
  end

  assign update_req = (count >= threshold);
endmodule
