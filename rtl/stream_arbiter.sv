// stream_arbiter: round-robin merge of NCH valid/ready word streams into one.
//
// Each clock the arbiter grants the first requesting input after the one granted
// last, forwards its word when the output is ready, and reports the granted channel
// index. Merging the channels' outputs into one stream towards DDR3 follows the
// published design ("multi-channel data are aggregated"); round-robin word
// interleaving is this design's choice. Combinational path from in_valid to
// out_valid and from out_ready to in_ready; fair: a waiting input is served within
// NCH accepted words.
module stream_arbiter #(
  parameter int unsigned NCH = 4,
  parameter int unsigned W   = 128,
  localparam int unsigned IW = (NCH <= 2) ? 1 : $clog2(NCH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NCH-1:0]      in_valid,
  input  logic [NCH-1:0][W-1:0] in_data,
  output logic [NCH-1:0]      in_ready,
  output logic                out_valid,
  output logic [W-1:0]        out_data,
  output logic [IW-1:0]       out_ch,
  input  logic                out_ready
);
  logic [IW-1:0] last_q;
  logic [IW-1:0] sel;
  logic          found;

  always_comb begin
    sel   = last_q;
    found = 1'b0;
    for (int unsigned i = 1; i <= NCH; i++) begin
      automatic int unsigned c = (int'(last_q) + i) % NCH;
      if (!found && in_valid[c]) begin
        sel   = IW'(c);
        found = 1'b1;
      end
    end
    out_valid = found;
    out_data  = in_data[sel];
    out_ch    = sel;
    in_ready  = '0;
    in_ready[sel] = found && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_q <= IW'(NCH - 1);
    else if (found && out_ready) last_q <= sel;
  end
endmodule
