// csr: control and status registers of the post-processing core.
//
// Written and read over the local bus of the host AXI arbiter (32-bit registers,
// register index = byte address bits 7:2, read data combinational):
//   0 CTRL      W: bits 3:0 start sub-seed generation of channel 0..3 (one-clock
//                  pulse, not stored), bit 8 extraction enable. R: bit 8.
//   1 STATUS    R: 3:0 generation busy, 7:4 seeds ready, 11:8 seed-update request,
//                  15:12 packer overflow, 19:16 raw FIFO overflow, 20 DMA error
//   2 THRESH_LO R/W: seed-update threshold in hashes, bits 31:0
//   3 THRESH_HI R/W: bits CNT_W-1:32
//   4 DMA_PTR   R: ring offset up to which random data has been written
//   8..11       R: hashes done by channel 0..3 since its last regeneration (bits 31:0)
// "seeds ready" of a channel is set by the first completed generation and stays set.
// The seed-renewal flow (threshold, host writes new seeds, regeneration) follows the
// published design; the register map is this design's own.
module csr #(
  parameter int unsigned NCH   = 4,
  parameter int unsigned CNT_W = 48,
  parameter logic [CNT_W-1:0] THRESH_RESET = CNT_W'(64'd140_259_740_260)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [5:0]       waddr,      // register index
  input  logic [31:0]      wdata,
  input  logic [5:0]       raddr,
  output logic [31:0]      rdata,
  // control
  output logic [NCH-1:0]   gen_start,
  output logic             extract_en,
  output logic [CNT_W-1:0] threshold,
  // status
  input  logic [NCH-1:0]   gen_busy,
  input  logic [NCH-1:0]   gen_done,
  output logic [NCH-1:0]   seeds_ready,
  input  logic [NCH-1:0]   update_req,
  input  logic [NCH-1:0]   pack_ovf,
  input  logic [NCH-1:0]   fifo_ovf,
  input  logic             dma_err,
  input  logic [31:0]      dma_ptr,
  input  logic [NCH-1:0][CNT_W-1:0] hash_cnt
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_start   <= '0;
      extract_en  <= 1'b0;
      threshold   <= THRESH_RESET;
      seeds_ready <= '0;
    end else begin
      gen_start   <= '0;
      seeds_ready <= seeds_ready | gen_done;
      if (we) begin
        unique case (waddr)
          6'd0: begin gen_start <= wdata[NCH-1:0]; extract_en <= wdata[8]; end
          6'd2: threshold[31:0] <= wdata;
          6'd3: threshold[CNT_W-1:32] <= wdata[CNT_W-33:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    unique case (raddr)
      6'd0: rdata[8] = extract_en;
      6'd1: begin
        rdata[NCH-1:0]         = gen_busy;
        rdata[4 +: NCH]        = seeds_ready;
        rdata[8 +: NCH]        = update_req;
        rdata[12 +: NCH]       = pack_ovf;
        rdata[16 +: NCH]       = fifo_ovf;
        rdata[20]              = dma_err;
      end
      6'd2: rdata = threshold[31:0];
      6'd3: rdata = 32'(threshold[CNT_W-1:32]);
      6'd4: rdata = dma_ptr;
      default:
        if (raddr >= 6'd8 && raddr < 6'(8 + NCH)) rdata = hash_cnt[raddr - 6'd8][31:0];
    endcase
  end

  initial assert (NCH <= 4 && CNT_W > 32 && CNT_W <= 64) else $error("csr: NCH <= 4, 32 < CNT_W <= 64");
endmodule
