// sector_predictor: Sector History Table (SHT) of the Sector Predictor.
//
// The predictor remembers which words of a cache block the processor
// touched during the block's last stay in the L1 cache, and asks for the
// same words the next time a load/store from a similar context misses.
// The SHT has M entries of 8 "previously used sectors" bits. It is indexed
// by a log2(M)-bit table index formed by XOR-ing two adjacent log2(M)-bit
// fields of the instruction address (PC[log2M-1:0] and PC[2log2M-1:log2M])
// with the word offset of the data address. On an L1 cache miss or sector
// miss the L1 looks the index up and ORs the previously used sectors into
// the request; the L1 keeps the index with the block and, on eviction,
// writes the block's currently used sectors back to that SHT entry.
// Interface: lookup is combinational (pc, word_off -> idx, pred). One
// update per clock (upd with upd_idx/upd_sb), written at the clock edge;
// when several evictions compete the L1 presents only one, as the paper
// allows. Entries reset to zero (no extra words predicted): this reset
// value and the exact PC bit positions are this design's choices.
module sector_predictor #(
  parameter int unsigned M    = 512,
  parameter int unsigned PC_W = 32,
  parameter int unsigned IW   = $clog2(M)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PC_W-1:0] pc,
  input  logic [2:0]      word_off,
  output logic [IW-1:0]   idx,
  output logic [7:0]      pred,
  input  logic            upd,
  input  logic [IW-1:0]   upd_idx,
  input  logic [7:0]      upd_sb
);
  logic [7:0] sht_q [M];

  always_comb begin
    idx  = pc[IW-1:0] ^ pc[2*IW-1:IW] ^ IW'(word_off);
    pred = sht_q[idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) sht_q[i] <= '0;
    end else if (upd) begin
      sht_q[upd_idx] <= upd_sb;
    end
  end
endmodule
