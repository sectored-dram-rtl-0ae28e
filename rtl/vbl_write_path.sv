// vbl_write_path: Write FIFO of a Sectored DRAM chip's I/O.
//
// The Write FIFO is organised like the Read FIFO: eight 8-bit entries, entry
// i holding the byte for sector i. With Variable Burst Length a WRITE burst
// has only popcount(sector bits) beats, so the same 8x3 encoder that steers
// the Read MUX steers each arriving beat into the entry of the next open
// sector. When all beats are in, the FIFO contents are handed to the bank
// with the sector bits as a byte mask, so closed sectors are not written.
// Interface: start (cycle t, with sector bits) announces a burst whose beats
// arrive as pairs on dq/dq_valid in cycles t+1 .. t+ceil(n/2); done pulses
// one cycle after the last pair with data (byte i = sector i), mask and
// the tag given at start.
// The DDR pairing and the one-cycle handover are this design's choices.
module vbl_write_path #(
  parameter int unsigned TAG_W = 1    // caller's label for the burst (bank, column)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  sb,
  input  logic [TAG_W-1:0] tag,
  input  logic [1:0]  dq_valid,
  input  logic [1:0][7:0] dq,
  output logic        done,
  output logic [63:0] data,
  output logic [7:0]  mask,
  output logic [TAG_W-1:0] done_tag,
  output logic        busy
);
  logic [7:0][7:0] fifo_q;
  logic [7:0]      sb_q;
  logic [3:0]      beat_q;
  logic [3:0]      len;
  logic [2:0]      idx0, idx1;
  logic            v0, v1, last;
  logic [7:0][7:0] fifo_n;       // FIFO after this clock's beats
  logic [63:0]     data_q;
  logic [7:0]      mask_q;
  logic [TAG_W-1:0] tag_q;

  popcount8 u_len (.in(sb_q), .count(len));
  vbl_encoder u_enc0 (.sb(sb_q), .beat(beat_q[2:0]),        .idx(idx0), .valid(v0));
  vbl_encoder u_enc1 (.sb(sb_q), .beat(beat_q[2:0] + 3'd1), .idx(idx1), .valid(v1));

  assign last = busy && (beat_q + 4'd2 >= len);
  assign data = data_q;
  assign mask = mask_q;

  always_comb begin
    fifo_n = fifo_q;
    if (busy && dq_valid[0] && v0 && !beat_q[3])            fifo_n[idx0] = dq[0];
    if (busy && dq_valid[1] && v1 && (beat_q + 4'd1 < len)) fifo_n[idx1] = dq[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      beat_q <= '0;
      sb_q   <= '0;
      fifo_q <= '0;
      data_q <= '0;
      mask_q <= '0;
      tag_q  <= '0;
      done_tag <= '0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        fifo_q <= fifo_n;
        beat_q <= beat_q + 4'd2;
        if (last) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          data_q <= fifo_n;
          mask_q <= sb_q;
          done_tag <= tag_q;
        end
      end
      if (start) begin
        busy   <= |sb;
        beat_q <= '0;
        sb_q   <= sb;
        tag_q  <= tag;
        fifo_q <= '0;
      end
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) start |-> (!busy || last));
endmodule
