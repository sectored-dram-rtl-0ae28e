// vbl_read_path: Read FIFO and Read MUX of a Sectored DRAM chip's I/O.
//
// A READ moves 64 bits from the bank into the eight-entry Read FIFO, one
// 8-bit entry per sector (entry i holds the byte of sector i). The Read MUX
// then drives the DQ pins with one entry per beat. In a conventional chip a
// burst counter selects all eight entries in turn; here two vbl_encoder
// instances select only the entries of the open sectors, so a burst has
// popcount(sector bits) beats and closed sectors cost no bus time.
// The data bus is double data rate: each controller clock carries two beats,
// given here as dq[0] (first beat) and dq[1] (second beat) with a valid bit
// each; an odd burst leaves the second beat of its last clock idle.
// Timing: start in cycle t (with data and sector bits) drives the first two
// beats in cycle t+1 and the burst ends after ceil(n/2) clocks. A new start
// is accepted in the last clock of the running burst, giving seamless
// back-to-back bursts. The entry order and the DDR pairing are this
// design's choices; the FIFO, MUX and encoder structure follows the paper.
module vbl_read_path (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [63:0] data,      // byte i = sector i
  input  logic [7:0]  sb,
  output logic [1:0]  dq_valid,
  output logic [1:0][7:0] dq,
  output logic        busy,
  output logic        last       // final clock of the running burst
);
  logic [7:0][7:0] fifo_q;
  logic [7:0]      sb_q;
  logic [3:0]      beat_q;       // number of the first beat of this clock
  logic [3:0]      len;
  logic [2:0]      idx0, idx1;
  logic            v0, v1;

  popcount8 u_len (.in(sb_q), .count(len));
  vbl_encoder u_enc0 (.sb(sb_q), .beat(beat_q[2:0]),        .idx(idx0), .valid(v0));
  vbl_encoder u_enc1 (.sb(sb_q), .beat(beat_q[2:0] + 3'd1), .idx(idx1), .valid(v1));

  always_comb begin
    dq_valid[0] = busy && !beat_q[3] && v0;
    dq_valid[1] = busy && (beat_q + 4'd1 < len) && v1;
    dq[0] = dq_valid[0] ? fifo_q[idx0] : '0;
    dq[1] = dq_valid[1] ? fifo_q[idx1] : '0;
    last  = busy && (beat_q + 4'd2 >= len);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      beat_q <= '0;
      sb_q   <= '0;
      fifo_q <= '0;
    end else if (start) begin
      busy   <= |sb;
      beat_q <= '0;
      sb_q   <= sb;
      fifo_q <= data;
    end else if (busy) begin
      beat_q <= beat_q + 4'd2;
      if (last) busy <= 1'b0;
    end
  end

  // A burst may only be started when the bus is free or about to be.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) start |-> (!busy || last));
endmodule
