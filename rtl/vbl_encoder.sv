// vbl_encoder: the 8x3 encoder of Variable Burst Length.
//
// In a DDR4 chip a burst counter walks through the eight Read FIFO (or
// Write FIFO) entries, one per beat. Variable Burst Length replaces that
// counter by this encoder: given the sector bits of the targeted bank and
// the number of the current beat, it returns the index of the FIFO entry
// that holds the data of the beat-th open sector, so that the entries of
// closed sectors are skipped. Entries are visited in ascending sector order
// (sector 0 first), the order in which a full burst transfers them.
// Interface: sb = sector bits, beat = beat number within the burst;
// idx = FIFO entry, valid = the burst has such a beat (beat < popcount(sb)).
// Purely combinational.
module vbl_encoder (
  input  logic [7:0] sb,
  input  logic [2:0] beat,
  output logic [2:0] idx,
  output logic       valid
);
  logic [3:0] seen;   // open sectors below the one being examined

  always_comb begin
    idx   = '0;
    valid = 1'b0;
    seen  = '0;
    for (int i = 0; i < 8; i++) begin
      if (sb[i]) begin
        if (seen == {1'b0, beat}) begin
          idx   = 3'(i);
          valid = 1'b1;
        end
        seen = seen + 4'd1;
      end
    end
  end
endmodule
