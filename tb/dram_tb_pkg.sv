// dram_tb_pkg: shared helpers of the testbenches.
//
// The behavioural cell arrays start filled with a fixed pseudo-random
// pattern instead of zeros, so that a byte read from the wrong chip, bank,
// row, column or sector shows up as a data mismatch. pat_byte gives the
// initial content of one byte; word_of gives the initial 64-bit word w of
// the cache block at a physical address, as the memory system assembles it
// from the eight chips of a rank (byte c of word w = chip c, sector w).
package dram_tb_pkg;
  import sdram_pkg::*;

  function automatic logic [7:0] pat_byte(input int rank, input int chip, input int bank, input int row,
                                          input int col, input int sector);
    longint unsigned x;
    x = longint'(rank);
    x = x * 8 + longint'(chip);
    x = x * 16 + longint'(bank);
    x = x * 32768 + longint'(row);
    x = x * 128 + longint'(col);
    x = x * 8 + longint'(sector);
    x = x * 64'h9E3779B97F4A7C15;
    x = x ^ (x >> 29);
    return x[7:0] ^ x[39:32];
  endfunction

  function automatic logic [63:0] word_of(input logic [PADDR_BITS-1:0] paddr, input int w);
    dram_addr_t d;
    logic [63:0] v;
    d = map_addr(paddr);
    for (int c = 0; c < CHIPS; c++)
      v[8*c +: 8] = pat_byte(int'(d.rank), c, int'(d.bank), int'(d.row), int'(d.col), w);
    return v;
  endfunction
endpackage
