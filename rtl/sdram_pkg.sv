// sdram_pkg: shared types and constants of the Sectored DRAM system.
//
// Sectored DRAM splits each DRAM row into eight independently activatable
// sectors (one per mat) and lets a burst carry only the beats of the
// sectors that are open. This package holds the organisation of the
// modelled DDR4 x8 chip and rank, the DDR4 timing parameters in controller
// clock cycles, the DDR4 command bus bundle, and the physical address map.
//
// Organisation and timing follow the evaluated configuration: DDR4-3200,
// 16 banks per rank, 32K rows per bank, 8 sectors per subarray, 4 ranks,
// tRCD/tRAS/tRC/tFAW = 13.75/35/48.75/25 ns, tRRD_L/tRRD_S = 5/2.5 ns,
// tAA = 12.5 ns, 32 sectors per tFAW window. The controller clock is the
// DDR4 command clock, tCK = 0.625 ns, so every nanosecond value is divided
// by 0.625. CWL, tRTP, tWR and tWTR are not given by the evaluation and
// take common DDR4-3200 values. tRP is tRC - tRAS.
package sdram_pkg;

  // ---------------------------------------------------------------- organisation
  localparam int unsigned SECTORS     = 8;     // sectors per row (one per mat)
  localparam int unsigned SEC_BITS    = 3;     // log2(SECTORS)
  localparam int unsigned CHIPS       = 8;     // x8 chips per rank (64-bit channel)
  localparam int unsigned BANKS       = 16;    // banks per chip (4 groups x 4)
  localparam int unsigned BANK_BITS   = 4;
  localparam int unsigned ROW_BITS    = 15;    // 32K rows per bank
  localparam int unsigned COL_BITS    = 10;    // 1K columns x 8 bit = 8 Kbit row per chip
  localparam int unsigned CB_COL_BITS = 7;     // column of a 64-bit prefetch (col[9:3])
  localparam int unsigned DQ_BITS     = 8;     // x8 chip
  localparam int unsigned WORD_BITS   = 64;    // one word = one sector across 8 chips
  localparam int unsigned BLOCK_BITS  = 512;   // cache block
  localparam int unsigned RANKS       = 4;
  localparam int unsigned RANK_BITS   = 2;

  // ---------------------------------------------------------------- timing (tCK)
  localparam int unsigned T_RCD  = 22;  // 13.75 ns
  localparam int unsigned T_RAS  = 56;  // 35.00 ns
  localparam int unsigned T_RC   = 78;  // 48.75 ns
  localparam int unsigned T_RP   = 22;  // tRC - tRAS
  localparam int unsigned T_FAW  = 40;  // 25.00 ns
  localparam int unsigned T_RRDL = 8;   //  5.00 ns
  localparam int unsigned T_RRDS = 4;   //  2.50 ns
  localparam int unsigned T_CL   = 20;  // tAA 12.5 ns
  localparam int unsigned T_CWL  = 16;  // DDR4-3200 value (assumed)
  localparam int unsigned T_RTP  = 12;  // 7.5 ns (assumed)
  localparam int unsigned T_WR   = 24;  // 15 ns (assumed)
  localparam int unsigned T_WTR  = 12;  // 7.5 ns, tWTR_L (assumed)
  localparam int unsigned FAW_SECTORS = 32; // sectors of four full rows per tFAW

  // ---------------------------------------------------------------- address map
  // Row-Bank-Rank-Column-Channel (MSB to LSB) above the 64-byte block offset,
  // one channel (no channel bits).
  localparam int unsigned PADDR_BITS = 6 + CB_COL_BITS + RANK_BITS + BANK_BITS + ROW_BITS; // 34

  typedef logic [SECTORS-1:0] sector_mask_t;

  typedef struct packed {
    logic [ROW_BITS-1:0]    row;
    logic [BANK_BITS-1:0]   bank;
    logic [RANK_BITS-1:0]   rank;
    logic [CB_COL_BITS-1:0] col;
  } dram_addr_t;

  function automatic dram_addr_t map_addr(input logic [PADDR_BITS-1:0] paddr);
    dram_addr_t d;
    d.col  = paddr[6 +: CB_COL_BITS];
    d.rank = paddr[6 + CB_COL_BITS +: RANK_BITS];
    d.bank = paddr[6 + CB_COL_BITS + RANK_BITS +: BANK_BITS];
    d.row  = paddr[6 + CB_COL_BITS + RANK_BITS + BANK_BITS +: ROW_BITS];
    return d;
  endfunction

  // ---------------------------------------------------------------- DDR4 command bus
  // One command per tCK. ACT carries row bits A16..A14 on RAS_n/CAS_n/WE_n.
  typedef struct packed {
    logic        cs_n;
    logic        act_n;
    logic        ras_n;   // A16 during ACT
    logic        cas_n;   // A15 during ACT
    logic        we_n;    // A14 during ACT
    logic [1:0]  bg;
    logic [1:0]  ba;
    logic [13:0] a;       // A13..A0 (A10 = AP / all-bank, A12 = BC_n)
  } ddr4_cmd_t;

  localparam ddr4_cmd_t DDR4_DES = '{cs_n: 1'b1, act_n: 1'b1, ras_n: 1'b1, cas_n: 1'b1,
                                     we_n: 1'b1, bg: 2'b00, ba: 2'b00, a: '0};

  typedef enum logic [2:0] {
    CMD_NOP, CMD_ACT, CMD_PRE, CMD_PREA, CMD_RD, CMD_WR, CMD_REF, CMD_OTHER
  } cmd_e;

  // Decode a command bus sample into the command it carries.
  function automatic cmd_e decode_cmd(input ddr4_cmd_t c);
    if (c.cs_n) return CMD_NOP;
    if (!c.act_n) return CMD_ACT;
    unique case ({c.ras_n, c.cas_n, c.we_n})
      3'b010:  return c.a[10] ? CMD_PREA : CMD_PRE;
      3'b101:  return CMD_RD;
      3'b100:  return CMD_WR;
      3'b001:  return CMD_REF;
      3'b111:  return CMD_NOP;
      default: return CMD_OTHER;
    endcase
  endfunction

  // Sector bits travel on the address pins that a single-bank PRE leaves
  // unused. Eight of the fourteen free pins are used: A7..A0.
  function automatic ddr4_cmd_t enc_pre(input logic [BANK_BITS-1:0] bank, input sector_mask_t sb);
    ddr4_cmd_t c = DDR4_DES;
    c.cs_n = 1'b0; c.ras_n = 1'b0; c.we_n = 1'b0;
    {c.bg, c.ba} = bank;
    c.a[SECTORS-1:0] = sb;
    return c;
  endfunction

  function automatic ddr4_cmd_t enc_act(input logic [BANK_BITS-1:0] bank, input logic [ROW_BITS-1:0] row);
    ddr4_cmd_t c = DDR4_DES;
    c.cs_n = 1'b0; c.act_n = 1'b0;
    {c.bg, c.ba} = bank;
    c.we_n = row[14];
    c.a    = row[13:0];
    return c;
  endfunction

  function automatic ddr4_cmd_t enc_cas(input logic wr, input logic [BANK_BITS-1:0] bank,
                                        input logic [CB_COL_BITS-1:0] col, input logic ap);
    ddr4_cmd_t c = DDR4_DES;
    c.cs_n = 1'b0; c.cas_n = 1'b0; c.we_n = !wr;
    {c.bg, c.ba} = bank;
    c.a[9:3] = col;
    c.a[10]  = ap;
    c.a[12]  = 1'b1;          // BC_n high: no burst chop
    return c;
  endfunction

  // ---------------------------------------------------------------- cell array port
  // What a chip asks of its (analog) cell array in one clock.
  typedef struct packed {
    logic                   act;
    logic [BANK_BITS-1:0]   act_bank;
    logic [ROW_BITS-1:0]    act_row;
    logic [SECTORS-1:0]     lwl_en;    // local wordlines enabled by the ACT
    logic                   pre;
    logic                   pre_all;
    logic [BANK_BITS-1:0]   pre_bank;
    logic                   rd;
    logic                   rd_ap;
    logic [BANK_BITS-1:0]   rd_bank;
    logic [CB_COL_BITS-1:0] rd_col;
    logic                   wr;
    logic                   wr_ap;
    logic [BANK_BITS-1:0]   wr_bank;
    logic [CB_COL_BITS-1:0] wr_col;
    logic [63:0]            wdata;     // byte s = sector s
    logic [SECTORS-1:0]     wmask;
  } arr_req_t;

  // Events the system reports, one pulse per occurrence.
  typedef struct packed {
    logic lsq_merge;        // LSQ Lookahead added a word to an older entry
    logic l1_hit;
    logic l1_sector_miss;
    logic l1_cache_miss;
    logic l1_writeback;
    logic sp_predicted;     // Sector Predictor added words to a miss
    logic pre_closed;       // PRE sent to a closed bank to carry sector bits
    logic reopen;           // open row lacked a sector: PRE and ACT again
    logic act_partial;      // ACT of fewer than eight sectors
    logic faw_relaxed;      // more than four ACTs in one tFAW window
    logic faw_stall;        // ACT held back by the 32-sector window
    logic autopre;          // READ/WRITE with auto-precharge
  } sys_events_t;

endpackage
