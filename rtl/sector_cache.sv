// sector_cache: L1 data cache with per-word sector bits and Sector Predictor.
//
// A Sectored DRAM system moves single 64-bit words, so a cache block may
// hold only some of its eight words. Each block therefore carries eight
// sector (valid) bits next to its tag. A request brings an address and the
// sector bits it wants (from LSQ Lookahead). Looking up the set gives one of
//   sector hit   : tag matches and every wanted sector is present;
//   sector miss  : tag matches, some wanted sectors are missing;
//   cache miss   : no tag matches.
// On a sector miss the missing sectors are (wanted | predicted) AND NOT
// present; on a cache miss a block is allocated and (wanted | predicted)
// sectors are fetched. "Predicted" are the previously used sectors read from
// the Sector History Table with the table index of this access (PC fields
// XOR word offset). A newly allocated block stores that table index and
// clears its currently used sectors; every access then sets the bit of the
// word it touches; when the block is evicted its currently used sectors are
// written to the SHT entry named by its table index. When the fill returns,
// only sectors not already present are written and their bits are set.
// Organisation: SIZE bytes, WAYS ways, 64-byte blocks (32 KiB as evaluated;
// 8 ways, round-robin replacement, write-back/write-allocate with per-sector
// dirty bits, and a blocking single-miss controller are this design's
// choices). Evicted dirty blocks are written back with their dirty sectors
// as the write's sector bits, so only dirty words cross the channel.
// Timing: a hit answers in the clock after the request is accepted; a miss
// waits for the memory response and answers in the clock after it. Memory
// responses may be shared by several caches: a cache takes one only if it
// is for its missing block and brings every sector it asked for.
module sector_cache #(
  parameter int unsigned SIZE  = 32768,
  parameter int unsigned WAYS  = 8,
  parameter int unsigned AW    = 34,
  parameter int unsigned PC_W  = 32,
  parameter int unsigned SHT_M = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  // processor side
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [AW-1:0]   req_addr,
  input  logic [PC_W-1:0] req_pc,
  input  logic [7:0]      req_sb,
  input  logic            req_store,
  input  logic [63:0]     req_wdata,
  output logic            resp_valid,
  output logic [63:0]     resp_rdata,
  // memory side
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output logic            mem_req_write,
  output logic [AW-1:0]   mem_req_addr,
  output logic [7:0]      mem_req_sb,
  output logic [511:0]    mem_req_wdata,
  input  logic            mem_resp_valid,
  input  logic [AW-1:0]   mem_resp_addr,
  input  logic [7:0]      mem_resp_sb,
  input  logic [511:0]    mem_resp_rdata,
  // events
  output logic            ev_hit,
  output logic            ev_sector_miss,
  output logic            ev_cache_miss,
  output logic            ev_writeback,
  output logic            ev_predicted     // SP added words beyond the request
);
  localparam int unsigned SETS = SIZE / 64 / WAYS;
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned NBLK = SETS * WAYS;
  localparam int unsigned BW   = $clog2(NBLK);
  localparam int unsigned TW   = AW - 6 - SW;
  localparam int unsigned IW   = $clog2(SHT_M);

  typedef struct packed {
    logic          valid;
    logic [TW-1:0] tag;
    logic [7:0]    sec;     // sector (valid word) bits
    logic [7:0]    dirty;
    logic [7:0]    cur;     // currently used sectors
    logic [IW-1:0] tidx;    // SHT table index
  } meta_t;

  typedef enum logic [1:0] { S_IDLE, S_WB, S_RD, S_WAIT } state_e;

  meta_t         meta_q [NBLK];
  logic [511:0]  data_q [NBLK];
  logic [WW-1:0] rr_q   [SETS];
  state_e        st_q;

  // latched request
  logic [AW-1:0] r_addr;
  logic          r_store;
  logic [63:0]   r_wdata;
  logic [BW-1:0] r_blk;
  logic [7:0]    r_fetch;
  logic [AW-1:0] wb_addr;
  logic [7:0]    wb_sb;
  logic [511:0]  wb_data;

  // ---------------------------------------------------------------- lookup
  logic [SW-1:0] set;
  logic [TW-1:0] tag;
  logic          hit;
  logic [WW-1:0] hway;
  logic [BW-1:0] hblk, vblk;
  logic [IW-1:0] sp_idx;
  logic [7:0]    sp_pred;
  logic          sp_upd;
  logic [IW-1:0] sp_upd_idx;
  logic [7:0]    sp_upd_sb;

  assign set = req_addr[6 +: SW];
  assign tag = req_addr[AW-1 -: TW];

  always_comb begin
    hit  = 1'b0;
    hway = '0;
    for (int w = 0; w < WAYS; w++)
      if (meta_q[set * WAYS + w].valid && meta_q[set * WAYS + w].tag == tag) begin
        hit  = 1'b1;
        hway = WW'(w);
      end
    hblk = BW'(set * WAYS + hway);
    vblk = BW'(set * WAYS + rr_q[set]);
  end

  sector_predictor #(.M(SHT_M), .PC_W(PC_W)) u_sp (
    .clk, .rst_n, .pc(req_pc), .word_off(req_addr[5:3]), .idx(sp_idx), .pred(sp_pred),
    .upd(sp_upd), .upd_idx(sp_upd_idx), .upd_sb(sp_upd_sb)
  );

  logic accept, shit, smiss, cmiss;
  assign req_ready = (st_q == S_IDLE);
  assign accept    = req_valid && req_ready;
  assign shit      = accept && hit && (req_sb & ~meta_q[hblk].sec) == '0;
  assign smiss     = accept && hit && !shit;
  assign cmiss     = accept && !hit;

  assign ev_hit         = shit;
  assign ev_sector_miss = smiss;
  assign ev_cache_miss  = cmiss;
  assign ev_predicted   = (smiss && (sp_pred & ~req_sb & ~meta_q[hblk].sec) != '0) ||
                          (cmiss && (sp_pred & ~req_sb) != '0);

  // Eviction trains the SHT with the victim's currently used sectors.
  assign sp_upd     = cmiss && meta_q[vblk].valid;
  assign sp_upd_idx = meta_q[vblk].tidx;
  assign sp_upd_sb  = meta_q[vblk].cur;

  // ---------------------------------------------------------------- memory side
  always_comb begin
    mem_req_valid = (st_q == S_WB) || (st_q == S_RD);
    mem_req_write = (st_q == S_WB);
    mem_req_addr  = (st_q == S_WB) ? wb_addr : {r_addr[AW-1:6], 6'b0};
    mem_req_sb    = (st_q == S_WB) ? wb_sb : r_fetch;
    mem_req_wdata = wb_data;
  end
  assign ev_writeback = (st_q == S_WB) && mem_req_ready;

  // ---------------------------------------------------------------- access
  // A response is this cache's when it is for the missing block and brings
  // every sector this cache asked for (responses are seen by every cache on
  // the channel, and another cache may have fetched other words of it).
  logic fill_ok;
  assign fill_ok = st_q == S_WAIT && mem_resp_valid && mem_resp_addr[AW-1:6] == r_addr[AW-1:6] &&
                   (r_fetch & ~mem_resp_sb) == '0;

  // The block touched by a completing access: a hit now, or the fill.
  logic          fin;
  logic [BW-1:0] f_blk;
  logic [2:0]    f_word;
  logic          f_store;
  logic [63:0]   f_wdata;
  logic [511:0]  f_data;
  meta_t         f_meta;
  logic [7:0]    fill;

  always_comb begin
    fin     = shit || fill_ok;
    f_blk   = shit ? hblk : r_blk;
    f_word  = shit ? req_addr[5:3] : r_addr[5:3];
    f_store = shit ? req_store : r_store;
    f_wdata = shit ? req_wdata : r_wdata;
    f_data  = data_q[f_blk];
    f_meta  = meta_q[f_blk];
    fill    = fill_ok ? (mem_resp_sb & ~f_meta.sec) : '0;
    for (int s = 0; s < 8; s++)
      if (fill[s]) f_data[64*s +: 64] = mem_resp_rdata[64*s +: 64];
    f_meta.sec = f_meta.sec | fill;
    f_meta.cur[f_word] = 1'b1;
    if (f_store) begin
      f_data[64*f_word +: 64] = f_wdata;
      f_meta.dirty[f_word]    = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      for (int i = 0; i < NBLK; i++) meta_q[i] <= '0;
      for (int i = 0; i < SETS; i++) rr_q[i] <= '0;
      r_addr <= '0; r_store <= 1'b0; r_wdata <= '0; r_blk <= '0; r_fetch <= '0;
      wb_addr <= '0; wb_sb <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (fin) begin
        meta_q[f_blk] <= f_meta;
        resp_valid    <= 1'b1;
        resp_rdata    <= f_data[64*f_word +: 64];
        if (fill_ok) st_q <= S_IDLE;
      end
      if (accept && !shit) begin
        r_addr  <= req_addr;
        r_store <= req_store;
        r_wdata <= req_wdata;
      end
      if (smiss) begin
        r_blk   <= hblk;
        r_fetch <= (req_sb | sp_pred) & ~meta_q[hblk].sec;
        st_q    <= S_RD;
      end
      if (cmiss) begin
        r_blk   <= vblk;
        r_fetch <= req_sb | sp_pred;
        rr_q[set] <= rr_q[set] + 1'b1;
        wb_addr <= {meta_q[vblk].tag, set, 6'b0};
        wb_sb   <= meta_q[vblk].dirty;
        meta_q[vblk] <= '{valid: 1'b1, tag: tag, sec: '0, dirty: '0, cur: '0, tidx: sp_idx};
        st_q    <= (meta_q[vblk].valid && meta_q[vblk].dirty != '0) ? S_WB : S_RD;
      end
      if (st_q == S_WB && mem_req_ready) st_q <= S_RD;
      if (st_q == S_RD && mem_req_ready) st_q <= S_WAIT;
    end
  end

  // Data array: no reset, written by fills/stores and read for write-back.
  always_ff @(posedge clk) begin
    if (fin) data_q[f_blk] <= f_data;
    if (cmiss) wb_data <= data_q[vblk];
  end

  a_fetch_wants_word: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == S_RD) |-> (mem_req_sb[r_addr[5:3]] || meta_q[r_blk].sec[r_addr[5:3]]));
endmodule
