// sectored_mem_ctrl: DDR4 memory controller for one channel of Sectored DRAM.
//
// Requests carry a 64-byte block address and sector bits (which 64-bit
// words are wanted; for a write, which words are written). The controller
// turns them into DDR4 commands so that only the wanted sectors are
// activated and transferred:
//   * The sector bits of the next ACT travel with a PRE on unused address
//     pins. A bank that is closed but whose chip latches hold other sector
//     bits first gets a PRE carrying the new ones; an open row that lacks a
//     needed sector is precharged and re-activated with the new bits.
//   * The bank state table keeps the sector bits of every bank; popcount of
//     them is the burst length of each READ/WRITE (one beat per sector).
//   * Each rank's ACTs are limited by faw_sector_window: 32 sectors per
//     tFAW instead of four ACTs, still bounded by tRRD_S/tRRD_L.
//   * Optionally (DYNAMIC) sector_mode_ctrl switches reads to full blocks
//     when the read queue is lightly loaded.
// Scheduling is first-ready FCFS over a QDEPTH-entry queue kept in age
// order: the oldest request whose column command is legal goes first; else
// the oldest legal PRE/ACT, where only the oldest request of a bank may
// precharge or activate it and no PRE closes a row another request still
// hits. A column command auto-precharges when no other queued request hits
// the same row (open-page with precharge on the last access). A request
// waits while an older one to the same block is queued, which keeps reads
// and writes of a block in order.
// Data: read data returns on dq_rd (two beats per clock per chip, beats only
// for open sectors) CL clocks after the READ; write data is driven on dq_wr
// CWL clocks after the WRITE. Byte b of word s of a block lives in chip b,
// sector s. The response carries the block with the sectors that came back.
// Address map: Row-Bank-Rank-Column above the block offset (sdram_pkg).
// A READ waits tWTR after the end of a WRITE burst to the same rank, so it
// never overtakes write data on its way into the array.
// Departures from the evaluated controller: the FR-FCFS "Cap" on row-hit
// bypasses, refresh, tCCD, rank-to-rank and read-to-write bus turnaround
// are not modelled (the data bus is only kept free of overlapping bursts).
module sectored_mem_ctrl
  import sdram_pkg::*;
#(
  parameter int unsigned QDEPTH      = 64,
  parameter bit          DYNAMIC     = 1'b0,
  parameter int unsigned MODE_PERIOD = 1000,
  parameter int unsigned MODE_THRESH = 30
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // requests
  input  logic                   req_valid,
  output logic                   req_ready,
  input  logic                   req_write,
  input  logic [PADDR_BITS-1:0]  req_addr,
  input  sector_mask_t           req_sb,
  input  logic [BLOCK_BITS-1:0]  req_wdata,
  // read responses
  output logic                   resp_valid,
  output logic [PADDR_BITS-1:0]  resp_addr,
  output sector_mask_t           resp_sb,
  output logic [BLOCK_BITS-1:0]  resp_rdata,
  // DDR4 channel
  output ddr4_cmd_t              cmd [RANKS],
  output logic [1:0]             dq_wr_valid,
  output logic [CHIPS-1:0][1:0][7:0] dq_wr,
  input  logic [CHIPS-1:0][1:0]  dq_rd_valid,
  input  logic [CHIPS-1:0][1:0][7:0] dq_rd,
  // status and event pulses
  output logic                   sectored_on,
  output logic                   ev_pre_closed,   // PRE to a closed bank to send sector bits
  output logic                   ev_reopen,       // open row lacked a sector: PRE + ACT again
  output logic                   ev_act_partial,  // ACT of fewer than 8 sectors
  output logic                   ev_faw_relaxed,  // ACT beyond four in one tFAW window
  output logic                   ev_faw_stall,    // oldest ACT held back by the sector window
  output logic                   ev_autopre       // column command with auto-precharge
);
  localparam int unsigned NB   = RANKS * BANKS;
  localparam int unsigned IW   = $clog2(NB);
  localparam int unsigned QW   = $clog2(QDEPTH + 1);
  localparam int unsigned FD   = 32;              // in-flight data FIFOs
  localparam int unsigned FW   = $clog2(FD);

  typedef struct packed {
    logic                  write;
    logic [PADDR_BITS-1:0] baddr;
    sector_mask_t          sb;
    logic [BLOCK_BITS-1:0] data;
  } qent_t;

  // ---------------------------------------------------------------- state
  logic [31:0] now_q;
  qent_t       q_q [QDEPTH];
  logic [QW-1:0] cnt_q;
  logic [31:0] bus_free_q;
  logic [RANKS-1:0][31:0] wtr_q;     // earliest READ per rank after a WRITE

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now_q <= '0; else now_q <= now_q + 32'd1;

  // ---------------------------------------------------------------- bank state
  logic                 bst_valid;
  cmd_e                 bst_kind;
  logic [IW-1:0]        bst_idx;
  sector_mask_t         bst_sb;
  logic [ROW_BITS-1:0]  bst_row;
  logic                 bst_ap;
  logic [3:0]           bst_beats;
  logic [NB-1:0]        b_open, b_act_ok, b_cas_ok, b_pre_ok;
  logic [NB-1:0][ROW_BITS-1:0] b_row;
  sector_mask_t [NB-1:0] b_sb;

  bank_state_table #(.NB(NB)) u_bst (
    .clk, .rst_n, .now(now_q),
    .cmd_valid(bst_valid), .cmd_kind(bst_kind), .cmd_idx(bst_idx), .cmd_sb(bst_sb),
    .cmd_row(bst_row), .cmd_ap(bst_ap), .cmd_beats(bst_beats),
    .open(b_open), .row(b_row), .sb(b_sb), .act_ok(b_act_ok), .cas_ok(b_cas_ok), .pre_ok(b_pre_ok)
  );

  // ---------------------------------------------------------------- mode
  logic [6:0] rd_occ;
  logic       mode_win;
  always_comb begin
    rd_occ = '0;
    for (int i = 0; i < QDEPTH; i++)
      if (QW'(i) < cnt_q && !q_q[i].write) rd_occ = rd_occ + 7'd1;
  end
  sector_mode_ctrl #(.DYNAMIC(DYNAMIC), .PERIOD(MODE_PERIOD), .THRESHOLD(MODE_THRESH), .OCC_W(7))
    u_mode (.clk, .rst_n, .occupancy(rd_occ), .sectored_on, .window_end(mode_win));

  // ---------------------------------------------------------------- per-entry decisions
  typedef enum logic [1:0] { N_CAS, N_PRE, N_ACT } need_e;

  dram_addr_t     ea   [QDEPTH];
  logic [IW-1:0]  eidx [QDEPTH];
  logic [3:0]     enb  [QDEPTH];
  need_e          need [QDEPTH];
  logic [QDEPTH-1:0] ev, hit, oldest_bank, blocked, rdy;
  logic [NB-1:0]  bank_hit;               // some queued request hits the open row
  logic [RANKS-1:0][3:0] faw_nsec;
  logic [RANKS-1:0][1:0] faw_bg;
  logic [RANKS-1:0] faw_can;
  logic [RANKS-1:0][5:0] faw_wsec;
  logic [RANKS-1:0][3:0] faw_wacts;

  for (genvar i = 0; i < QDEPTH; i++) begin : g_pc
    popcount8 u_pc (.in(q_q[i].sb), .count(enb[i]));
  end

  always_comb begin
    bank_hit = '0;
    for (int i = 0; i < QDEPTH; i++) begin
      ev[i]   = QW'(i) < cnt_q;
      ea[i]   = map_addr(q_q[i].baddr);
      eidx[i] = {ea[i].rank, ea[i].bank};
      // A read may use a row whose open sectors cover its own; a write's
      // burst writes every open sector, so it needs exactly its sectors open.
      hit[i]  = ev[i] && b_open[eidx[i]] && b_row[eidx[i]] == ea[i].row &&
                (q_q[i].write ? (q_q[i].sb == b_sb[eidx[i]]) : ((q_q[i].sb & ~b_sb[eidx[i]]) == '0));
    end
    for (int i = 0; i < QDEPTH; i++) begin
      oldest_bank[i] = 1'b1;
      blocked[i]     = 1'b0;
      for (int j = 0; j < i; j++) begin
        if (ev[j] && eidx[j] == eidx[i]) oldest_bank[i] = 1'b0;
        if (ev[j] && q_q[j].baddr[PADDR_BITS-1:6] == q_q[i].baddr[PADDR_BITS-1:6]) blocked[i] = 1'b1;
      end
      // Only a hit that can be served keeps the row open; one waiting
      // behind an older request to its block would wait for ever.
      if (hit[i] && !blocked[i])           bank_hit[eidx[i]] = 1'b1;
      if (hit[i])                          need[i] = N_CAS;
      else if (b_open[eidx[i]])            need[i] = N_PRE;
      else if (b_sb[eidx[i]] == q_q[i].sb) need[i] = N_ACT;
      else                                 need[i] = N_PRE;
    end
  end

  // The ACT candidate per rank: the oldest request that needs an ACT and may
  // issue it apart from the tFAW/tRRD check.
  always_comb begin
    faw_nsec = '0;
    faw_bg   = '0;
    for (int r = RANKS - 1; r >= 0; r--)
      for (int i = QDEPTH - 1; i >= 0; i--)
        if (ev[i] && need[i] == N_ACT && oldest_bank[i] && !blocked[i] &&
            b_act_ok[eidx[i]] && 32'(ea[i].rank) == r) begin
          faw_nsec[r] = enb[i];
          faw_bg[r]   = ea[i].bank[3:2];
        end
  end

  logic          act_issue;
  logic [RANKS-1:0] act_rank_oh;
  logic [3:0]    act_nsec;
  logic [1:0]    act_bg;

  for (genvar r = 0; r < RANKS; r++) begin : g_faw
    faw_sector_window #(.T_FAW(T_FAW), .T_RRDS(T_RRDS), .T_RRDL(T_RRDL), .FAW_SECTORS(FAW_SECTORS))
      u_faw (.clk, .rst_n, .now(now_q), .nsec(faw_nsec[r]), .bg(faw_bg[r]), .can_act(faw_can[r]),
             .window_sectors(faw_wsec[r]), .window_acts(faw_wacts[r]),
             .act(act_issue && act_rank_oh[r]), .act_nsec(act_nsec), .act_bg(act_bg));
  end

  // Readiness of each request's next command.
  logic [31:0] cas_start [QDEPTH];
  always_comb begin
    for (int i = 0; i < QDEPTH; i++) begin
      cas_start[i] = now_q + (q_q[i].write ? T_CWL : T_CL);
      unique case (need[i])
        N_CAS: rdy[i] = ev[i] && !blocked[i] && b_cas_ok[eidx[i]] && cas_start[i] >= bus_free_q &&
                        (q_q[i].write || now_q >= wtr_q[ea[i].rank]);
        N_PRE: rdy[i] = ev[i] && !blocked[i] && oldest_bank[i] &&
                        b_pre_ok[eidx[i]] && !(b_open[eidx[i]] && bank_hit[eidx[i]]);
        N_ACT: rdy[i] = ev[i] && !blocked[i] && oldest_bank[i] && b_act_ok[eidx[i]] &&
                        faw_can[ea[i].rank] && faw_nsec[ea[i].rank] == enb[i] &&
                        faw_bg[ea[i].rank] == ea[i].bank[3:2];
        default: rdy[i] = 1'b0;
      endcase
    end
  end

  // Pick: oldest ready column command, else oldest ready PRE/ACT.
  logic          pick_v;
  logic [QW-1:0] pick;
  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int i = QDEPTH - 1; i >= 0; i--)
      if (rdy[i] && need[i] != N_CAS) begin pick_v = 1'b1; pick = QW'(i); end
    for (int i = QDEPTH - 1; i >= 0; i--)
      if (rdy[i] && need[i] == N_CAS) begin pick_v = 1'b1; pick = QW'(i); end
  end

  qent_t      pe;
  dram_addr_t pa;
  logic [IW-1:0] pidx;
  need_e      pneed;
  logic       p_ap;
  logic       deq;
  logic [3:0] pnb;      // sectors of the picked request
  logic [3:0] pbl;      // burst length of the picked bank: its open sectors
  sector_mask_t psb;

  popcount8 u_pbl (.in(psb), .count(pbl));

  always_comb begin
    pe    = q_q[pick[$clog2(QDEPTH)-1:0]];
    pa    = ea[pick[$clog2(QDEPTH)-1:0]];
    pidx  = eidx[pick[$clog2(QDEPTH)-1:0]];
    pneed = need[pick[$clog2(QDEPTH)-1:0]];
    pnb   = enb[pick[$clog2(QDEPTH)-1:0]];
    psb   = b_sb[pidx];
    p_ap  = 1'b1;
    for (int i = 0; i < QDEPTH; i++)
      if (hit[i] && QW'(i) != pick && eidx[i] == pidx) p_ap = 1'b0;
    deq       = pick_v && pneed == N_CAS;
    act_issue = pick_v && pneed == N_ACT;
    act_nsec  = pnb;
    act_bg    = pa.bank[3:2];
    act_rank_oh = '0;
    act_rank_oh[pa.rank] = 1'b1;

    bst_valid = pick_v;
    bst_kind  = (pneed == N_CAS) ? (pe.write ? CMD_WR : CMD_RD) : (pneed == N_ACT ? CMD_ACT : CMD_PRE);
    bst_idx   = pidx;
    bst_sb    = pe.sb;
    bst_row   = pa.row;
    bst_ap    = p_ap;
    bst_beats = pbl;

    for (int r = 0; r < RANKS; r++) cmd[r] = DDR4_DES;
    if (pick_v) begin
      unique case (pneed)
        N_PRE:   cmd[pa.rank] = enc_pre(pa.bank, pe.sb);
        N_ACT:   cmd[pa.rank] = enc_act(pa.bank, pa.row);
        default: cmd[pa.rank] = enc_cas(pe.write, pa.bank, pa.col, p_ap);
      endcase
    end

    ev_pre_closed  = pick_v && pneed == N_PRE && !b_open[pidx];
    ev_reopen      = pick_v && pneed == N_PRE && b_open[pidx] && b_row[pidx] == pa.row;
    ev_act_partial = act_issue && pnb != 4'd8;
    ev_faw_relaxed = act_issue && faw_wacts[pa.rank] >= 4'd4;
    ev_autopre     = deq && p_ap;
    ev_faw_stall   = 1'b0;
    for (int r = 0; r < RANKS; r++)
      if (faw_nsec[r] != '0 && !faw_can[r] && 32'(faw_wsec[r]) + 32'(faw_nsec[r]) > FAW_SECTORS)
        ev_faw_stall = 1'b1;
  end

  // ---------------------------------------------------------------- queue update
  logic enq;
  assign req_ready = cnt_q < QW'(QDEPTH);
  assign enq       = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q      <= '0;
      bus_free_q <= '0;
      wtr_q      <= '0;
      for (int i = 0; i < QDEPTH; i++) q_q[i] <= '0;
    end else begin
      logic [QW-1:0] n;
      n = cnt_q;
      if (deq) begin
        for (int i = 0; i < QDEPTH - 1; i++)
          if (QW'(i) >= pick) q_q[i] <= q_q[i+1];
        n = n - 1'b1;
        bus_free_q <= cas_start[pick[$clog2(QDEPTH)-1:0]] + 32'((32'(pbl) + 32'd1) >> 1);
        if (pe.write)
          wtr_q[pa.rank] <= now_q + T_CWL + 32'((32'(pbl) + 32'd1) >> 1) + T_WTR;
      end
      if (enq) begin
        q_q[n[$clog2(QDEPTH)-1:0]] <= '{write: req_write, baddr: {req_addr[PADDR_BITS-1:6], 6'b0},
                                        sb: (req_write || sectored_on) ? req_sb : '1,
                                        data: req_wdata};
        n = n + 1'b1;
      end
      cnt_q <= n;
    end
  end

  // ---------------------------------------------------------------- read return
  typedef struct packed { logic v; sector_mask_t sb; } lat_t;
  lat_t rd_lat [T_CL-1];
  lat_t wr_lat [T_CWL-1];
  logic [PADDR_BITS-1:0] rdf_addr [FD];
  logic [FW-1:0] rdf_wp, rdf_rp;
  qent_t         wrf [FD];
  logic [FW-1:0] wrf_wp, wrf_rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < T_CL - 1; i++)  rd_lat[i] <= '0;
      for (int i = 0; i < T_CWL - 1; i++) wr_lat[i] <= '0;
      rdf_wp <= '0; wrf_wp <= '0;
    end else begin
      rd_lat[0] <= '{v: deq && !pe.write, sb: psb};
      wr_lat[0] <= '{v: deq &&  pe.write, sb: psb};
      for (int i = 1; i < T_CL - 1; i++)  rd_lat[i] <= rd_lat[i-1];
      for (int i = 1; i < T_CWL - 1; i++) wr_lat[i] <= wr_lat[i-1];
      if (deq && !pe.write) rdf_wp <= rdf_wp + 1'b1;
      if (deq &&  pe.write) wrf_wp <= wrf_wp + 1'b1;
    end
  end

  // FIFO storage needs no reset: only entries behind a write pointer are read.
  always_ff @(posedge clk) begin
    if (deq && !pe.write) rdf_addr[rdf_wp] <= pe.baddr;
    if (deq &&  pe.write) wrf[wrf_wp] <= pe;
  end

  logic [CHIPS-1:0]        lane_done;
  logic [CHIPS-1:0][63:0]  lane_data;
  logic [CHIPS-1:0][7:0]   lane_mask;
  for (genvar c = 0; c < CHIPS; c++) begin : g_rx
    vbl_write_path #(.TAG_W(1)) u_rx (
      .clk, .rst_n, .start(rd_lat[T_CL-2].v), .sb(rd_lat[T_CL-2].sb), .tag(1'b0),
      .dq_valid(dq_rd_valid[c]), .dq(dq_rd[c]),
      .done(lane_done[c]), .data(lane_data[c]), .mask(lane_mask[c]), .done_tag(), .busy()
    );
  end

  always_comb begin
    resp_valid = lane_done[0];
    resp_addr  = rdf_addr[rdf_rp];
    resp_sb    = lane_mask[0];
    for (int s = 0; s < SECTORS; s++)
      for (int c = 0; c < CHIPS; c++)
        resp_rdata[64*s + 8*c +: 8] = lane_data[c][8*s +: 8];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rdf_rp <= '0; else if (resp_valid) rdf_rp <= rdf_rp + 1'b1;

  // ---------------------------------------------------------------- write data
  logic [CHIPS-1:0][63:0] tx_data;
  logic [CHIPS-1:0][1:0]  tx_valid;
  qent_t                  wh;
  assign wh = wrf[wrf_rp];
  always_comb
    for (int c = 0; c < CHIPS; c++)
      for (int s = 0; s < SECTORS; s++)
        tx_data[c][8*s +: 8] = wh.data[64*s + 8*c +: 8];

  for (genvar c = 0; c < CHIPS; c++) begin : g_tx
    vbl_read_path u_tx (
      .clk, .rst_n, .start(wr_lat[T_CWL-2].v), .data(tx_data[c]), .sb(wr_lat[T_CWL-2].sb),
      .dq_valid(tx_valid[c]), .dq(dq_wr[c]), .busy(), .last()
    );
  end
  assign dq_wr_valid = tx_valid[0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) wrf_rp <= '0; else if (wr_lat[T_CWL-2].v) wrf_rp <= wrf_rp + 1'b1;

  a_one_resp: assert property (@(posedge clk) disable iff (!rst_n) resp_valid |-> (&lane_done));
endmodule
