// tb_sectored_mem_ctrl: the Sectored DRAM controller driving a full channel.
//
// The controller under test drives four ranks of eight sectored_dram_chip
// instances, each over a behavioural cell array. Random reads and writes
// with random sector masks go to a small set of rows so that row hits, row
// conflicts, sector misses in open rows and repeated blocks all occur; one
// phase sends full-block reads to many banks of one rank to load the tFAW
// window, another sends single-sector reads for many ACTs per window.
// Checked here, independently of the controller:
//   * data: each read response carries the block address and sector bits
//     of a queued read (or more: a burst carries every open sector of the
//     row), and the bytes of those sectors equal the reference memory
//     (initial pattern plus all earlier writes);
//   * DDR4 timing on every rank's command bus: tRCD, tRAS, tRC, tRP (also
//     after a PRE that only carries sector bits), tRRD_S/tRRD_L, tRTP,
//     write recovery, tWTR, auto-precharge, and at most 32 activated sectors in
//     any 40-clock window; column commands only to open banks whose
//     activated sectors cover the request; the data bus used by one rank
//     at a time;
//   * the array models saw no access to a closed bank or sector;
//   * each mechanism happened: PRE to a closed bank carrying sector bits,
//     re-activation of an open row lacking sectors, partial ACTs, more than
//     four ACTs in a tFAW window, ACTs held back by the sector window, and
//     auto-precharge.
module tb_sectored_mem_ctrl;
  import sdram_pkg::*;
  import dram_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_write = 0;
  logic [PADDR_BITS-1:0] req_addr = '0, resp_addr;
  sector_mask_t req_sb = '0, resp_sb;
  logic [BLOCK_BITS-1:0] req_wdata = '0, resp_rdata;
  logic resp_valid, sectored_on;
  ddr4_cmd_t cmd [RANKS];
  logic [1:0] dq_wr_valid;
  logic [CHIPS-1:0][1:0][7:0] dq_wr, dq_rd;
  logic [CHIPS-1:0][1:0] dq_rd_valid;
  logic ev_pre_closed, ev_reopen, ev_act_partial, ev_faw_relaxed, ev_faw_stall, ev_autopre;
  int checks = 0, failures = 0;
  longint cyc = 0;

  sectored_mem_ctrl dut (.clk, .rst_n, .req_valid, .req_ready, .req_write, .req_addr, .req_sb, .req_wdata,
                         .resp_valid, .resp_addr, .resp_sb, .resp_rdata, .cmd, .dq_wr_valid, .dq_wr,
                         .dq_rd_valid, .dq_rd, .sectored_on, .ev_pre_closed, .ev_reopen, .ev_act_partial,
                         .ev_faw_relaxed, .ev_faw_stall, .ev_autopre);

  arr_req_t req [RANKS][CHIPS];
  logic [63:0] rdata [RANKS][CHIPS];
  int errs [RANKS][CHIPS];
  int nact [RANKS][CHIPS];
  int nsec [RANKS][CHIPS];
  logic [RANKS-1:0][CHIPS-1:0][1:0] cdqv;
  logic [RANKS-1:0][CHIPS-1:0][1:0][7:0] cdq;

  for (genvar r = 0; r < RANKS; r++) begin : g_r
    for (genvar c = 0; c < CHIPS; c++) begin : g_c
      sectored_dram_chip u_chip (
        .clk, .rst_n, .cmd(cmd[r]), .dq_in_valid(dq_wr_valid), .dq_in(dq_wr[c]),
        .dq_out_valid(cdqv[r][c]), .dq_out(cdq[r][c]),
        .arr_act(req[r][c].act), .arr_act_bank(req[r][c].act_bank), .arr_act_row(req[r][c].act_row),
        .arr_lwl_en(req[r][c].lwl_en), .arr_pre(req[r][c].pre), .arr_pre_all(req[r][c].pre_all),
        .arr_pre_bank(req[r][c].pre_bank), .arr_rd(req[r][c].rd), .arr_rd_ap(req[r][c].rd_ap),
        .arr_rd_bank(req[r][c].rd_bank), .arr_rd_col(req[r][c].rd_col), .arr_rdata(rdata[r][c]),
        .arr_wr(req[r][c].wr), .arr_wr_ap(req[r][c].wr_ap), .arr_wr_bank(req[r][c].wr_bank),
        .arr_wr_col(req[r][c].wr_col), .arr_wdata(req[r][c].wdata), .arr_wmask(req[r][c].wmask));
      dram_array_model #(.RANK(r), .CHIP(c)) u_arr (.clk, .rst_n, .req(req[r][c]), .rdata(rdata[r][c]),
                                                   .errors(errs[r][c]), .acts(nact[r][c]),
                                                   .sectors_opened(nsec[r][c]));
    end
  end

  always_comb begin
    dq_rd_valid = '0;
    dq_rd = '0;
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int b = 0; b < 2; b++)
          if (cdqv[r][c][b]) begin dq_rd_valid[c][b] = 1'b1; dq_rd[c][b] = cdq[r][c][b]; end
  end

  always #5 clk = ~clk;

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("cycle %0d: %s", cyc, msg); end
  endtask

  // ---------------------------------------------------------------- reference memory
  logic [63:0] refm [longint];          // by word address (paddr >> 3)
  function automatic logic [63:0] ref_word(input logic [PADDR_BITS-1:0] baddr, input int w);
    longint k = longint'(baddr >> 6) * 8 + w;
    return refm.exists(k) ? refm[k] : word_of(baddr, w);
  endfunction

  typedef struct { logic [PADDR_BITS-1:0] a; sector_mask_t sb; logic [511:0] d; } rd_t;
  rd_t pend[$];

  // ---------------------------------------------------------------- protocol checker
  typedef struct {
    bit open; longint t_act, t_pre, t_rd, t_wr_end, t_ap; int wr_beats; logic [7:0] sb; logic [7:0] osb;
    int row;
  } pb_t;
  pb_t pb [RANKS][BANKS];
  longint last_act [RANKS];
  longint wtr_end [RANKS];
  int last_bg [RANKS];
  longint act_t [RANKS][$];
  int act_n [RANKS][$];
  int n_pre_closed = 0, n_reopen = 0, n_partial = 0, n_relaxed = 0, n_stall = 0, n_ap = 0;
  int n_resp = 0, n_acts = 0, n_extra = 0;

  function automatic longint mxl(input longint a, input longint b); return a > b ? a : b; endfunction

  always @(negedge clk) if (rst_n) begin
    cyc++;
    for (int r = 0; r < RANKS; r++) begin
      automatic cmd_e k = decode_cmd(cmd[r]);
      automatic int b = int'({cmd[r].bg, cmd[r].ba});
      automatic int bg = int'(cmd[r].bg);
      // implicit precharge of auto-precharged accesses
      case (k)
        CMD_PRE: begin
          if (pb[r][b].open)
            check(cyc - pb[r][b].t_act >= T_RAS && cyc - pb[r][b].t_rd >= T_RTP && cyc >= pb[r][b].t_wr_end,
                  $sformatf("r%0d b%0d: PRE too early", r, b));
          else
            check(cyc >= pb[r][b].t_ap, $sformatf("r%0d b%0d: PRE before the auto-precharge", r, b));
          pb[r][b].open = 0;
          pb[r][b].t_pre = cyc;
          pb[r][b].sb = cmd[r].a[7:0];
        end
        CMD_ACT: begin
          automatic int n = $countones(pb[r][b].sb);
          automatic int wsum = 0;
          check(!pb[r][b].open, $sformatf("r%0d b%0d: ACT to open bank", r, b));
          check(cyc - pb[r][b].t_act >= T_RC && cyc - pb[r][b].t_pre >= T_RP && cyc - pb[r][b].t_ap >= T_RP,
                $sformatf("r%0d b%0d: ACT violates tRC/tRP", r, b));
          check(cyc - last_act[r] >= ((bg == last_bg[r]) ? T_RRDL : T_RRDS), $sformatf("r%0d: tRRD", r));
          while (act_t[r].size() > 0 && cyc - act_t[r][0] >= T_FAW) begin
            void'(act_t[r].pop_front()); void'(act_n[r].pop_front());
          end
          foreach (act_n[r][i]) wsum += act_n[r][i];
          check(wsum + n <= FAW_SECTORS, $sformatf("r%0d: %0d sectors in tFAW", r, wsum + n));
          act_t[r].push_back(cyc); act_n[r].push_back(n);
          pb[r][b].open = 1; pb[r][b].t_act = cyc; pb[r][b].osb = pb[r][b].sb;
          pb[r][b].row = int'({cmd[r].we_n, cmd[r].a});
          pb[r][b].t_rd = -1000; pb[r][b].t_wr_end = 0;
          last_act[r] = cyc; last_bg[r] = bg;
          n_acts++;
        end
        CMD_RD, CMD_WR: begin
          automatic int beats = $countones(pb[r][b].osb);
          check(pb[r][b].open && cyc - pb[r][b].t_act >= T_RCD, $sformatf("r%0d b%0d: CAS to closed bank or tRCD", r, b));
          if (k == CMD_RD) begin
            pb[r][b].t_rd = cyc;
            check(cyc >= wtr_end[r], $sformatf("r%0d: READ violates tWTR", r));
          end else begin
            wtr_end[r] = cyc + T_CWL + (beats + 1) / 2 + T_WTR;
            pb[r][b].t_wr_end = mxl(pb[r][b].t_wr_end, cyc + T_CWL + (beats + 1) / 2 + T_WR);
          end
          if (cmd[r].a[10]) begin
            pb[r][b].open = 0;
            pb[r][b].t_ap = mxl(mxl(pb[r][b].t_act + T_RAS, (k == CMD_RD) ? cyc + T_RTP : 0), pb[r][b].t_wr_end);
          end
        end
        default: ;
      endcase
    end
    // one rank on the data bus at a time
    for (int c = 0; c < CHIPS; c++) begin
      automatic int drivers = 0;
      for (int r = 0; r < RANKS; r++) if (cdqv[r][c] != 2'b00) drivers++;
      if (drivers > 0) check(drivers == 1, "two ranks drive the data bus");
    end
    if (ev_pre_closed) n_pre_closed++;
    if (ev_reopen) n_reopen++;
    if (ev_act_partial) n_partial++;
    if (ev_faw_relaxed) n_relaxed++;
    if (ev_faw_stall) n_stall++;
    if (ev_autopre) n_ap++;
    // responses
    if (resp_valid) begin
      automatic int idx = -1;
      foreach (pend[i]) if (idx < 0 && pend[i].a == resp_addr) idx = i;
      check(idx >= 0, $sformatf("response for %h with no read queued", resp_addr));
      if (idx >= 0) begin
        // The burst carries every open sector of the row: at least the wanted ones.
        check((pend[idx].sb & ~resp_sb) == '0, $sformatf("response sectors %02h lack some of %02h", resp_sb,
                                                         pend[idx].sb));
        if (resp_sb != pend[idx].sb) n_extra++;
        for (int s = 0; s < 8; s++)
          if (resp_sb[s])
            check(resp_rdata[64*s +: 64] == pend[idx].d[64*s +: 64],
                  $sformatf("block %h word %0d: %h expected %h", resp_addr, s, resp_rdata[64*s +: 64],
                            pend[idx].d[64*s +: 64]));
        pend.delete(idx);
      end
      n_resp++;
    end
  end

  // ---------------------------------------------------------------- stimulus
  function automatic logic [PADDR_BITS-1:0] mk(input int row, input int bank, input int rank, input int col);
    dram_addr_t d;
    d.row = ROW_BITS'(row); d.bank = BANK_BITS'(bank); d.rank = RANK_BITS'(rank); d.col = CB_COL_BITS'(col);
    return {d, 6'b0};
  endfunction

  task automatic send(input bit wr, input logic [PADDR_BITS-1:0] a, input sector_mask_t sb);
    @(negedge clk); #1;
    req_valid = 1; req_write = wr; req_addr = a; req_sb = sb;
    req_wdata = {16{$urandom}};
    for (int i = 0; i < 16; i++) req_wdata[32*i +: 32] = $urandom;
    begin
      automatic int w = 0;
      while (!req_ready && w < 20000) begin @(negedge clk); #1; w++; end
      check(req_ready, "controller stopped accepting requests");
      if (!req_ready) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    @(posedge clk);
    if (wr) begin
      for (int s = 0; s < 8; s++)
        if (sb[s]) refm[longint'(a >> 6) * 8 + s] = req_wdata[64*s +: 64];
    end else begin
      rd_t e;
      e.a = a; e.sb = sb;
      for (int s = 0; s < 8; s++) e.d[64*s +: 64] = ref_word(a, s);
      pend.push_back(e);
    end
    @(negedge clk); #1;
    req_valid = 0;
  endtask

  initial begin
    for (int r = 0; r < RANKS; r++) begin
      last_act[r] = -1000; last_bg[r] = 0; wtr_end[r] = 0;
      for (int b = 0; b < BANKS; b++)
        pb[r][b] = '{open: 0, t_act: -1000, t_pre: -1000, t_rd: -1000, t_wr_end: 0, t_ap: -1000,
                     wr_beats: 0, sb: 8'hFF, osb: 8'hFF, row: 0};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: random mix over few rows
    for (int i = 0; i < 1500; i++) begin
      automatic sector_mask_t sb = 8'($urandom) | 8'(1 << $urandom_range(0, 7));
      send($urandom_range(0, 3) == 0, mk($urandom_range(0, 2), $urandom_range(0, 3), $urandom_range(0, 1),
                                         $urandom_range(0, 3)), sb);
    end
    // phase 2: full-block reads to many banks of rank 2 (tFAW-bound)
    for (int i = 0; i < 300; i++)
      send(1'b0, mk($urandom_range(0, 1000), i % 16, 2, $urandom_range(0, 127)), 8'hFF);
    // phase 3: single-sector reads to many banks of rank 3 (tRRD-bound)
    for (int i = 0; i < 300; i++)
      send(1'b0, mk($urandom_range(0, 1000), i % 16, 3, $urandom_range(0, 127)), 8'(1 << (i % 8)));
    // phase 4: same block, growing sector sets (sector misses in open rows)
    for (int i = 0; i < 200; i++)
      send($urandom_range(0, 4) == 0, mk(5, i % 2, 1, 9), 8'(1 << $urandom_range(0, 7)));
    begin
      automatic int w = 0;
      while (pend.size() > 0 && w < 20000) begin @(negedge clk); w++; end
    end
    check(pend.size() == 0, $sformatf("%0d reads never answered", pend.size()));
    begin
      automatic int e = 0;
      for (int r = 0; r < RANKS; r++) for (int c = 0; c < CHIPS; c++) e += errs[r][c];
      check(e == 0, $sformatf("%0d array protocol errors", e));
    end
    $display("responses %0d (%0d with extra sectors) ACTs %0d: pre_closed %0d reopen %0d partial %0d faw_relaxed %0d faw_stall %0d autopre %0d",
             n_resp, n_extra, n_acts, n_pre_closed, n_reopen, n_partial, n_relaxed, n_stall, n_ap);
    check(n_pre_closed > 0, "no PRE carried sector bits to a closed bank");
    check(n_reopen > 0, "no open row was re-activated for missing sectors");
    check(n_partial > 0, "no partial ACT");
    check(n_relaxed > 0, "never more than four ACTs per tFAW");
    check(n_stall > 0, "sector window never held an ACT back");
    check(n_ap > 0, "no auto-precharge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
