// sectored_dram_system: cores' memory path over one Sectored DRAM channel.
//
// Each core's loads and stores enter its LSQ Lookahead queue, which gathers
// into each access the other words of the same cache block that younger
// queued accesses will touch. The core's L1 sector cache serves them, and on
// a cache miss or sector miss asks memory for only the missing words,
// widened by the Sector Predictor with the words used during the block's
// last stay. A round-robin arbiter passes the caches' misses and
// write-backs to the memory controller, which turns these word-granular
// requests into DDR4 commands that activate only the needed sectors (sector
// bits sent with PRE) and burst only their beats (burst length = number of
// open sectors), under a tFAW window that counts sectors instead of ACTs.
// Read responses are broadcast to all caches; each takes the one for its
// missing block. The channel holds RANKS ranks of eight x8 Sectored DRAM
// chips sharing the command and data buses; each chip's cell array is
// outside this module on the arr_* ports.
// Interface, per core c: core_valid/ready/addr/pc/store/wdata push one load
// or store; load_valid/load_data return the 64-bit word of each access in
// program order (a store returns the word written). ev pulses, per kind,
// when the event happens in any core or in the controller.
// Follows the evaluated system: 1 to 16 cores (CORES), 32 KiB L1, 128-entry
// LSQ Lookahead, 512-entry SHT, 64-entry controller queue, DDR4-3200 with 4
// ranks. This design's choices: the L2 and L3 of the evaluated system are
// left out (each L1 talks to the controller), there is one channel, and
// caches are not kept coherent (cores are meant to work on separate data).
module sectored_dram_system
  import sdram_pkg::*;
#(
  parameter int unsigned CORES       = 1,
  parameter int unsigned LSQ_DEPTH   = 128,
  parameter int unsigned L1_SIZE     = 32768,
  parameter int unsigned L1_WAYS     = 8,
  parameter int unsigned SHT_M       = 512,
  parameter int unsigned MCQ_DEPTH   = 64,
  parameter bit          DYNAMIC     = 1'b0,
  parameter int unsigned MODE_PERIOD = 1000,
  parameter int unsigned MODE_THRESH = 30,
  parameter int unsigned PC_W        = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // core side
  input  logic [CORES-1:0]                  core_valid,
  output logic [CORES-1:0]                  core_ready,
  input  logic [CORES-1:0][PADDR_BITS-1:0]  core_addr,
  input  logic [CORES-1:0][PC_W-1:0]        core_pc,
  input  logic [CORES-1:0]                  core_store,
  input  logic [CORES-1:0][63:0]            core_wdata,
  output logic [CORES-1:0]                  load_valid,
  output logic [CORES-1:0][63:0]            load_data,
  // cell arrays of every chip (rank r, chip c)
  output arr_req_t [RANKS-1:0][CHIPS-1:0]   arr_req,
  input  logic [RANKS-1:0][CHIPS-1:0][63:0] arr_rdata,
  // status
  output logic                   sectored_on,
  output sys_events_t            ev
);
  localparam int unsigned CW = (CORES > 1) ? $clog2(CORES) : 1;

  // ---------------------------------------------------------------- cores' LSQ + L1
  logic [CORES-1:0]                 mreq_valid, mreq_ready, mreq_write;
  logic [CORES-1:0][PADDR_BITS-1:0] mreq_addr;
  sector_mask_t [CORES-1:0]         mreq_sb;
  logic [CORES-1:0][BLOCK_BITS-1:0] mreq_wdata;
  logic [CORES-1:0] e_merge, e_hit, e_smiss, e_cmiss, e_wb, e_pred;

  logic                  mresp_valid;
  logic [PADDR_BITS-1:0] mresp_addr;
  sector_mask_t          mresp_sb;
  logic [BLOCK_BITS-1:0] mresp_rdata;

  for (genvar k = 0; k < CORES; k++) begin : g_core
    logic                  iss_valid, iss_ready, iss_store;
    logic [PADDR_BITS-1:0] iss_addr;
    logic [PC_W-1:0]       iss_pc;
    logic [7:0]            iss_sb;
    logic [63:0]           iss_wdata;

    lsq_lookahead #(.DEPTH(LSQ_DEPTH), .AW(PADDR_BITS), .PC_W(PC_W)) u_lsq (
      .clk, .rst_n,
      .alloc_valid(core_valid[k]), .alloc_ready(core_ready[k]), .alloc_addr(core_addr[k]),
      .alloc_pc(core_pc[k]), .alloc_store(core_store[k]), .alloc_wdata(core_wdata[k]),
      .iss_valid, .iss_ready, .iss_addr, .iss_pc, .iss_sb, .iss_store, .iss_wdata,
      .ev_merge(e_merge[k])
    );

    sector_cache #(.SIZE(L1_SIZE), .WAYS(L1_WAYS), .AW(PADDR_BITS), .PC_W(PC_W), .SHT_M(SHT_M)) u_l1 (
      .clk, .rst_n,
      .req_valid(iss_valid), .req_ready(iss_ready), .req_addr(iss_addr), .req_pc(iss_pc),
      .req_sb(iss_sb), .req_store(iss_store), .req_wdata(iss_wdata),
      .resp_valid(load_valid[k]), .resp_rdata(load_data[k]),
      .mem_req_valid(mreq_valid[k]), .mem_req_ready(mreq_ready[k]), .mem_req_write(mreq_write[k]),
      .mem_req_addr(mreq_addr[k]), .mem_req_sb(mreq_sb[k]), .mem_req_wdata(mreq_wdata[k]),
      .mem_resp_valid(mresp_valid), .mem_resp_addr(mresp_addr), .mem_resp_sb(mresp_sb),
      .mem_resp_rdata(mresp_rdata),
      .ev_hit(e_hit[k]), .ev_sector_miss(e_smiss[k]), .ev_cache_miss(e_cmiss[k]),
      .ev_writeback(e_wb[k]), .ev_predicted(e_pred[k])
    );
  end

  assign ev.lsq_merge      = |e_merge;
  assign ev.l1_hit         = |e_hit;
  assign ev.l1_sector_miss = |e_smiss;
  assign ev.l1_cache_miss  = |e_cmiss;
  assign ev.l1_writeback   = |e_wb;
  assign ev.sp_predicted   = |e_pred;

  // ---------------------------------------------------------------- arbiter
  // Round robin: the first requesting core at or after the one after the
  // last core served.
  logic [CW-1:0]         rr_q, grant;
  logic                  any_req;
  logic                  mc_valid, mc_ready, mc_write;
  logic [PADDR_BITS-1:0] mc_addr;
  sector_mask_t          mc_sb;
  logic [BLOCK_BITS-1:0] mc_wdata;

  always_comb begin
    any_req = 1'b0;
    grant   = '0;
    for (int n = CORES - 1; n >= 0; n--) begin
      int unsigned k;
      k = (32'(rr_q) + 32'(n)) % CORES;
      if (mreq_valid[k]) begin any_req = 1'b1; grant = CW'(k); end
    end
    mc_valid = any_req;
    mc_write = mreq_write[grant];
    mc_addr  = mreq_addr[grant];
    mc_sb    = mreq_sb[grant];
    mc_wdata = mreq_wdata[grant];
    mreq_ready = '0;
    mreq_ready[grant] = any_req && mc_ready;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rr_q <= '0;
    else if (mc_valid && mc_ready) rr_q <= CW'((32'(grant) + 1) % CORES);

  // ---------------------------------------------------------------- memory controller
  ddr4_cmd_t                   cmd [RANKS];
  logic [1:0]                  dq_wr_valid;
  logic [CHIPS-1:0][1:0][7:0]  dq_wr;
  logic [CHIPS-1:0][1:0]       dq_rd_valid;
  logic [CHIPS-1:0][1:0][7:0]  dq_rd;

  sectored_mem_ctrl #(.QDEPTH(MCQ_DEPTH), .DYNAMIC(DYNAMIC), .MODE_PERIOD(MODE_PERIOD),
                      .MODE_THRESH(MODE_THRESH)) u_mc (
    .clk, .rst_n,
    .req_valid(mc_valid), .req_ready(mc_ready), .req_write(mc_write), .req_addr(mc_addr),
    .req_sb(mc_sb), .req_wdata(mc_wdata),
    .resp_valid(mresp_valid), .resp_addr(mresp_addr), .resp_sb(mresp_sb), .resp_rdata(mresp_rdata),
    .cmd, .dq_wr_valid, .dq_wr, .dq_rd_valid, .dq_rd,
    .sectored_on,
    .ev_pre_closed(ev.pre_closed), .ev_reopen(ev.reopen), .ev_act_partial(ev.act_partial),
    .ev_faw_relaxed(ev.faw_relaxed), .ev_faw_stall(ev.faw_stall), .ev_autopre(ev.autopre)
  );

  // ---------------------------------------------------------------- DRAM ranks
  logic [RANKS-1:0][CHIPS-1:0][1:0]      chip_dqv;
  logic [RANKS-1:0][CHIPS-1:0][1:0][7:0] chip_dq;

  for (genvar r = 0; r < RANKS; r++) begin : g_rank
    for (genvar c = 0; c < CHIPS; c++) begin : g_chip
      sectored_dram_chip u_chip (
        .clk, .rst_n, .cmd(cmd[r]),
        .dq_in_valid(dq_wr_valid), .dq_in(dq_wr[c]),
        .dq_out_valid(chip_dqv[r][c]), .dq_out(chip_dq[r][c]),
        .arr_act(arr_req[r][c].act), .arr_act_bank(arr_req[r][c].act_bank),
        .arr_act_row(arr_req[r][c].act_row), .arr_lwl_en(arr_req[r][c].lwl_en),
        .arr_pre(arr_req[r][c].pre), .arr_pre_all(arr_req[r][c].pre_all),
        .arr_pre_bank(arr_req[r][c].pre_bank),
        .arr_rd(arr_req[r][c].rd), .arr_rd_ap(arr_req[r][c].rd_ap),
        .arr_rd_bank(arr_req[r][c].rd_bank), .arr_rd_col(arr_req[r][c].rd_col),
        .arr_rdata(arr_rdata[r][c]),
        .arr_wr(arr_req[r][c].wr), .arr_wr_ap(arr_req[r][c].wr_ap),
        .arr_wr_bank(arr_req[r][c].wr_bank), .arr_wr_col(arr_req[r][c].wr_col),
        .arr_wdata(arr_req[r][c].wdata), .arr_wmask(arr_req[r][c].wmask)
      );
    end
  end

  // Shared data bus: only the rank that was read drives its beats.
  always_comb begin
    dq_rd_valid = '0;
    dq_rd       = '0;
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int b = 0; b < 2; b++)
          if (chip_dqv[r][c][b]) begin
            dq_rd_valid[c][b] = 1'b1;
            dq_rd[c][b]       = chip_dq[r][c][b];
          end
  end
endmodule
