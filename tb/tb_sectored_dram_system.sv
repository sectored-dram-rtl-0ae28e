// tb_sectored_dram_system: end-to-end run of the whole memory system.
//
// Eight cores share one channel of four ranks of Sectored DRAM chips, each
// chip over a behavioural cell array. To keep the run short the caches are
// 4 KiB and the LSQs 16 entries, and the dynamic sectored-mode control is
// enabled with a 200-clock window and a threshold of 1 queued read, so the
// controller switches between sectored and full-block reads during the run.
// Every core runs streams of loads and stores that touch 1 to 8 words of a
// block from a few PCs, over its own blocks, mostly in two ranks so that
// ACTs crowd the tFAW window. Cores share rows, and in every other
// 4000-clock phase half of the streams load from a few blocks that all
// cores read (never stored to, as the caches are not coherent), so that
// several cores ask for different words of one block at once. Every 4000
// clocks all cores pause for 1000 clocks, so the
// read queue empties and fills again. Checked: every access is
// answered in program order with the last value that core stored to the
// word (or the initial memory contents); the arrays see no access to a
// closed bank or sector; and each mechanism of the design happens at least
// once: LSQ Lookahead merge, sector hit, sector miss, cache miss,
// write-back, Sector Predictor widening a fetch, PRE carrying sector bits to
// a closed bank, re-activation of an open row for missing sectors, partial
// ACT, more than four ACTs in a tFAW window, an ACT held back by the
// 32-sector window, auto-precharge, and the mode switching off and on.
module tb_sectored_dram_system;
  import sdram_pkg::*;
  import dram_tb_pkg::*;
  localparam int NC = 8;
  localparam int NOPS = 3000;           // accesses per core
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] core_valid = '0, core_ready, core_store = '0, load_valid;
  logic [NC-1:0][PADDR_BITS-1:0] core_addr = '0;
  logic [NC-1:0][31:0] core_pc = '0;
  logic [NC-1:0][63:0] core_wdata = '0, load_data;
  arr_req_t [RANKS-1:0][CHIPS-1:0] arr_req;
  logic [RANKS-1:0][CHIPS-1:0][63:0] arr_rdata;
  logic sectored_on;
  sys_events_t ev;
  int checks = 0, failures = 0;

  sectored_dram_system #(.CORES(NC), .LSQ_DEPTH(16), .L1_SIZE(4096), .DYNAMIC(1'b1), .MODE_PERIOD(200),
                         .MODE_THRESH(1)) dut (
    .clk, .rst_n, .core_valid, .core_ready, .core_addr, .core_pc, .core_store, .core_wdata,
    .load_valid, .load_data, .arr_req, .arr_rdata, .sectored_on, .ev);

  int errs [RANKS][CHIPS];
  int nact [RANKS][CHIPS];
  int nsec [RANKS][CHIPS];
  for (genvar r = 0; r < RANKS; r++) begin : g_r
    for (genvar c = 0; c < CHIPS; c++) begin : g_c
      dram_array_model #(.RANK(r), .CHIP(c)) u_arr (.clk, .rst_n, .req(arr_req[r][c]), .rdata(arr_rdata[r][c]),
                                                   .errors(errs[r][c]), .acts(nact[r][c]),
                                                   .sectors_opened(nsec[r][c]));
    end
  end

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t: %s", $time, msg); end
  endtask

  // ---------------------------------------------------------------- mechanisms
  localparam int NEV = 14;
  string ev_name [NEV] = '{"lsq_merge", "l1_hit", "l1_sector_miss", "l1_cache_miss", "l1_writeback",
                           "sp_predicted", "pre_closed", "reopen", "act_partial", "faw_relaxed",
                           "faw_stall", "autopre", "mode_off", "mode_on"};
  int ev_cnt [NEV];
  logic prev_on = 1'b1;
  always @(negedge clk) if (rst_n) begin
    logic [11:0] e;
    e = {ev.lsq_merge, ev.l1_hit, ev.l1_sector_miss, ev.l1_cache_miss, ev.l1_writeback, ev.sp_predicted,
         ev.pre_closed, ev.reopen, ev.act_partial, ev.faw_relaxed, ev.faw_stall, ev.autopre};
    for (int i = 0; i < 12; i++) if (e[11 - i]) ev_cnt[i]++;
    if (prev_on && !sectored_on) ev_cnt[12]++;
    if (!prev_on && sectored_on) ev_cnt[13]++;
    prev_on = sectored_on;
  end

  // ---------------------------------------------------------------- cores
  logic [63:0] view [NC][longint];
  logic [63:0] expq [NC][$];
  int done_ops [NC];
  int sent [NC];
  bit quiet = 0;                        // all cores pause: the read queue drains
  bit shared_phase = 0;                 // half the streams go to the shared blocks

  function automatic logic [63:0] view_word(input int k, input logic [PADDR_BITS-1:0] a);
    longint key = longint'(a >> 3);
    return view[k].exists(key) ? view[k][key] : word_of(a, int'(a[5:3]));
  endfunction

  function automatic logic [PADDR_BITS-1:0] pick_block(input int k);
    dram_addr_t d;
    d.row  = ROW_BITS'($urandom_range(0, 2));
    d.bank = BANK_BITS'($urandom_range(0, 7));
    d.rank = RANK_BITS'(($urandom_range(0, 7) == 0) ? $urandom_range(2, 3) : $urandom_range(0, 1));
    d.col  = CB_COL_BITS'(k * 14 + $urandom_range(0, 13));   // own columns
    if ($urandom_range(0, 1) == 0 && shared_phase) begin    // shared, read only
      d.col  = CB_COL_BITS'($urandom_range(112, 113));
      d.rank = 2'($urandom_range(0, 1));
      d.bank = 4'($urandom_range(0, 1));
    end
    return {d, 6'b0};
  endfunction

  // responses, per core, in program order
  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < NC; k++)
      if (load_valid[k]) begin
        check(expq[k].size() > 0, $sformatf("core %0d: answer with nothing outstanding", k));
        if (expq[k].size() > 0) begin
          automatic logic [63:0] x = expq[k].pop_front();
          check(load_data[k] == x, $sformatf("core %0d: data %h expected %h", k, load_data[k], x));
        end
        done_ops[k]++;
      end
  end

  for (genvar k = 0; k < NC; k++) begin : g_drv
    initial begin
      sent[k] = 0;
      done_ops[k] = 0;
      wait (rst_n);
      while (sent[k] < NOPS) begin
        automatic logic [PADDR_BITS-1:0] blk;
        automatic int n, w0, pcb;
        while (quiet) @(negedge clk);
        blk = pick_block(k);
        n   = $urandom_range(1, 8);
        w0  = $urandom_range(0, 7);
        pcb = $urandom_range(0, 3);
        for (int j = 0; j < n && sent[k] < NOPS; j++) begin
          automatic logic [PADDR_BITS-1:0] a = blk | PADDR_BITS'(((w0 + j * ((pcb % 2) + 1)) % 8) * 8);
          automatic bit st = $urandom_range(0, 4) == 0 && blk[12:6] < 7'd112;
          automatic logic [63:0] wd = {$urandom, $urandom};
          @(negedge clk); #1;
          core_valid[k] = 1; core_addr[k] = a; core_pc[k] = 32'h0040_0000 + 32'(k * 256 + pcb * 16 + j * 4);
          core_store[k] = st; core_wdata[k] = wd;
          while (!core_ready[k]) begin @(negedge clk); #1; end
          @(posedge clk);
          if (st) begin expq[k].push_back(wd); view[k][longint'(a >> 3)] = wd; end
          else expq[k].push_back(view_word(k, a));
          sent[k]++;
          @(negedge clk); #1;
          core_valid[k] = 0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
        end
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(20, 300)) @(negedge clk);
      end
    end
  end

  initial begin
    for (int i = 0; i < NEV; i++) ev_cnt[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    begin
      automatic bit all_done = 0;
      automatic int t = 0;
      while (!all_done) begin
        repeat (100) @(negedge clk);
        t++;
        quiet = (t % 40) >= 30;
        shared_phase = (t % 80) >= 40;
        all_done = 1;
        for (int k = 0; k < NC; k++) if (done_ops[k] < NOPS) all_done = 0;
      end
    end
    begin
      automatic int e = 0, a = 0, s = 0;
      for (int r = 0; r < RANKS; r++)
        for (int c = 0; c < CHIPS; c++) begin e += errs[r][c]; a += nact[r][c]; s += nsec[r][c]; end
      check(e == 0, $sformatf("%0d array protocol errors", e));
      $display("chip ACTs %0d, sectors activated %0d (%0d%% of full rows)", a, s, (a > 0) ? s * 100 / (a * 8) : 0);
    end
    for (int i = 0; i < NEV; i++) begin
      $display("%-16s %0d", ev_name[i], ev_cnt[i]);
      check(ev_cnt[i] > 0, $sformatf("mechanism %s never happened", ev_name[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
