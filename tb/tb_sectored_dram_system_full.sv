// tb_sectored_dram_system_full: the memory system at its default size.
//
// One core with a 128-entry LSQ Lookahead queue, a 32 KiB 8-way L1 sector
// cache with a 512-entry Sector History Table, the 64-entry controller and
// one channel of four ranks of eight Sectored DRAM chips, each chip over a
// behavioural cell array; the controller stays in sectored mode (the
// default, always on). The core runs 6000 loads and stores in streams of 1
// to 8 words of a block, over 1536 blocks spread across all ranks and
// banks, three times the blocks the L1 holds, so fills, sector misses,
// evictions and write-backs of dirty words all happen. Checked: every
// access is answered in program order with the last value stored to the
// word (or the initial memory contents); the cell arrays see no access to a
// closed bank or sector; the controller never leaves sectored mode; fewer
// sectors than full rows are activated; and the run ends within the
// watchdog.
module tb_sectored_dram_system_full;
  import sdram_pkg::*;
  import dram_tb_pkg::*;
  localparam int NOPS = 6000;
  logic clk = 0, rst_n = 0;
  logic [0:0] core_valid = '0, core_ready, core_store = '0, load_valid;
  logic [0:0][PADDR_BITS-1:0] core_addr = '0;
  logic [0:0][31:0] core_pc = '0;
  logic [0:0][63:0] core_wdata = '0, load_data;
  arr_req_t [RANKS-1:0][CHIPS-1:0] arr_req;
  logic [RANKS-1:0][CHIPS-1:0][63:0] arr_rdata;
  logic sectored_on;
  sys_events_t ev;
  int checks = 0, failures = 0;

  sectored_dram_system dut (
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
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t: %s", $time, msg); end
  endtask

  int n_wb = 0, n_cmiss = 0, n_smiss = 0, n_hit = 0;
  always @(negedge clk) if (rst_n) begin
    n_wb    += int'(ev.l1_writeback);
    n_cmiss += int'(ev.l1_cache_miss);
    n_smiss += int'(ev.l1_sector_miss);
    n_hit   += int'(ev.l1_hit);
    if (!sectored_on) check(1'b0, "controller left sectored mode");
  end

  logic [63:0] view [longint];
  logic [63:0] expq [$];
  int done_ops = 0;

  function automatic logic [63:0] view_word(input logic [PADDR_BITS-1:0] a);
    longint key = longint'(a >> 3);
    return view.exists(key) ? view[key] : word_of(a, int'(a[5:3]));
  endfunction

  // 1536 blocks: 2 rows x 16 banks x 4 ranks x 12 columns.
  function automatic logic [PADDR_BITS-1:0] pick_block();
    dram_addr_t d;
    d.row  = ROW_BITS'($urandom_range(0, 1));
    d.bank = BANK_BITS'($urandom_range(0, 15));
    d.rank = RANK_BITS'($urandom_range(0, 3));
    d.col  = CB_COL_BITS'($urandom_range(0, 11) * 8);
    return {d, 6'b0};
  endfunction

  always @(negedge clk) if (rst_n && load_valid[0]) begin
    check(expq.size() > 0, "answer with nothing outstanding");
    if (expq.size() > 0) begin
      automatic logic [63:0] x = expq.pop_front();
      check(load_data[0] == x, $sformatf("data %h expected %h", load_data[0], x));
    end
    done_ops++;
  end

  initial begin
    automatic int sent = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < NOPS) begin
      automatic logic [PADDR_BITS-1:0] blk = pick_block();
      automatic int n   = $urandom_range(1, 8);
      automatic int w0  = $urandom_range(0, 7);
      automatic int pcb = $urandom_range(0, 7);
      for (int j = 0; j < n && sent < NOPS; j++) begin
        automatic logic [PADDR_BITS-1:0] a = blk | PADDR_BITS'(((w0 + j * ((pcb % 2) + 1)) % 8) * 8);
        automatic bit st = $urandom_range(0, 3) == 0;
        automatic logic [63:0] wd = {$urandom, $urandom};
        @(negedge clk); #1;
        core_valid[0] = 1; core_addr[0] = a; core_pc[0] = 32'h0040_0000 + 32'(pcb * 64 + j * 4);
        core_store[0] = st; core_wdata[0] = wd;
        while (!core_ready[0]) begin @(negedge clk); #1; end
        @(posedge clk);
        if (st) begin expq.push_back(wd); view[longint'(a >> 3)] = wd; end
        else expq.push_back(view_word(a));
        sent++;
        @(negedge clk); #1;
        core_valid[0] = 0;
      end
    end
    while (done_ops < NOPS) @(negedge clk);
    repeat (200) @(negedge clk);
    begin
      automatic int e = 0, a = 0, s = 0;
      for (int r = 0; r < RANKS; r++)
        for (int c = 0; c < CHIPS; c++) begin e += errs[r][c]; a += nact[r][c]; s += nsec[r][c]; end
      check(e == 0, $sformatf("%0d array protocol errors", e));
      check(a > 0 && s < a * 8, "no partial activation");
      $display("chip ACTs %0d, sectors activated %0d (%0d%% of full rows)", a, s, (a > 0) ? s * 100 / (a * 8) : 0);
    end
    $display("hits %0d, sector misses %0d, cache misses %0d, write-backs %0d", n_hit, n_smiss, n_cmiss, n_wb);
    check(n_cmiss > 0 && n_wb > 0 && n_smiss > 0, "misses and write-backs expected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
