// tb_sector_cache: the sectored L1 with its Sector Predictor.
//
// The cache (32 KiB, 8 ways, 64 sets) is driven with random loads and
// stores over a few sets, so blocks are evicted often, against a memory
// model here that answers reads after a random delay with the requested
// sectors (sometimes more, as the DRAM does when more sectors of the row are
// open) and applies write-backs word by word. Checked:
//   * every load returns the last value stored to its word (or the initial
//     memory contents), and a hit answers in the clock after the request;
//   * each request raises exactly one of sector hit, sector miss and cache
//     miss; a cache miss fetches all wanted words, a sector miss some of
//     them (the others are present);
//   * write-backs carry exactly the dirty words;
//   * Sector Predictor, directed: a block whose words 0, 3 and 5 were used,
//     once evicted, is fetched again by the same load (same PC and word)
//     with words 0, 3 and 5, and the prediction event fires.
module tb_sector_cache;
  import dram_tb_pkg::*;
  localparam int AW = 34;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_store = 0;
  logic [AW-1:0] req_addr = '0;
  logic [31:0] req_pc = '0;
  logic [7:0] req_sb = '0;
  logic [63:0] req_wdata = '0;
  logic resp_valid;
  logic [63:0] resp_rdata;
  logic mem_req_valid, mem_req_ready = 1, mem_req_write;
  logic [AW-1:0] mem_req_addr;
  logic [7:0] mem_req_sb;
  logic [511:0] mem_req_wdata;
  logic mem_resp_valid = 0;
  logic [AW-1:0] mem_resp_addr = '0;
  logic [7:0] mem_resp_sb = '0;
  logic [511:0] mem_resp_rdata = '0;
  logic ev_hit, ev_sector_miss, ev_cache_miss, ev_writeback, ev_predicted;
  int checks = 0, failures = 0;
  int n_hit = 0, n_smiss = 0, n_cmiss = 0, n_wb = 0, n_pred = 0;

  sector_cache dut (.clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_pc, .req_sb, .req_store, .req_wdata,
                    .resp_valid, .resp_rdata, .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr,
                    .mem_req_sb, .mem_req_wdata, .mem_resp_valid, .mem_resp_addr, .mem_resp_sb, .mem_resp_rdata,
                    .ev_hit, .ev_sector_miss, .ev_cache_miss, .ev_writeback, .ev_predicted);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t: %s", $time, msg); end
  endtask

  // memory behind the cache and the core's view of memory, by word address
  logic [63:0] mem [longint];
  logic [63:0] core_view [longint];
  logic [7:0] dirty_words [longint];    // by block: words stored since the block was filled
  function automatic logic [63:0] mem_word(input logic [AW-1:0] a, input int w);
    longint k = longint'(a >> 6) * 8 + w;
    return mem.exists(k) ? mem[k] : word_of(a, w);
  endfunction
  function automatic logic [63:0] view_word(input logic [AW-1:0] a);
    longint k = longint'(a >> 3);
    return core_view.exists(k) ? core_view[k] : word_of(a, int'(a[5:3]));
  endfunction

  // memory model: one read outstanding at a time, as the cache allows
  logic [7:0] last_fetch_sb = '0;
  int delay = -1;
  logic [AW-1:0] pend_a;
  logic [7:0] pend_sb;
  always @(negedge clk) begin
    mem_resp_valid = 0;
    if (delay == 0) begin
      automatic logic [7:0] sb = pend_sb;
      if ($urandom_range(0, 3) == 0) sb = sb | 8'($urandom);
      mem_resp_valid = 1; mem_resp_addr = pend_a; mem_resp_sb = sb;
      for (int s = 0; s < 8; s++) mem_resp_rdata[64*s +: 64] = sb[s] ? mem_word(pend_a, s) : {$urandom, $urandom};
      delay = -1;
    end else if (delay > 0) delay--;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (mem_req_write) begin
        n_wb++;
        for (int s = 0; s < 8; s++)
          if (mem_req_sb[s]) mem[longint'(mem_req_addr >> 6) * 8 + s] = mem_req_wdata[64*s +: 64];
      end else begin
        check(delay < 0, "second read while one is outstanding");
        check(mem_req_sb != '0, "read of no sectors");
        pend_a = mem_req_addr; pend_sb = mem_req_sb; last_fetch_sb = mem_req_sb;
        delay = $urandom_range(2, 30);
      end
    end
  end

  // Send one access and check its answer. Returns the outcome: 0 hit, 1 sector miss, 2 cache miss.
  task automatic access(input logic [AW-1:0] a, input logic [31:0] pc, input logic [7:0] sb, input bit st,
                        output int outcome);
    automatic logic [63:0] wd = {$urandom, $urandom};
    automatic int lat = 0;
    automatic logic [7:0] asked = '0;
    automatic bit asked_seen = 0;
    @(negedge clk); #1;
    req_valid = 1; req_addr = a; req_pc = pc; req_sb = sb | 8'(1 << a[5:3]); req_store = st; req_wdata = wd;
    while (!req_ready) begin @(negedge clk); #1; end
    #1;
    outcome = ev_hit ? 0 : ev_sector_miss ? 1 : 2;
    check(int'(ev_hit) + int'(ev_sector_miss) + int'(ev_cache_miss) == 1, "not exactly one lookup outcome");
    if (ev_hit) n_hit++;
    if (ev_sector_miss) n_smiss++;
    if (ev_cache_miss) n_cmiss++;
    if (ev_predicted) n_pred++;
    @(negedge clk); #1;
    req_valid = 0;
    while (!resp_valid && lat < 1000) begin
      if (mem_req_valid && !mem_req_write && !asked_seen) begin asked = mem_req_sb; asked_seen = 1; end
      @(negedge clk); #1; lat++;
    end
    check(resp_valid, "no response");
    if (outcome == 0) check(lat == 0, $sformatf("hit answered after %0d clocks", lat + 1));
    else begin
      // a cache miss fetches every wanted word; a sector miss at least one
      // wanted word the block lacked
      if (outcome == 2) check(asked_seen && (req_sb & ~asked) == '0, "fetch lacks the wanted words");
      else              check(asked_seen && (req_sb & asked) != '0, "sector miss fetched no wanted word");
    end
    check(resp_rdata == (st ? wd : view_word(a)),
          $sformatf("%s %h: %h expected %h", st ? "store" : "load", a, resp_rdata, st ? wd : view_word(a)));
    if (st) core_view[longint'(a >> 3)] = wd;
  endtask

  initial begin
    int o;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- directed: Sector Predictor
    begin
      automatic logic [AW-1:0] base = 34'h0_4000_0040;   // set 1
      automatic logic [31:0] pc = 32'h0040_1234;
      access(base + 0,  pc, 8'h00, 0, o);  check(o == 2, "first touch is a cache miss");
      access(base + 24, 32'h0040_2000, 8'h00, 0, o);     // word 3
      access(base + 40, 32'h0040_3000, 8'h00, 0, o);     // word 5
      for (int k = 1; k <= 8; k++) access(base + 34'(k) * 4096, 32'h0050_0000 + 32'(k), 8'h00, 0, o);
      access(base + 0, pc, 8'h00, 0, o);
      check(o == 2, "evicted block not missed");
      check(last_fetch_sb == 8'b0010_1001, $sformatf("predicted fetch %02h, expected 29", last_fetch_sb));
      check(n_pred > 0, "prediction event");
    end
    // ---- directed: write-back of dirty words only
    begin
      automatic logic [AW-1:0] base = 34'h0_5000_0080;   // set 2
      automatic int wb0;
      access(base + 16, 32'h1, 8'h00, 1, o);
      access(base + 48, 32'h2, 8'h00, 1, o);
      wb0 = n_wb;
      for (int k = 1; k <= 8; k++) access(base + 34'(k) * 4096, 32'h0060_0000 + 32'(k), 8'h00, 0, o);
      check(n_wb == wb0 + 1, "dirty block not written back");
      check(mem[longint'(base >> 6) * 8 + 2] == view_word(base + 16) &&
            mem[longint'(base >> 6) * 8 + 6] == view_word(base + 48), "write-back data");
      check(!mem.exists(longint'(base >> 6) * 8 + 0), "clean word written back");
    end
    // ---- random traffic over 4 sets, 12 tags each
    for (int i = 0; i < 6000; i++) begin
      automatic logic [AW-1:0] a;
      a = '0;
      a[33:12] = 22'($urandom_range(0, 11)) + 22'h1000;
      a[11:6]  = 6'($urandom_range(8, 11));
      a[5:3]   = 3'($urandom);
      access(a, 32'h0070_0000 + 32'($urandom_range(0, 15)) * 4, ($urandom_range(0, 2) == 0) ? 8'($urandom) : 8'h00,
             $urandom_range(0, 3) == 0, o);
    end
    $display("hits %0d sector misses %0d cache misses %0d write-backs %0d predictions %0d",
             n_hit, n_smiss, n_cmiss, n_wb, n_pred);
    check(n_hit > 0 && n_smiss > 0 && n_cmiss > 0 && n_wb > 0, "an outcome never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
