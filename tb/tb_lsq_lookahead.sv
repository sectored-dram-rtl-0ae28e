// tb_lsq_lookahead: LSQ Lookahead word gathering in a 128-entry queue.
//
// Random loads and stores, drawn from a few cache blocks so that many share
// a block, are allocated while the cache side accepts issues at random.
// The reference keeps the queue in order; when an access is allocated every
// queued access to the same 64-byte block gains the new access's word, and
// the new access starts with its own word only. Each issued access must
// come out in program order with its address, PC, store flag and data, and
// with exactly those sector bits. The queue must refuse allocation when it
// holds 128 accesses, and the merge event must fire exactly when some
// queued access gained a word.
module tb_lsq_lookahead;
  localparam int DEPTH = 128;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_store = 0, iss_ready = 0;
  logic alloc_ready, iss_valid, iss_store, ev_merge;
  logic [33:0] alloc_addr = '0, iss_addr;
  logic [31:0] alloc_pc = '0, iss_pc;
  logic [63:0] alloc_wdata = '0, iss_wdata;
  logic [7:0] iss_sb;
  int checks = 0, failures = 0;

  typedef struct { logic [33:0] a; logic [31:0] pc; logic st; logic [63:0] d; logic [7:0] sb; } q_t;
  q_t q[$];
  int merges = 0, fulls = 0, issued = 0;

  lsq_lookahead dut (.clk, .rst_n, .alloc_valid, .alloc_ready, .alloc_addr, .alloc_pc, .alloc_store,
                     .alloc_wdata, .iss_valid, .iss_ready, .iss_addr, .iss_pc, .iss_sb, .iss_store,
                     .iss_wdata, .ev_merge);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("%t: %s", $time, msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      automatic bit do_alloc, do_pop, exp_merge;
      automatic int phase = (i / 2000) % 3;   // 0 balanced, 1 fill up, 2 drain
      @(negedge clk);
      alloc_valid = (phase == 2) ? ($urandom_range(0, 7) == 0) : ($urandom_range(0, 3) != 0);
      alloc_addr  = '0;
      alloc_addr[5:3]  = 3'($urandom);
      alloc_addr[33:6] = 28'($urandom_range(0, 5)) + 28'h4000;
      alloc_addr[2:0]  = 3'b000;
      alloc_pc    = $urandom;
      alloc_store = $urandom_range(0, 3) == 0;
      alloc_wdata = {$urandom, $urandom};
      iss_ready   = (phase == 1) ? ($urandom_range(0, 7) == 0) : ($urandom_range(0, 1) == 1);
      #1;
      check(alloc_ready == (q.size() < DEPTH), $sformatf("alloc_ready=%0b with %0d queued", alloc_ready, q.size()));
      check(iss_valid == (q.size() > 0), "iss_valid");
      if (q.size() == DEPTH) fulls++;
      do_pop = iss_valid && iss_ready;
      if (q.size() > 0 && iss_valid) begin
        check(iss_addr == q[0].a && iss_pc == q[0].pc && iss_store == q[0].st && iss_wdata == q[0].d,
              "issued access differs from the allocated one");
        check(iss_sb == q[0].sb, $sformatf("sector bits %02h expected %02h", iss_sb, q[0].sb));
      end
      do_alloc = alloc_valid && alloc_ready;
      exp_merge = 1'b0;
      if (do_alloc)
        for (int k = do_pop ? 1 : 0; k < q.size(); k++)
          if (q[k].a[33:6] == alloc_addr[33:6]) exp_merge = 1'b1;
      check(ev_merge == exp_merge, "merge event");
      @(posedge clk);
      if (do_pop) begin void'(q.pop_front()); issued++; end
      if (do_alloc) begin
        q_t e;
        for (int k = 0; k < q.size(); k++)
          if (q[k].a[33:6] == alloc_addr[33:6]) q[k].sb[alloc_addr[5:3]] = 1'b1;
        e.a = alloc_addr; e.pc = alloc_pc; e.st = alloc_store; e.d = alloc_wdata;
        e.sb = 8'(1) << alloc_addr[5:3];
        q.push_back(e);
      end
      if (exp_merge) merges++;
    end
    check(merges > 100 && fulls > 0 && issued > 1000, $sformatf("merges %0d fulls %0d issued %0d", merges, fulls, issued));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
