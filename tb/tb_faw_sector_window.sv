// tb_faw_sector_window: the sector-counting tFAW window of one rank.
//
// A reference keeps the time and size of every ACT issued and computes,
// each clock, whether a candidate ACT of n sectors to bank group g is
// legal: at most 32 sectors activated in any 40-clock (25 ns) window, and
// tRRD_S = 4 / tRRD_L = 8 clocks since the previous ACT (different / same
// bank group). Random candidates are offered and issued whenever legal.
// Directed cases check the rates the evaluated configuration implies:
// four full-row ACTs fill a window and a fifth waits until the first leaves
// it (the DDR4 rule for full rows); single-sector ACTs are limited only by
// tRRD_S, so ten of them fit in one tFAW.
module tb_faw_sector_window;
  logic clk = 0, rst_n = 0;
  logic [31:0] now = '0;
  logic [3:0] nsec = 4'd8, act_nsec = '0, window_acts;
  logic [1:0] bg = '0, act_bg = '0;
  logic can_act, act = 0;
  logic [5:0] window_sectors;
  int checks = 0, failures = 0;
  int hist_t[$], hist_n[$];

  faw_sector_window dut (.clk, .rst_n, .now, .nsec, .bg, .can_act, .window_sectors, .window_acts,
                         .act, .act_nsec, .act_bg);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("now %0d: %s", now, msg); end
  endtask

  int last_t = -1000, last_bg = 0;

  function automatic bit model_ok(input int t, input int n, input int g);
    int s = 0;
    for (int i = 0; i < hist_t.size(); i++) if (t - hist_t[i] < 40) s += hist_n[i];
    return (s + n <= 32) && (t - last_t >= ((g == last_bg) ? 8 : 4));
  endfunction

  function automatic int model_acts(input int t);
    int a = 0;
    for (int i = 0; i < hist_t.size(); i++) if (t - hist_t[i] < 40) a++;
    return a;
  endfunction

  task automatic reset_all();
    rst_n = 0; act = 0;
    hist_t = {}; hist_n = {};
    last_t = -1000; last_bg = 0;
    @(negedge clk);
    rst_n = 1;
  endtask

  // Offer (n, g) at the current clock; issue it if legal and `want`.
  task automatic offer(input int n, input int g, input bit want, output bit issued);
    nsec = 4'(n); bg = 2'(g);
    #1;
    check(can_act == model_ok(int'(now), n, g),
          $sformatf("can_act=%0b for %0d sectors, expected %0b", can_act, n, model_ok(int'(now), n, g)));
    check(int'(window_acts) == model_acts(int'(now)), "window ACT count");
    issued = want && can_act;
    act = issued; act_nsec = 4'(n); act_bg = 2'(g);
    @(posedge clk);
    if (issued) begin
      hist_t.push_back(int'(now)); hist_n.push_back(n);
      last_t = int'(now); last_bg = g;
    end
    @(negedge clk);
    act = 0;
    now = now + 1;
  endtask

  int max_acts = 0, stalls = 0;

  initial begin
    bit iss;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // four full rows, then a fifth must wait for the first to leave
    begin
      int first = -1, fifth = -1, k = 0;
      while (fifth < 0) begin
        offer(8, k % 4, 1'b1, iss);
        if (iss) begin
          if (first < 0) first = int'(now) - 1;
          k++;
          if (k == 5) fifth = int'(now) - 1;
        end
      end
      check(fifth - first == 40, $sformatf("fifth full-row ACT %0d clocks after the first, expected 40",
                                           fifth - first));
    end
    // single-sector ACTs: ten fit in one tFAW
    now = now + 100;
    reset_all();
    for (int i = 0, k = 0; i < 60; i++) begin
      offer(1, k % 4, 1'b1, iss);
      if (iss) k++;
      if (int'(window_acts) > max_acts) max_acts = int'(window_acts);
    end
    check(max_acts == 10, $sformatf("at most %0d single-sector ACTs per tFAW, expected 10", max_acts));
    // random traffic
    for (int i = 0; i < 20000; i++) begin
      offer($urandom_range(1, 8), $urandom_range(0, 3), $urandom_range(0, 3) != 0, iss);
      if (!iss && !can_act) stalls++;
    end
    check(stalls > 0, "window never blocked an ACT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
