// tb_sector_mode_ctrl: Always-ON and dynamic sectored-mode control.
//
// Two instances run side by side. The default one (dynamic control off)
// must keep sectored mode on whatever the queue does. The dynamic one
// (period 1000 clocks, threshold 30) sees windows of high and low read-queue
// occupancy, including one whose average is exactly 30; for each window
// the testbench sums the occupancy it drove and expects sectored mode, for
// the whole next window, to be on exactly when that average was above 30.
// The window end must come every 1000 clocks. Sectored mode is on from reset.
module tb_sector_mode_ctrl;
  localparam int NWIN = 24;
  logic clk = 0, rst_n = 0;
  logic [6:0] occ = '0;
  logic on_s, end_s, on_d, end_d;
  int checks = 0, failures = 0;
  int sum [NWIN];
  int ups = 0, downs = 0;

  sector_mode_ctrl u_static (.clk, .rst_n, .occupancy(occ), .sectored_on(on_s), .window_end(end_s));
  sector_mode_ctrl #(.DYNAMIC(1'b1), .PERIOD(1000), .THRESHOLD(30)) u_dyn (
    .clk, .rst_n, .occupancy(occ), .sectored_on(on_d), .window_end(end_d));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("clock %0d: %s", $time / 10, msg); end
  endtask

  function automatic int level(input int w);
    if (w == 6) return 30;
    case (w % 4)
      0: return 10;
      1: return 31;
      2: return 29;
      default: return 50;
    endcase
  endfunction

  initial begin
    for (int w = 0; w < NWIN; w++) sum[w] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NWIN * 1000; c++) begin
      automatic int w = c / 1000;
      automatic bit exp_on = (w == 0) ? 1'b1 : (sum[w-1] > 30 * 1000);
      automatic int jitter;
      if (w > 0 && c % 1000 == 0) begin
        automatic bit prev = (w == 1) ? 1'b1 : (sum[w-2] > 30 * 1000);
        if (exp_on && !prev) ups++;
        if (!exp_on && prev) downs++;
      end
      check(on_d == exp_on, $sformatf("window %0d: sectored_on=%0b expected %0b", w, on_d, exp_on));
      check(on_s, "Always-ON instance turned off");
      check(end_d == (c % 1000 == 999) && end_s == end_d, "window end at the wrong clock");
      jitter = (w == 6) ? 0 : ((c % 2 == 0) ? 1 : -1);
      occ = 7'(level(w) + jitter);
      sum[w] += int'(occ);
      @(negedge clk);
    end
    check(ups > 0 && downs > 0, "mode never switched both ways");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
