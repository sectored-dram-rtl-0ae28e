// tb_sa_sector_ctrl: sector latches and sector-gated local wordlines.
//
// Random single-bank PREs load random sector bits into a bank's latches and
// random ACTs to other banks must enable exactly the local wordlines of the
// latched sectors; no wordline may be enabled without an ACT. The read-back
// port (used for the burst length of RD/WR) must show the same bits. After
// reset every latch holds all ones, so an ACT before any PRE opens the full
// row, as in a standard DDR4 chip. The reference is a per-bank array here.
module tb_sa_sector_ctrl;
  logic clk = 0, rst_n = 0;
  logic pre = 0, act = 0;
  logic [3:0] pre_bank = '0, act_bank = '0, rd_bank = '0;
  logic [7:0] pre_sb = '0, lwl_en, rd_sb;
  logic [7:0] model [16];
  int checks = 0, failures = 0;

  sa_sector_ctrl dut (.clk, .rst_n, .pre, .pre_bank, .pre_sb, .act, .act_bank, .lwl_en, .rd_bank, .rd_sb);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("%t: %s", $time, msg); end
  endtask

  initial begin
    for (int b = 0; b < 16; b++) model[b] = 8'hFF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // after reset: full-row activation
    for (int b = 0; b < 16; b++) begin
      act = 1; act_bank = 4'(b); rd_bank = 4'(b);
      #1;
      check(lwl_en == 8'hFF && rd_sb == 8'hFF, "latches not all ones after reset");
    end
    act = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      pre      = $urandom_range(0, 1);
      pre_bank = 4'($urandom);
      pre_sb   = 8'($urandom);
      act      = $urandom_range(0, 1);
      act_bank = 4'($urandom);
      if (pre && act && act_bank == pre_bank) act_bank = pre_bank + 4'd1;
      rd_bank  = 4'($urandom);
      #1;
      check(lwl_en == (act ? model[act_bank] : 8'h00),
            $sformatf("bank %0d lwl_en=%02h expected %02h", act_bank, lwl_en, act ? model[act_bank] : 8'h00));
      check(rd_sb == model[rd_bank], $sformatf("rd_sb bank %0d = %02h expected %02h", rd_bank, rd_sb, model[rd_bank]));
      @(posedge clk);
      if (pre) model[pre_bank] = pre_sb;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
