// tb_sector_predictor: Sector History Table indexing and training.
//
// The table index must be PC[8:0] XOR PC[17:9] XOR the word offset (512
// entries); the testbench computes it from the bits of random PCs. After
// reset every entry predicts no sectors. Random training writes store used
// sector masks; a later lookup of the same index must return the last mask
// written there, and lookups are combinational (same clock). A reference
// array of the 512 entries is kept here.
module tb_sector_predictor;
  logic clk = 0, rst_n = 0;
  logic [31:0] pc = '0;
  logic [2:0] word_off = '0;
  logic [8:0] idx, upd_idx = '0;
  logic [7:0] pred, upd_sb = '0;
  logic upd = 0;
  logic [7:0] model [512];
  int checks = 0, failures = 0;
  int nonzero_hits = 0;

  sector_predictor dut (.clk, .rst_n, .pc, .word_off, .idx, .pred, .upd, .upd_idx, .upd_sb);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("%t: %s", $time, msg); end
  endtask

  initial begin
    for (int i = 0; i < 512; i++) model[i] = 8'h00;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 512; i++) begin
      pc = 32'(i); word_off = 3'd0;
      #1;
      check(pred == 8'h00, "table not cleared by reset");
    end
    for (int i = 0; i < 20000; i++) begin
      automatic int exp_idx;
      @(negedge clk);
      pc       = ($urandom_range(0, 1) == 1) ? $urandom : 32'($urandom_range(0, 2047));
      word_off = 3'($urandom);
      exp_idx  = 0;
      for (int b = 0; b < 9; b++)
        exp_idx |= ((pc[b] ^ pc[9 + b] ^ ((b < 3) ? word_off[b] : 1'b0)) ? 1 : 0) << b;
      upd      = $urandom_range(0, 1);
      upd_idx  = ($urandom_range(0, 1) == 1) ? 9'(exp_idx) : 9'($urandom);
      upd_sb   = 8'($urandom);
      #1;
      check(int'(idx) == exp_idx, $sformatf("pc %08h off %0d: idx %0d expected %0d", pc, word_off, idx, exp_idx));
      check(pred == model[exp_idx], $sformatf("pred %02h expected %02h", pred, model[exp_idx]));
      if (pred != 8'h00) nonzero_hits++;
      @(posedge clk);
      if (upd) model[upd_idx] = upd_sb;
    end
    check(nonzero_hits > 1000, "trained entries were rarely read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
