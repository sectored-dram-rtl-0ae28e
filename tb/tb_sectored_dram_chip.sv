// tb_sectored_dram_chip: one Sectored DRAM x8 chip with a behavioural array.
//
// The testbench drives DDR4 commands built with the sdram_pkg encoders.
// For random banks, rows, columns and sector masks it sends a PRE carrying
// the sector bits on A7..A0, an ACT (which must enable exactly the local
// wordlines of those sectors), a READ whose burst must start CL = 20 clocks
// later and carry one byte per open sector, in ascending sector order, two
// per clock, and a WRITE whose beats are driven from CWL = 16 clocks later
// and must land, masked, in the array (read back afterwards). It also checks
// that a PRE-all leaves the sector latches alone, that after reset an ACT
// opens the full row (eight beats per burst), and that no beat is ever sent
// that was not expected. Expected data come from the array's initial
// pattern and the writes the testbench made.
module tb_sectored_dram_chip;
  import sdram_pkg::*;
  import dram_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  ddr4_cmd_t cmd = DDR4_DES;
  logic [1:0] dq_in_valid = '0, dq_out_valid;
  logic [1:0][7:0] dq_in = '0, dq_out;
  arr_req_t req;
  logic [63:0] arr_rdata;
  int errors, acts, secs;
  int checks = 0, failures = 0;
  int cyc = 0;

  sectored_dram_chip dut (
    .clk, .rst_n, .cmd, .dq_in_valid, .dq_in, .dq_out_valid, .dq_out,
    .arr_act(req.act), .arr_act_bank(req.act_bank), .arr_act_row(req.act_row), .arr_lwl_en(req.lwl_en),
    .arr_pre(req.pre), .arr_pre_all(req.pre_all), .arr_pre_bank(req.pre_bank),
    .arr_rd(req.rd), .arr_rd_ap(req.rd_ap), .arr_rd_bank(req.rd_bank), .arr_rd_col(req.rd_col),
    .arr_rdata,
    .arr_wr(req.wr), .arr_wr_ap(req.wr_ap), .arr_wr_bank(req.wr_bank), .arr_wr_col(req.wr_col),
    .arr_wdata(req.wdata), .arr_wmask(req.wmask));

  dram_array_model #(.RANK(0), .CHIP(3)) u_arr (.clk, .rst_n, .req, .rdata(arr_rdata), .errors,
                                               .acts, .sectors_opened(secs));

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("cycle %0d: %s", cyc, msg); end
  endtask

  // reference contents
  logic [7:0] written [longint];
  function automatic logic [7:0] ref_byte(input int b, input int r, input int c, input int s);
    longint k = (longint'(b) << 40) | (longint'(r) << 16) | (longint'(c) << 4) | longint'(s);
    return written.exists(k) ? written[k] : pat_byte(0, 3, b, r, c, s);
  endfunction

  // expected read beats and planned write beats, by cycle*2+lane
  logic [7:0] exp_b [int];
  logic [7:0] drv_b [int];
  logic [7:0] latch_m [16];

  always @(negedge clk) begin
    cyc <= cyc + 1;
  end

  // monitor and driver, on the falling edge before the next command
  always @(negedge clk) begin
    #1;
    for (int l = 0; l < 2; l++) begin
      automatic int k = cyc * 2 + l;
      if (exp_b.exists(k)) begin
        check(dq_out_valid[l] && dq_out[l] == exp_b[k],
              $sformatf("read beat lane %0d: v=%0b %02h expected %02h", l, dq_out_valid[l], dq_out[l], exp_b[k]));
        exp_b.delete(k);
      end else if (rst_n) check(!dq_out_valid[l], "unexpected read beat");
      dq_in_valid[l] = drv_b.exists(k);
      dq_in[l]       = drv_b.exists(k) ? drv_b[k] : 8'h5A;
      if (drv_b.exists(k)) drv_b.delete(k);
    end
  end

  task automatic issue(input ddr4_cmd_t c);
    @(negedge clk); #2;
    cmd = c;
    @(negedge clk); #2;
    cmd = DDR4_DES;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic do_read(input int b, input int r, input int col);
    @(negedge clk); #2;
    begin
      automatic int t = cyc;
      automatic int n = 0;
      cmd = enc_cas(1'b0, 4'(b), 7'(col), 1'b0);
      for (int s = 0; s < 8; s++)
        if (latch_m[b][s]) begin
          exp_b[(t + T_CL + n / 2) * 2 + n % 2] = ref_byte(b, r, col, s);
          n++;
        end
    end
    @(negedge clk); #2;
    cmd = DDR4_DES;
    idle(T_CL + 6);
    check(exp_b.size() == 0, "read beats missing");
  endtask

  task automatic do_write(input int b, input int r, input int col);
    @(negedge clk); #2;
    begin
      automatic int t = cyc;
      automatic int n = 0;
      cmd = enc_cas(1'b1, 4'(b), 7'(col), 1'b0);
      for (int s = 0; s < 8; s++)
        if (latch_m[b][s]) begin
          automatic logic [7:0] v = 8'($urandom);
          drv_b[(t + T_CWL + n / 2) * 2 + n % 2] = v;
          written[(longint'(b) << 40) | (longint'(r) << 16) | (longint'(col) << 4) | longint'(s)] = v;
          n++;
        end
    end
    @(negedge clk); #2;
    cmd = DDR4_DES;
    idle(T_CWL + 8);
  endtask

  int lwl_ok = 0;

  initial begin
    for (int b = 0; b < 16; b++) latch_m[b] = 8'hFF;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // after reset: full row, BL8
    issue(enc_act(4'd2, 15'd77));
    do_read(2, 77, 5);
    issue(enc_pre(4'd2, 8'hFF));
    for (int it = 0; it < 300; it++) begin
      automatic int b   = $urandom_range(0, 15);
      automatic int r   = $urandom_range(0, 32767);
      automatic logic [7:0] sb = 8'($urandom) | 8'(1 << $urandom_range(0, 7));
      automatic int col = $urandom_range(0, 127);
      if (it % 7 == 0) sb = 8'hFF;
      issue(enc_pre(4'(b), sb));
      latch_m[b] = sb;
      if (it % 5 == 0) begin
        // PRE-all must not disturb the latches
        automatic ddr4_cmd_t pa = enc_pre(4'(b), 8'h00);
        pa.a[10] = 1'b1;
        issue(pa);
      end
      @(negedge clk); #2;
      cmd = enc_act(4'(b), 15'(r));
      #1;
      check(req.act && req.lwl_en == sb && req.act_row == 15'(r) && req.act_bank == 4'(b),
            $sformatf("ACT enabled lwl %02h for latched %02h", req.lwl_en, sb));
      @(negedge clk); #2;
      cmd = DDR4_DES;
      do_read(b, r, col);
      if (it % 2 == 0) begin
        do_write(b, r, col);
        do_read(b, r, col);
      end
      issue(enc_pre(4'(b), 8'hFF));
      latch_m[b] = 8'hFF;
    end
    check(errors == 0, $sformatf("%0d array protocol errors", errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
