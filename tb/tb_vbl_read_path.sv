// tb_vbl_read_path: random bursts through the Read FIFO and Read MUX.
//
// Each burst loads a random 64-bit prefetch (byte i = sector i) and a random
// sector mask. The reference lists the bytes of the open sectors in
// ascending sector order and expects them two per clock, lane 0 first,
// starting the clock after start; a burst of n open sectors must occupy
// exactly ceil(n/2) clocks (an 8-sector burst: the 4 clocks of a DDR4 BL8).
// Bursts are started back to back in the clock that `last` is high, as a
// memory controller issuing consecutive reads does, and at random gaps.
// Inputs change and outputs are sampled on the falling edge.
module tb_vbl_read_path;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [63:0] data = '0;
  logic [7:0]  sb = '0;
  logic [1:0]  dq_valid;
  logic [1:0][7:0] dq;
  logic busy, last;
  int checks = 0, failures = 0;
  int cyc = 0;

  // expected byte per (cycle*2 + lane)
  logic [7:0] exp_b [int];

  vbl_read_path dut (.clk, .rst_n, .start, .data, .sb, .dq_valid, .dq, .busy, .last);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("cycle %0d: %s", cyc, msg); end
  endtask

  int bursts = 0, b2b = 0, full_len_clocks = -1;
  int busy_run = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (bursts < 400 || exp_b.size() != 0) begin
      @(negedge clk);
      cyc++;
      // check this clock's beats
      for (int l = 0; l < 2; l++) begin
        automatic int key = cyc * 2 + l;
        if (exp_b.exists(key)) begin
          check(dq_valid[l] && dq[l] == exp_b[key],
                $sformatf("lane %0d: got v=%0b %02h, expected %02h", l, dq_valid[l], dq[l], exp_b[key]));
          exp_b.delete(key);
        end else begin
          check(!dq_valid[l], $sformatf("lane %0d: unexpected beat", l));
        end
      end
      // burst duration of full bursts
      if (busy) busy_run++;
      // start a new burst when the path is free or finishing
      start = 1'b0;
      if (bursts < 400 && (!busy || last) && ($urandom_range(0, 2) != 0)) begin
        automatic int n = 0;
        if (busy && last) b2b++;
        start = 1'b1;
        data  = {$urandom, $urandom};
        sb    = ($urandom_range(0, 3) == 0) ? 8'hFF : 8'($urandom);
        for (int s = 0; s < 8; s++)
          if (sb[s]) begin
            exp_b[(cyc + 1 + n / 2) * 2 + (n % 2)] = data[8*s +: 8];
            n++;
          end
        bursts++;
      end
    end
    start = 1'b0;
    repeat (8) @(negedge clk);
    check(exp_b.size() == 0, "beats never delivered");
    check(b2b > 0, "no back-to-back bursts were exercised");
    // Rate: a full BL8 burst occupies the bus for exactly 4 clocks.
    rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; sb = 8'hFF; data = 64'h0706050403020100;
    @(negedge clk); start = 0;
    busy_run = 0;
    while (busy) begin busy_run++; @(negedge clk); end
    check(busy_run == 4, $sformatf("BL8 took %0d clocks, expected 4", busy_run));
    // One open sector: a single beat, one clock.
    start = 1; sb = 8'h20; data = 64'h0011223344556677;
    @(negedge clk); start = 0;
    check(dq_valid == 2'b01 && dq[0] == 8'h22, "single-sector burst");
    @(negedge clk);
    check(!busy && dq_valid == 2'b00, "single-sector burst longer than 1 clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
