// tb_vbl_write_path: random write bursts through the Write FIFO.
//
// For a random sector mask the testbench drives one byte per open sector,
// two per clock from the clock after start, in ascending sector order. The
// path must place each byte at its sector's position, present the 64-bit
// word with the mask one clock after the last beat pair, and carry the tag
// of the burst. Bursts follow each other back to back (start in the final
// beat clock of the previous one) and with random gaps. Bytes of closed
// sectors must come out zero and masked off. Inputs change and outputs are
// sampled on the falling edge.
module tb_vbl_write_path;
  localparam int TW = 12;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [7:0] sb = '0;
  logic [TW-1:0] tag = '0;
  logic [1:0] dq_valid = '0;
  logic [1:0][7:0] dq = '0;
  logic done, busy;
  logic [63:0] data;
  logic [7:0] mask;
  logic [TW-1:0] done_tag;
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { logic [63:0] d; logic [7:0] m; logic [TW-1:0] t; } exp_t;
  exp_t exp_done [int];           // by cycle
  logic [1:0] drv_v [int];
  logic [1:0][7:0] drv_d [int];
  int last_beat_cyc = -10;

  vbl_write_path #(.TAG_W(TW)) dut (.clk, .rst_n, .start, .sb, .tag, .dq_valid, .dq,
                                    .done, .data, .mask, .done_tag, .busy);

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

  int bursts = 0, b2b = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (bursts < 400 || exp_done.size() != 0) begin
      @(negedge clk);
      cyc++;
      if (exp_done.exists(cyc)) begin
        check(done && data == exp_done[cyc].d && mask == exp_done[cyc].m && done_tag == exp_done[cyc].t,
              $sformatf("done=%0b data=%016h mask=%02h tag=%0h, expected %016h %02h %0h", done, data, mask,
                        done_tag, exp_done[cyc].d, exp_done[cyc].m, exp_done[cyc].t));
        exp_done.delete(cyc);
      end else check(!done, "unexpected done");
      // beats planned for this clock
      dq_valid = drv_v.exists(cyc) ? drv_v[cyc] : 2'b00;
      dq       = drv_d.exists(cyc) ? drv_d[cyc] : 16'($urandom);
      start = 1'b0;
      // free when no beat of an earlier burst is planned after this clock
      if (bursts < 400 && last_beat_cyc <= cyc && $urandom_range(0, 2) != 0) begin
        automatic int n = 0;
        exp_t e;
        if (last_beat_cyc == cyc) b2b++;
        start = 1'b1;
        sb  = 8'($urandom) | 8'(1 << $urandom_range(0, 7));
        tag = TW'($urandom);
        e.d = '0; e.m = sb; e.t = tag;
        for (int s = 0; s < 8; s++)
          if (sb[s]) begin
            automatic int c = cyc + 1 + n / 2;
            automatic logic [7:0] b = 8'($urandom);
            if (!drv_v.exists(c)) begin drv_v[c] = 2'b00; drv_d[c] = '0; end
            drv_v[c][n % 2] = 1'b1;
            drv_d[c][n % 2] = b;
            e.d[8*s +: 8] = b;
            last_beat_cyc = c;
            n++;
          end
        exp_done[last_beat_cyc + 1] = e;
        bursts++;
      end
    end
    check(exp_done.size() == 0, "bursts never completed");
    check(b2b > 0, "no back-to-back bursts were exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
