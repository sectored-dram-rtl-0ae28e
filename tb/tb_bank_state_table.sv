// tb_bank_state_table: per-bank state and timing of the memory controller.
//
// The table tracks for each of the 64 banks (4 ranks x 16) whether it is
// open, its open row, the sector bits last sent with PRE, and when the next
// ACT, READ/WRITE and PRE become legal. The reference here keeps, per bank,
// the time of every last command and derives legality from the DDR4 rules
// of the evaluated part: ACT-to-CAS tRCD = 22, ACT-to-PRE tRAS = 56,
// ACT-to-ACT tRC = 78, PRE-to-ACT tRP = 22, READ-to-PRE tRTP = 12,
// WRITE-to-PRE CWL + burst clocks + tWR, in 0.625 ns clocks. Directed
// sequences check these latencies to the clock; then random legal command
// streams with random sector bits and auto-precharge are compared on every
// output, every clock.
module tb_bank_state_table;
  import sdram_pkg::*;
  localparam int NB = 64;
  logic clk = 0, rst_n = 0;
  logic [31:0] now = '0;
  logic cmd_valid = 0, cmd_ap = 0;
  cmd_e cmd_kind = CMD_NOP;
  logic [5:0] cmd_idx = '0;
  sector_mask_t cmd_sb = '0;
  logic [ROW_BITS-1:0] cmd_row = '0;
  logic [3:0] cmd_beats = '0;
  logic [NB-1:0] open, act_ok, cas_ok, pre_ok;
  logic [NB-1:0][ROW_BITS-1:0] row;
  sector_mask_t [NB-1:0] sb;
  int checks = 0, failures = 0;

  typedef struct { bit open; int row; int sb; int t_act; int t_pre; int t_ap_pre; int t_cas_done; } m_t;
  m_t m [NB];

  bank_state_table dut (.clk, .rst_n, .now, .cmd_valid, .cmd_kind, .cmd_idx, .cmd_sb, .cmd_row, .cmd_ap,
                        .cmd_beats, .open, .row, .sb, .act_ok, .cas_ok, .pre_ok);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("now %0d: %s", now, msg); end
  endtask

  function automatic int mx(input int a, input int b); return a > b ? a : b; endfunction

  // Earliest legal times from the command history.
  function automatic int m_act_at(input int b);
    return mx(mx(m[b].t_act + 78, m[b].t_pre + 22), m[b].t_ap_pre + 22);
  endfunction
  function automatic int m_pre_at(input int b);
    return mx(m[b].t_act + 56, m[b].t_cas_done);
  endfunction
  function automatic int m_cas_at(input int b);
    return m[b].t_act + 22;
  endfunction

  task automatic compare_all();
    for (int b = 0; b < NB; b++) begin
      check(open[b] == m[b].open, $sformatf("bank %0d open=%0b", b, open[b]));
      if (m[b].open) check(int'(row[b]) == m[b].row, $sformatf("bank %0d row", b));
      check(int'(sb[b]) == m[b].sb, $sformatf("bank %0d sb=%02h expected %02h", b, sb[b], m[b].sb));
      check(act_ok[b] == (int'(now) >= m_act_at(b)), $sformatf("bank %0d act_ok=%0b at %0d", b, act_ok[b], m_act_at(b)));
      check(cas_ok[b] == (int'(now) >= m_cas_at(b)), $sformatf("bank %0d cas_ok=%0b at %0d", b, cas_ok[b], m_cas_at(b)));
      check(pre_ok[b] == (int'(now) >= m_pre_at(b)), $sformatf("bank %0d pre_ok=%0b at %0d", b, pre_ok[b], m_pre_at(b)));
    end
  endtask

  // Issue one command in this clock (or none) and advance a clock.
  task automatic step(input bit v, input cmd_e k, input int b, input int s, input int r, input bit ap, input int beats);
    cmd_valid = v; cmd_kind = k; cmd_idx = 6'(b); cmd_sb = 8'(s); cmd_row = ROW_BITS'(r);
    cmd_ap = ap; cmd_beats = 4'(beats);
    #1;
    compare_all();
    @(posedge clk);
    if (v) begin
      automatic int t = int'(now);
      case (k)
        CMD_PRE: begin m[b].open = 0; m[b].sb = s; m[b].t_pre = t; end
        CMD_ACT: begin m[b].open = 1; m[b].row = r; m[b].t_act = t; m[b].t_cas_done = 0; end
        CMD_RD, CMD_WR: begin
          m[b].t_cas_done = mx(m[b].t_cas_done,
                               (k == CMD_RD) ? t + 12 : t + 16 + (beats + 1) / 2 + 24);
          if (ap) begin m[b].open = 0; m[b].t_ap_pre = m_pre_at(b); end
        end
        default: ;
      endcase
    end
    @(negedge clk);
    cmd_valid = 0;
    now = now + 1;
  endtask

  // Wait until a bank's flag is set; return the clocks waited.
  task automatic wait_flag(input int b, input int which, output int waited);
    waited = 0;
    forever begin
      #1;
      if ((which == 0 && act_ok[b]) || (which == 1 && cas_ok[b]) || (which == 2 && pre_ok[b])) break;
      step(0, CMD_NOP, 0, 0, 0, 0, 0);
      waited++;
    end
  endtask

  initial begin
    int w;
    for (int b = 0; b < NB; b++) m[b] = '{open: 0, row: 0, sb: 255, t_act: -1000, t_pre: -1000,
                                          t_ap_pre: -1000, t_cas_done: 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    now = 1000;
    // ACT -> READ: tRCD; ACT -> PRE: tRAS; PRE -> ACT: tRP; ACT -> ACT: tRC
    step(1, CMD_ACT, 5, 0, 123, 0, 0);
    wait_flag(5, 1, w); check(w + 1 == T_RCD, $sformatf("ACT to READ %0d clocks", w + 1));
    wait_flag(5, 2, w); check(w + T_RCD == T_RAS, $sformatf("ACT to PRE %0d clocks", w + T_RCD));
    step(1, CMD_PRE, 5, 8'h0F, 0, 0, 0);
    wait_flag(5, 0, w); check(w + 1 == T_RC - T_RAS, $sformatf("PRE to ACT %0d clocks", w + 1));
    // READ with auto-precharge late in tRAS: next ACT waits tRTP + tRP or tRC
    step(1, CMD_ACT, 6, 0, 7, 0, 0);
    wait_flag(6, 1, w);
    step(1, CMD_RD, 6, 0, 0, 1, 4);
    wait_flag(6, 0, w); check(w + T_RCD + 1 == T_RC, $sformatf("ACT to ACT via RDA %0d clocks", w + T_RCD + 1));
    // WRITE delays PRE by CWL + burst + tWR
    step(1, CMD_ACT, 7, 0, 9, 0, 0);
    wait_flag(7, 1, w);
    step(1, CMD_WR, 7, 0, 0, 0, 8);
    wait_flag(7, 2, w); check(w + 1 == T_CWL + 4 + T_WR, $sformatf("WRITE to PRE %0d clocks", w + 1));
    // random legal traffic
    for (int i = 0; i < 8000; i++) begin
      automatic int b = $urandom_range(0, 7) + 8 * $urandom_range(0, 1) * $urandom_range(0, 7);
      automatic int t = int'(now);
      if (!m[b].open && t >= m_act_at(b) && $urandom_range(0, 1) == 1)
        step(1, CMD_ACT, b, 0, $urandom_range(0, 32767), 0, 0);
      else if (m[b].open && t >= m_cas_at(b) && $urandom_range(0, 1) == 1)
        step(1, ($urandom_range(0, 1) == 1) ? CMD_RD : CMD_WR, b, 0, 0, $urandom_range(0, 3) == 0,
             $urandom_range(1, 8));
      else if (m[b].open && t >= m_pre_at(b) && $urandom_range(0, 3) == 0)
        step(1, CMD_PRE, b, $urandom_range(1, 255), 0, 0, 0);
      else if (!m[b].open && $urandom_range(0, 3) == 0)
        step(1, CMD_PRE, b, $urandom_range(1, 255), 0, 0, 0);
      else
        step(0, CMD_NOP, 0, 0, 0, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
