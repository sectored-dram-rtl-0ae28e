// faw_sector_window: activation-rate limiter of one rank, counting sectors.
//
// Conventional DDR4 allows at most four ACTs in any tFAW window because an
// ACT of a full row draws a fixed amount of power. With Sectored DRAM an ACT
// opens only some sectors, so the window limits activated sectors instead:
// at most FAW_SECTORS (32, the sectors of four full rows) in any window of
// T_FAW clocks, e.g. eight 4-sector ACTs or four 8-sector ACTs. The ACT
// rate stays bounded by tRRD_S between bank groups and tRRD_L within a bank
// group, so at most T_FAW/T_RRDS (10) ACTs fall in one window.
// The module keeps the last HIST ACTs (issue time and sector count) in a
// shift register; can_act says whether an ACT of nsec sectors to bank group
// bg would be legal in the current clock, act records one that is issued.
// The history depth and time stamps are this design's implementation of the
// rule stated in the paper.
module faw_sector_window #(
  parameter int unsigned T_FAW       = 40,
  parameter int unsigned T_RRDS      = 4,
  parameter int unsigned T_RRDL      = 8,
  parameter int unsigned FAW_SECTORS = 32,
  parameter int unsigned HIST        = (T_FAW + T_RRDS - 1) / T_RRDS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] now,
  input  logic [3:0]  nsec,       // sectors the candidate ACT opens (1..8)
  input  logic [1:0]  bg,
  output logic        can_act,
  output logic [5:0]  window_sectors, // sectors activated in the current window
  output logic [3:0]  window_acts,    // ACTs in the current window
  input  logic        act,
  input  logic [3:0]  act_nsec,
  input  logic [1:0]  act_bg
);
  typedef struct packed { logic v; logic [31:0] t; logic [3:0] n; } hist_t;
  hist_t      hist_q [HIST];
  logic       any_q;
  logic [31:0] last_t_q;
  logic [1:0]  last_bg_q;

  always_comb begin
    window_sectors = '0;
    window_acts    = '0;
    for (int i = 0; i < HIST; i++)
      if (hist_q[i].v && (now - hist_q[i].t) < T_FAW) begin
        window_sectors = window_sectors + 6'(hist_q[i].n);
        window_acts    = window_acts + 4'd1;
      end
    can_act = (32'(window_sectors) + 32'(nsec) <= FAW_SECTORS) &&
              (!any_q || (now - last_t_q) >= ((bg == last_bg_q) ? T_RRDL : T_RRDS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < HIST; i++) hist_q[i] <= '0;
      any_q     <= 1'b0;
      last_t_q  <= '0;
      last_bg_q <= '0;
    end else if (act) begin
      hist_q[0] <= '{v: 1'b1, t: now, n: act_nsec};
      for (int i = 1; i < HIST; i++) hist_q[i] <= hist_q[i-1];
      any_q     <= 1'b1;
      last_t_q  <= now;
      last_bg_q <= act_bg;
    end
  end

  a_legal: assert property (@(posedge clk) disable iff (!rst_n)
                            act |-> (can_act && nsec == act_nsec && bg == act_bg));
endmodule
