// bank_state_table: the memory controller's per-bank state, with sector bits.
//
// A DDR4 controller already keeps, for every bank, whether a row is open,
// which one, and when the next command of each kind becomes legal. Sectored
// DRAM adds the bank's sector bits: the vector last sent with a PRE, which
// the chip holds in its sector latches and which sizes every READ/WRITE
// burst to that bank (8 bits per bank, 128 bits per 16-bank rank).
// One command is recorded per clock (cmd_valid with its kind, bank index
// {rank, bank}, and the fields it needs). Timing rules kept per bank:
//   PRE: ACT no earlier than tRP later;
//   ACT: RD/WR after tRCD, PRE after tRAS, next ACT after tRC;
//   RD : PRE after tRTP;  WR: PRE after CWL + burst clocks + tWR;
//   RD/WR with auto-precharge close the bank and move the next ACT to the
//   auto-precharge time + tRP.
// Outputs are per bank and combinational from the registered state and now.
// The timing rules are DDR4's; the sector bits are the paper's addition.
// Read/write turnaround and refresh timing are not modelled.
module bank_state_table
  import sdram_pkg::*;
#(
  parameter int unsigned NB = RANKS * BANKS   // banks tracked
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [31:0]            now,
  input  logic                   cmd_valid,
  input  cmd_e                   cmd_kind,     // CMD_PRE, CMD_ACT, CMD_RD, CMD_WR
  input  logic [$clog2(NB)-1:0]  cmd_idx,
  input  sector_mask_t           cmd_sb,       // PRE: sector bits sent
  input  logic [ROW_BITS-1:0]    cmd_row,      // ACT: row opened
  input  logic                   cmd_ap,       // RD/WR: auto-precharge
  input  logic [3:0]             cmd_beats,    // RD/WR: burst length in beats
  output logic [NB-1:0]          open,
  output logic [NB-1:0][ROW_BITS-1:0] row,
  output sector_mask_t [NB-1:0]  sb,
  output logic [NB-1:0]          act_ok,
  output logic [NB-1:0]          cas_ok,
  output logic [NB-1:0]          pre_ok
);
  typedef struct packed {
    logic                open;
    logic [ROW_BITS-1:0] row;
    sector_mask_t        sb;
    logic [31:0]         act_at, cas_at, pre_at;
  } bst_t;

  bst_t tab_q [NB];

  function automatic logic [31:0] max32(input logic [31:0] a, input logic [31:0] b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    for (int i = 0; i < NB; i++) begin
      open[i]   = tab_q[i].open;
      row[i]    = tab_q[i].row;
      sb[i]     = tab_q[i].sb;
      act_ok[i] = now >= tab_q[i].act_at;
      cas_ok[i] = now >= tab_q[i].cas_at;
      pre_ok[i] = now >= tab_q[i].pre_at;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // The chip's latches reset to all ones; so does the copy here.
      for (int i = 0; i < NB; i++) tab_q[i] <= '{open: 1'b0, row: '0, sb: '1,
                                                  act_at: '0, cas_at: '0, pre_at: '0};
    end else if (cmd_valid) begin
      bst_t e;
      logic [31:0] pre_at;
      e = tab_q[cmd_idx];
      unique case (cmd_kind)
        CMD_PRE: begin
          e.open   = 1'b0;
          e.sb     = cmd_sb;
          e.act_at = max32(e.act_at, now + T_RP);
        end
        CMD_ACT: begin
          e.open   = 1'b1;
          e.row    = cmd_row;
          e.cas_at = now + T_RCD;
          e.pre_at = now + T_RAS;
          e.act_at = now + T_RC;
        end
        CMD_RD, CMD_WR: begin
          pre_at = (cmd_kind == CMD_RD) ? now + T_RTP
                                        : now + T_CWL + ((32'(cmd_beats) + 32'd1) >> 1) + T_WR;
          e.pre_at = max32(e.pre_at, pre_at);
          if (cmd_ap) begin
            e.open   = 1'b0;
            e.act_at = max32(e.act_at, e.pre_at + T_RP);
          end
        end
        default: ;
      endcase
      tab_q[cmd_idx] <= e;
    end
  end
endmodule
