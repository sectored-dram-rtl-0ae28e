// sectored_dram_chip: digital part of an x8 DDR4 chip with Sectored DRAM.
//
// The chip keeps the DDR4 pins. It decodes the command bus each clock:
//   PRE  (single bank) loads the bank's sector latches from A7..A0,
//   ACT  opens the row, enabling only the local wordlines of latched sectors,
//   RD   fetches the 64-bit prefetch (one byte per sector) of the open row
//        and, CL clocks later, bursts out only the bytes of open sectors,
//   WR   collects, from CWL clocks on, one beat per open sector into the
//        Write FIFO and writes those bytes back with a sector mask.
// The burst length of RD/WR is popcount(sector latches of the bank), so the
// controller and the chip agree on it without extra signalling.
// The cell array (mats, sense amplifiers, row buffers) is analog and sits
// outside this module behind the arr_* ports: an ACT presents bank, row and
// the per-sector local wordline enables; a RD reads arr_rdata in the same
// clock; a write is presented when its last beat has arrived; arr_pre closes
// a bank (explicit PRE, or auto-precharge with the access).
// Timing: read data leaves on dq_out in clock t+CL after a RD in clock t;
// write data is expected on dq_in from clock t+CWL after a WR in clock t.
// The DDR data bus is modelled as two beats per clock (see vbl_read_path).
// The command decoding is DDR4's; the choice of A7..A0 for sector bits, the
// latency pipelines and the array port are this design's.
module sectored_dram_chip
  import sdram_pkg::*;
#(
  parameter int unsigned CL  = T_CL,
  parameter int unsigned CWL = T_CWL
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  ddr4_cmd_t              cmd,
  input  logic [1:0]             dq_in_valid,
  input  logic [1:0][7:0]        dq_in,
  output logic [1:0]             dq_out_valid,
  output logic [1:0][7:0]        dq_out,
  // cell array
  output logic                   arr_act,
  output logic [BANK_BITS-1:0]   arr_act_bank,
  output logic [ROW_BITS-1:0]    arr_act_row,
  output logic [SECTORS-1:0]     arr_lwl_en,
  output logic                   arr_pre,
  output logic                   arr_pre_all,
  output logic [BANK_BITS-1:0]   arr_pre_bank,
  output logic                   arr_rd,
  output logic                   arr_rd_ap,
  output logic [BANK_BITS-1:0]   arr_rd_bank,
  output logic [CB_COL_BITS-1:0] arr_rd_col,
  input  logic [63:0]            arr_rdata,
  output logic                   arr_wr,
  output logic                   arr_wr_ap,
  output logic [BANK_BITS-1:0]   arr_wr_bank,
  output logic [CB_COL_BITS-1:0] arr_wr_col,
  output logic [63:0]            arr_wdata,
  output logic [SECTORS-1:0]     arr_wmask
);
  cmd_e                 c;
  logic [BANK_BITS-1:0] bank;
  logic [7:0]           bank_sb;

  assign c    = decode_cmd(cmd);
  assign bank = {cmd.bg, cmd.ba};

  sa_sector_ctrl #(.BANKS(BANKS), .BANK_BITS(BANK_BITS)) u_sa (
    .clk, .rst_n,
    .pre(c == CMD_PRE), .pre_bank(bank), .pre_sb(cmd.a[7:0]),
    .act(c == CMD_ACT), .act_bank(bank), .lwl_en(arr_lwl_en),
    .rd_bank(bank), .rd_sb(bank_sb)
  );

  always_comb begin
    arr_act      = (c == CMD_ACT);
    arr_act_bank = bank;
    arr_act_row  = {cmd.we_n, cmd.a};
    arr_pre      = (c == CMD_PRE) || (c == CMD_PREA);
    arr_pre_all  = (c == CMD_PREA);
    arr_pre_bank = bank;
    arr_rd       = (c == CMD_RD);
    arr_rd_ap    = cmd.a[10];
    arr_rd_bank  = bank;
    arr_rd_col   = cmd.a[9:3];
  end

  // ---------------------------------------------------------------- read latency
  typedef struct packed { logic v; logic [7:0] sb; logic [63:0] data; } rd_stage_t;
  rd_stage_t rd_pipe [CL-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < CL - 1; i++) rd_pipe[i] <= '0;
    end else begin
      rd_pipe[0] <= '{v: arr_rd, sb: bank_sb, data: arr_rdata};
      for (int i = 1; i < CL - 1; i++) rd_pipe[i] <= rd_pipe[i-1];
    end
  end

  vbl_read_path u_rd (
    .clk, .rst_n,
    .start(rd_pipe[CL-2].v), .data(rd_pipe[CL-2].data), .sb(rd_pipe[CL-2].sb),
    .dq_valid(dq_out_valid), .dq(dq_out), .busy(), .last()
  );

  // ---------------------------------------------------------------- write latency
  localparam int unsigned WTAG = 1 + BANK_BITS + CB_COL_BITS;
  typedef struct packed { logic v; logic [7:0] sb; logic [WTAG-1:0] tag; } wr_stage_t;
  wr_stage_t wr_pipe [CWL-1];
  logic [WTAG-1:0] wdone_tag;
  logic            wdone;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < CWL - 1; i++) wr_pipe[i] <= '0;
    end else begin
      wr_pipe[0] <= '{v: (c == CMD_WR), sb: bank_sb, tag: {cmd.a[10], bank, cmd.a[9:3]}};
      for (int i = 1; i < CWL - 1; i++) wr_pipe[i] <= wr_pipe[i-1];
    end
  end

  vbl_write_path #(.TAG_W(WTAG)) u_wr (
    .clk, .rst_n,
    .start(wr_pipe[CWL-2].v), .sb(wr_pipe[CWL-2].sb), .tag(wr_pipe[CWL-2].tag),
    .dq_valid(dq_in_valid), .dq(dq_in),
    .done(wdone), .data(arr_wdata), .mask(arr_wmask), .done_tag(wdone_tag), .busy()
  );

  assign arr_wr = wdone;
  assign {arr_wr_ap, arr_wr_bank, arr_wr_col} = wdone_tag;
endmodule
