// dram_array_model: behavioural model of the cell array of one x8 chip.
//
// This stands in for the analog part of a Sectored DRAM chip (mats, local
// wordlines, sense amplifiers, column path) and is for simulation only. It
// obeys the array port of sectored_dram_chip: an ACT opens a row of a bank
// with only the sectors whose local wordlines are enabled; a READ returns,
// in the same clock, the 64-bit prefetch of the addressed column (byte s =
// sector s) with the bytes of sectors that were not activated returned as
// zero, since their sense amplifiers hold no data; a WRITE stores the bytes
// its mask selects. Data not yet written reads as dram_tb_pkg::pat_byte.
// An auto-precharge closes the bank to new reads at once, but, as in a
// real chip, the precharge itself waits for write recovery: write data of
// earlier WRITEs still lands in the row until the next ACT or PRE.
// Reads and writes to a closed bank, writes to a sector that is not open,
// and an ACT to a bank that is already open count as protocol errors; the
// model also counts ACTs and activated sectors for energy-style statistics.
module dram_array_model
  import sdram_pkg::*;
  import dram_tb_pkg::*;
#(
  parameter int RANK = 0,
  parameter int CHIP = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  arr_req_t    req,
  output logic [63:0] rdata,
  output int          errors,
  output int          acts,
  output int          sectors_opened
);
  logic                is_open [BANKS];
  logic                closing [BANKS];   // auto-precharge pending behind a write
  logic [ROW_BITS-1:0] orow    [BANKS];
  logic [7:0]          olwl    [BANKS];
  logic [63:0]         mem     [longint];

  function automatic longint key(input int bank, input int row, input int col);
    return (longint'(bank) << 32) | (longint'(row) << 8) | longint'(col);
  endfunction

  function automatic logic [63:0] peek(input int bank, input int row, input int col);
    logic [63:0] v;
    if (mem.exists(key(bank, row, col))) return mem[key(bank, row, col)];
    for (int s = 0; s < 8; s++) v[8*s +: 8] = pat_byte(RANK, CHIP, bank, row, col, s);
    return v;
  endfunction

  always_comb begin
    rdata = '0;
    if (req.rd && is_open[req.rd_bank]) begin
      rdata = peek(int'(req.rd_bank), int'(orow[req.rd_bank]), int'(req.rd_col));
      for (int s = 0; s < 8; s++) if (!olwl[req.rd_bank][s]) rdata[8*s +: 8] = 8'h00;
    end
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) begin
        is_open[b] <= 1'b0; closing[b] <= 1'b0; orow[b] <= '0; olwl[b] <= '0;
      end
      errors <= 0; acts <= 0; sectors_opened <= 0;
    end else begin
      if (req.pre) begin
        if (req.pre_all) for (int b = 0; b < BANKS; b++) begin is_open[b] <= 1'b0; closing[b] <= 1'b0; end
        else begin is_open[req.pre_bank] <= 1'b0; closing[req.pre_bank] <= 1'b0; end
      end
      if (req.act) begin
        if (is_open[req.act_bank]) begin
          errors <= errors + 1;
          $display("array r%0d c%0d: ACT to open bank %0d", RANK, CHIP, req.act_bank);
        end
        is_open[req.act_bank] <= 1'b1;
        closing[req.act_bank] <= 1'b0;
        orow[req.act_bank]    <= req.act_row;
        olwl[req.act_bank]    <= req.lwl_en;
        acts <= acts + 1;
        sectors_opened <= sectors_opened + $countones(req.lwl_en);
      end
      if (req.rd) begin
        if (!is_open[req.rd_bank]) begin
          errors <= errors + 1;
          $display("array r%0d c%0d: READ to closed bank %0d", RANK, CHIP, req.rd_bank);
        end
        if (req.rd_ap) begin is_open[req.rd_bank] <= 1'b0; closing[req.rd_bank] <= 1'b1; end
      end
      if (req.wr) begin
        if (!(is_open[req.wr_bank] || closing[req.wr_bank]) || (req.wmask & ~olwl[req.wr_bank]) != '0) begin
          errors <= errors + 1;
          $display("array r%0d c%0d: WRITE to closed bank/sector %0d", RANK, CHIP, req.wr_bank);
        end else begin
          logic [63:0] v;
          v = peek(int'(req.wr_bank), int'(orow[req.wr_bank]), int'(req.wr_col));
          for (int s = 0; s < 8; s++) if (req.wmask[s]) v[8*s +: 8] = req.wdata[8*s +: 8];
          mem[key(int'(req.wr_bank), int'(orow[req.wr_bank]), int'(req.wr_col))] = v;
        end
        if (req.wr_ap) begin is_open[req.wr_bank] <= 1'b0; closing[req.wr_bank] <= 1'b0; end
      end
    end
  end
endmodule
