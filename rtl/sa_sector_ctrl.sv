// sa_sector_ctrl: Sectored Activation inside a DRAM chip.
//
// Each bank holds one sector latch per sector (eight per bank). A PRE
// command carries a vector of sector bits on otherwise unused address pins;
// the chip stores them in the latches of the precharged bank during tRP.
// The next ACT to that bank drives the master wordline (MWL); sector
// transistors pass it only to the local wordline drivers of sectors whose
// latch is set, and the added local wordline drivers make each driver reach
// a single mat. The logic effect of latch, sector transistors and drivers
// is that local wordline enable of sector s = MWL driven AND latch s.
// Interface: pre/pre_bank/pre_sb load the latches of one bank; act/act_bank
// drive the MWL of that bank and lwl_en gives the enabled sectors in the
// same cycle; rd_bank selects the latches reported on rd_sb, the open
// sectors that size a READ/WRITE burst. Latches reset to all ones so that a
// chip behaves as a conventional one until the first PRE with sector bits
// (this reset value is this design's choice). All-bank precharge leaves the
// latches unchanged (also this design's choice).
module sa_sector_ctrl #(
  parameter int unsigned BANKS     = 16,
  parameter int unsigned BANK_BITS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pre,
  input  logic [BANK_BITS-1:0] pre_bank,
  input  logic [7:0]           pre_sb,
  input  logic                 act,
  input  logic [BANK_BITS-1:0] act_bank,
  output logic [7:0]           lwl_en,
  input  logic [BANK_BITS-1:0] rd_bank,
  output logic [7:0]           rd_sb
);
  logic [BANKS-1:0][7:0] latch_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) latch_q <= '1;
    else if (pre) latch_q[pre_bank] <= pre_sb;
  end

  // Sector transistors: the master wordline reaches a sector's local
  // wordline driver only through the transistors its latch turns on.
  always_comb begin
    for (int s = 0; s < 8; s++) lwl_en[s] = act && latch_q[act_bank][s];
    rd_sb = latch_q[rd_bank];
  end

  // The paper's protocol never activates a bank in the cycle its latches change.
  a_pre_act: assert property (@(posedge clk) disable iff (!rst_n)
                              !(pre && act && pre_bank == act_bank));
endmodule
