// sector_mode_ctrl: turns sectored access on or off by memory load.
//
// Sectored DRAM costs performance when a workload issues few memory
// requests (extra sector misses are not paid back by the faster ACT rate).
// This controller samples the occupancy of the memory controller's read
// request queue every clock, and at the end of every PERIOD clocks turns
// sectored access on for the next PERIOD clocks if the average occupancy
// exceeded THRESHOLD, and off otherwise. The average is compared without a
// divider: sum > THRESHOLD * PERIOD. With DYNAMIC = 0 the mode is always on
// (the configuration used for the main results); PERIOD = 1000 and
// THRESHOLD = 30 are the values of the dynamic configuration. The mode
// starts on after reset (this design's choice).
// Interface: occupancy = read requests queued this clock; sectored_on is a
// registered level; window_end pulses in the clock the decision is taken.
module sector_mode_ctrl #(
  parameter bit          DYNAMIC   = 1'b0,
  parameter int unsigned PERIOD    = 1000,
  parameter int unsigned THRESHOLD = 30,
  parameter int unsigned OCC_W     = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [OCC_W-1:0] occupancy,
  output logic             sectored_on,
  output logic             window_end
);
  logic [31:0] sum_q, cnt_q, sum_n;

  assign sum_n      = sum_q + 32'(occupancy);
  assign window_end = (cnt_q == PERIOD - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q       <= '0;
      cnt_q       <= '0;
      sectored_on <= 1'b1;
    end else if (window_end) begin
      sum_q       <= '0;
      cnt_q       <= '0;
      sectored_on <= DYNAMIC ? (sum_n > THRESHOLD * PERIOD) : 1'b1;
    end else begin
      sum_q <= sum_n;
      cnt_q <= cnt_q + 32'd1;
    end
  end
endmodule
