// lsq_lookahead: load/store queue with LSQ Lookahead.
//
// Each queue entry carries, besides the memory address, a vector of sector
// bits (SB), one per 64-bit word of the cache block. When a new load/store
// is allocated at the tail, its cache block address is compared with that
// of every entry already in the queue; every matching entry gets the bit of
// the new entry's word offset set in its SB. The new entry starts with only
// its own word's bit. So when the oldest access to a block reaches the
// cache it asks for all words that younger queued accesses will touch, and
// they find them present instead of causing sector misses.
// The queue is a DEPTH-entry circular buffer (128 entries, the evaluated
// lookahead size). Entries leave from the head in program order, one per
// clock when iss_ready; an entry allocated in the same clock sees the head
// entry only if the head is not leaving. In-order issue, and stores sharing
// the queue with loads, are this design's simplifications of a core's LSQ.
// Interface: alloc_* pushes (alloc_ready = not full); iss_* presents the head.
// ev_merge pulses when an allocation set bits in at least one older entry.
module lsq_lookahead #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned AW    = 34,
  parameter int unsigned PC_W  = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            alloc_valid,
  output logic            alloc_ready,
  input  logic [AW-1:0]   alloc_addr,
  input  logic [PC_W-1:0] alloc_pc,
  input  logic            alloc_store,
  input  logic [63:0]     alloc_wdata,
  output logic            iss_valid,
  input  logic            iss_ready,
  output logic [AW-1:0]   iss_addr,
  output logic [PC_W-1:0] iss_pc,
  output logic [7:0]      iss_sb,
  output logic            iss_store,
  output logic [63:0]     iss_wdata,
  output logic            ev_merge
);
  localparam int unsigned PW = $clog2(DEPTH);

  typedef struct packed {
    logic [AW-1:0]   addr;
    logic [PC_W-1:0] pc;
    logic            store;
    logic [63:0]     wdata;
  } ent_t;

  ent_t          ent_q [DEPTH];
  logic [7:0]    sb_q  [DEPTH];
  logic [DEPTH-1:0] v_q;
  logic [PW-1:0] head_q, tail_q;
  logic          alloc, pop;
  logic [DEPTH-1:0] match;

  assign alloc_ready = !v_q[tail_q];
  assign alloc       = alloc_valid && alloc_ready;
  assign iss_valid   = v_q[head_q];
  assign pop         = iss_valid && iss_ready;
  assign iss_addr    = ent_q[head_q].addr;
  assign iss_pc      = ent_q[head_q].pc;
  assign iss_store   = ent_q[head_q].store;
  assign iss_wdata   = ent_q[head_q].wdata;
  assign iss_sb      = sb_q[head_q];

  // Compare the new entry's cache block address with every queued entry.
  always_comb begin
    for (int i = 0; i < DEPTH; i++)
      match[i] = alloc && v_q[i] && !(pop && PW'(i) == head_q) &&
                 ent_q[i].addr[AW-1:6] == alloc_addr[AW-1:6];
    ev_merge = |match;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q    <= '0;
      head_q <= '0;
      tail_q <= '0;
      for (int i = 0; i < DEPTH; i++) sb_q[i] <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++)
        if (match[i]) sb_q[i][alloc_addr[5:3]] <= 1'b1;
      if (pop) begin
        v_q[head_q] <= 1'b0;
        head_q      <= head_q + 1'b1;
      end
      if (alloc) begin
        v_q[tail_q]  <= 1'b1;
        sb_q[tail_q] <= 8'(1) << alloc_addr[5:3];
        tail_q       <= tail_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (alloc) ent_q[tail_q] <= '{addr: alloc_addr, pc: alloc_pc, store: alloc_store, wdata: alloc_wdata};
endmodule
