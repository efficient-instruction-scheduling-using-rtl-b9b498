// priority_queue: one instruction queue of the execution engine, kept sorted
// by predicted issue time so that the earliest-predicted uop is at the head.
//
// The paper builds its queues from Leiserson's systolic priority queues:
// insertion and removal both happen at the head, and an inserted uop with the
// highest priority is available at the head on the next cycle, so dependent
// uops can issue back to back.  This implementation is the single-cycle form
// of that structure: a chain of DEPTH cells, each holding one entry, where a
// slot talks only to its two neighbours and to the entry being inserted.  In
// one cycle every slot compares its key with the new key and either keeps its
// entry, takes the new one, or takes its upper neighbour's (shift down), while
// a removal shifts everything up by one.  Compared with the pipelined systolic
// array this spends a comparator per slot instead of a second register per
// slot, and needs no free list (the free slot is always the end of the chain).
// Equal keys keep arrival order, so uops with equal predictions leave oldest
// first.  Keys are compared wrap-safe (ts_before).
//
// Interface and timing (one read and one write port, as in the paper):
//  * push/push_entry: insert at the clock edge; must not be asserted when
//    full (count == DEPTH), even if pop is asserted in the same cycle.
//  * pop: remove head_entry at the clock edge; head_entry.vld says whether
//    the queue is empty.  push and pop may be used in the same cycle.
//  * tail_entry: the last occupied slot (lowest priority), used for steering.
//  * count: number of entries.
module priority_queue
  import its_pkg::*;
#(
  parameter int unsigned DEPTH = PQ_DEPTH
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         push,
  input  pq_entry_t                    push_entry,
  input  logic                         pop,
  output pq_entry_t                    head_entry,
  output pq_entry_t                    tail_entry,
  output logic [$clog2(DEPTH+1)-1:0]   count,
  output logic                         full
);

  localparam int unsigned CW = $clog2(DEPTH+1);

  pq_entry_t slot [DEPTH];
  pq_entry_t shifted [DEPTH];   // contents after the removal, before insertion
  pq_entry_t nxt [DEPTH];
  logic [DEPTH-1:0] stay;       // slot keeps its (shifted) entry

  assign head_entry = slot[0];
  assign full       = (count == CW'(DEPTH));

  always_comb begin
    tail_entry = '0;
    for (int i = 0; i < DEPTH; i++)
      if (slot[i].vld) tail_entry = slot[i];
  end

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      if (pop) shifted[i] = (i + 1 < DEPTH) ? slot[(i + 1) % DEPTH] : '0;
      else     shifted[i] = slot[i];
      // An entry stays ahead of the new one unless the new key is earlier.
      stay[i] = shifted[i].vld && !ts_before(push_entry.key, shifted[i].key);
    end
    for (int i = 0; i < DEPTH; i++) begin
      if (!push || stay[i])               nxt[i] = shifted[i];
      else if (i == 0 || stay[(i + DEPTH - 1) % DEPTH]) nxt[i] = push_entry;
      else                                nxt[i] = shifted[(i + DEPTH - 1) % DEPTH];
      if (push && !stay[i] && (i == 0 || stay[(i + DEPTH - 1) % DEPTH])) nxt[i].vld = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) slot[i] <= '0;
      count <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) slot[i] <= nxt[i];
      count <= count + CW'(push) - CW'(pop && slot[0].vld);
    end
  end

  a_no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_sorted: assert property (@(posedge clk) disable iff (!rst_n)
    (DEPTH < 2) || !(slot[0].vld && slot[1 % DEPTH].vld && ts_before(slot[1 % DEPTH].key, slot[0].key)));

endmodule
