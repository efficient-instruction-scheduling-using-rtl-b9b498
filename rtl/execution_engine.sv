// execution_engine: the per-unit priority queues and the issue rule.
//
// One priority_queue per port (2 integer, 1 fp, 1 branch, 1 load/store, as in
// the paper's configuration).  Only the uop at the head of a queue can issue,
// and only to that queue's unit, so no selection logic across queues is
// needed.  The head issues when all its source registers are marked computed
// in the register scoreboard and the unit can take a uop (port_rdy).  If the
// head still waits for a source the queue blocks, while the other queues go
// on issuing; head_blocked reports that case for each queue.
//
// Interface and timing:
//  * push/push_entry per queue: insert at the clock edge (from dispatch).
//  * disp_dst_*: destination registers of dispatched uops, marked not
//    computed at the clock edge.
//  * wb: completions; their destinations are marked computed at the edge,
//    so a consumer at a queue head issues one cycle after the completion.
//  * issue_vld/issue_entry: the uop leaving each queue this cycle
//    (combinational from the head and the scoreboard).
//  * tail_entry, count, full: queue state for steering.
module execution_engine
  import its_pkg::*;
#(
  parameter int unsigned NPORT = NUM_PORTS,
  parameter int unsigned DEPTH = PQ_DEPTH,
  parameter int unsigned W     = WIDTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic      [NPORT-1:0]     push,
  input  pq_entry_t [NPORT-1:0]     push_entry,
  input  logic      [W-1:0]         disp_dst_en,
  input  logic      [W-1:0][PREG_W-1:0] disp_dst,
  input  wb_t       [NPORT-1:0]     wb,
  input  logic      [NPORT-1:0]     port_rdy,
  output logic      [NPORT-1:0]     issue_vld,
  output pq_entry_t [NPORT-1:0]     issue_entry,
  output logic      [NPORT-1:0]     head_blocked,
  output pq_entry_t [NPORT-1:0]     tail_entry,
  output logic      [NPORT-1:0][$clog2(DEPTH+1)-1:0] count,
  output logic      [NPORT-1:0]     full
);

  pq_entry_t [NPORT-1:0]                  head;
  logic [NPORT*NSRC-1:0][PREG_W-1:0]      sb_rd;
  logic [NPORT*NSRC-1:0]                  sb_ready;
  logic [NPORT-1:0]                       wb_set;
  logic [NPORT-1:0][PREG_W-1:0]           wb_preg;

  for (genvar p = 0; p < NPORT; p++) begin : g_pq
    priority_queue #(.DEPTH(DEPTH)) u_pq (
      .clk        (clk),
      .rst_n      (rst_n),
      .push       (push[p]),
      .push_entry (push_entry[p]),
      .pop        (issue_vld[p]),
      .head_entry (head[p]),
      .tail_entry (tail_entry[p]),
      .count      (count[p]),
      .full       (full[p])
    );
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      for (int j = 0; j < NSRC; j++) sb_rd[p*NSRC + j] = head[p].uop.src[j];
      wb_set[p]  = wb[p].vld && wb[p].has_dst;
      wb_preg[p] = wb[p].dst;
    end
  end

  reg_scoreboard #(
    .NCLR (W),
    .NSET (NPORT),
    .NRD  (NPORT * NSRC)
  ) u_sb (
    .clk      (clk),
    .rst_n    (rst_n),
    .clr_en   (disp_dst_en),
    .clr_preg (disp_dst),
    .set_en   (wb_set),
    .set_preg (wb_preg),
    .rd_preg  (sb_rd),
    .rd_ready (sb_ready)
  );

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      logic srcs_ready;
      srcs_ready = 1'b1;
      for (int j = 0; j < NSRC; j++)
        if (head[p].uop.src_vld[j] && !sb_ready[p*NSRC + j]) srcs_ready = 1'b0;
      issue_vld[p]    = head[p].vld && srcs_ready && port_rdy[p];
      issue_entry[p]  = head[p];
      head_blocked[p] = head[p].vld && !srcs_ready;
    end
  end

endmodule
