// pq_steering: picks the priority queue of each uop of a dispatch group and
// decides how many uops of the group dispatch this cycle.
//
// Following the paper, a uop goes to a queue of its own unit type.  When more
// than one queue fits (the two integer queues here), it goes to the first
// queue whose tail holds a producer of one of its sources ("Tail-
// Dependencies"); otherwise to the queue holding fewer uops (port order breaks
// ties).  Each queue has one write port, so it takes at most one uop per
// cycle; if the chosen queue is full or already taken this cycle the other
// fitting queue is used, and if none is left the uop and everything younger
// wait for the next cycle (dispatch stays in program order, and a full queue
// stalls the front end, as the paper notes).  Dispatch also stops when the
// ROB has no free entry.  Purely combinational.
//
//   uop_vld/uop   the group, oldest first (uop_vld need not be a prefix)
//   tail_entry    tail of each queue; pq_count, pq_full its occupancy
//   rob_free      free ROB entries
//   accept        prefix of uops that dispatch this cycle
//   port          queue chosen for each accepted uop
//   tail_dep      the choice was made by a tail dependency (for statistics)
module pq_steering
  import its_pkg::*;
#(
  parameter int unsigned W     = WIDTH,
  parameter int unsigned NPORT = NUM_PORTS,
  parameter int unsigned CNT_W = $clog2(PQ_DEPTH + 1),
  parameter int unsigned FREE_W = $clog2(ROB_SIZE + 1)
) (
  input  logic      [W-1:0]              uop_vld,
  input  uop_t      [W-1:0]              uop,
  input  pq_entry_t [NPORT-1:0]          tail_entry,
  input  logic      [NPORT-1:0][CNT_W-1:0] pq_count,
  input  logic      [NPORT-1:0]          pq_full,
  input  logic      [FREE_W-1:0]         rob_free,
  output logic      [W-1:0]              accept,
  output logic      [W-1:0][$clog2(NPORT)-1:0] port,
  output logic      [W-1:0]              tail_dep
);

  localparam int unsigned PW = $clog2(NPORT);

  // Does queue q's tail produce one of u's sources?
  function automatic logic tail_produces(pq_entry_t t, uop_t u);
    logic r;
    r = 1'b0;
    for (int j = 0; j < NSRC; j++)
      if (t.vld && t.uop.has_dst && u.src_vld[j] && t.uop.dst == u.src[j]) r = 1'b1;
    return r;
  endfunction

  always_comb begin
    logic [NPORT-1:0] used;
    logic             go;
    int unsigned      n;
    used = '0;
    go   = 1'b1;
    n    = 0;
    for (int k = 0; k < W; k++) begin
      logic [PW-1:0] a, b, pick;
      logic          two, ok, dep;
      // Queues that fit the uop's type.
      unique case (uop[k].cls)
        CLS_INT: begin a = PW'(PORT_INT0); b = PW'(PORT_INT1); two = 1'b1; end
        CLS_FP:  begin a = PW'(PORT_FP);   b = PW'(PORT_FP);   two = 1'b0; end
        CLS_BR:  begin a = PW'(PORT_BR);   b = PW'(PORT_BR);   two = 1'b0; end
        default: begin a = PW'(PORT_MEM);  b = PW'(PORT_MEM);  two = 1'b0; end
      endcase
      dep = 1'b0;
      if (two) begin
        if (tail_produces(tail_entry[a], uop[k])) begin
          pick = a; dep = 1'b1;
        end else if (tail_produces(tail_entry[b], uop[k])) begin
          pick = b; dep = 1'b1;
        end else if (pq_count[b] < pq_count[a]) begin
          pick = b;
        end else begin
          pick = a;
        end
        // Fall back to the other queue if the chosen one cannot take it.
        if (used[pick] || pq_full[pick]) begin
          pick = (pick == a) ? b : a;
          dep  = 1'b0;
        end
      end else begin
        pick = a;
      end
      ok = uop_vld[k] && !used[pick] && !pq_full[pick] && (FREE_W'(n) < rob_free);
      go = go && ok;
      accept[k]   = go;
      port[k]     = pick;
      tail_dep[k] = go && dep;
      if (go) begin
        used[pick] = 1'b1;
        n = n + 1;
      end
    end
  end

endmodule
