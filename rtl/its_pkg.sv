// its_pkg: types and constants shared by the issue-time-prediction scheduler.
//
// The scheduler replaces the reservation stations of an out-of-order core with
// one priority queue per functional unit.  Each uop is given a predicted issue
// time (an absolute cycle number) at dispatch, and the queues keep their
// contents ordered by it.  This package holds the sizes that follow the paper
// (256 physical registers, 128-entry ROB, 512-entry DelayCache, five 13-entry
// queues, 4-wide dispatch, 4-cycle L1 hit) and this design's own choices
// (32-bit timestamps, 48-bit PCs, three sources per uop, the static latencies
// of non-load classes).
package its_pkg;

  // ---- sizes taken from the paper -------------------------------------
  localparam int unsigned NUM_PREGS   = 256;  // DT: one entry per physical register
  localparam int unsigned ROB_SIZE    = 128;  // 128-entry ROB
  localparam int unsigned DC_ENTRIES  = 512;  // DelayCache entries
  localparam int unsigned NUM_PORTS   = 5;    // 2 int, 1 fp, 1 branch, 1 load/store
  localparam int unsigned PQ_DEPTH    = 13;   // entries per priority queue
  localparam int unsigned WIDTH       = 4;    // 4-way dispatch and retire
  localparam int unsigned L1_HIT_LAT  = 4;    // delay assumed for loads without history

  // ---- this design's choices ------------------------------------------
  localparam int unsigned NSRC        = 3;    // sources per uop (12 DT reads / 4 uops)
  localparam int unsigned TS_W        = 32;   // timestamp width (cycle counter)
  localparam int unsigned PC_W        = 48;   // virtual PC width
  localparam int unsigned INT_LAT     = 1;    // static delay of integer uops
  localparam int unsigned BR_LAT      = 1;    // static delay of branch uops
  localparam int unsigned FP_LAT      = 3;    // static delay of fp uops

  localparam int unsigned PREG_W = $clog2(NUM_PREGS);
  localparam int unsigned ROB_W  = $clog2(ROB_SIZE);

  typedef logic [TS_W-1:0]   ts_t;
  typedef logic [PREG_W-1:0] preg_t;
  typedef logic [ROB_W-1:0]  rob_idx_t;
  typedef logic [PC_W-1:0]   pc_t;

  // Functional unit class of a uop; selects the queue(s) it may enter.
  typedef enum logic [1:0] {
    CLS_INT = 2'd0,
    CLS_FP  = 2'd1,
    CLS_BR  = 2'd2,
    CLS_MEM = 2'd3
  } fu_class_e;

  // Ports of the execution engine (one queue and one unit each).
  localparam int unsigned PORT_INT0 = 0;
  localparam int unsigned PORT_INT1 = 1;
  localparam int unsigned PORT_FP   = 2;
  localparam int unsigned PORT_BR   = 3;
  localparam int unsigned PORT_MEM  = 4;

  // A renamed uop as it enters dispatch.
  typedef struct packed {
    pc_t                   pc;
    fu_class_e             cls;
    logic                  is_load;
    logic                  has_dst;
    preg_t                 dst;
    logic [NSRC-1:0]       src_vld;
    preg_t [NSRC-1:0]      src;
    // Memory dependence: the older in-flight store this load is predicted to
    // depend on, as a ROB index (supplied by the store-set predictor, which
    // is outside this RTL).
    logic                  mdep_vld;
    rob_idx_t              mdep_rob;
  } uop_t;

  // One priority-queue slot: the uop, its ROB entry and its priority key.
  typedef struct packed {
    logic     vld;
    ts_t      key;     // predicted issue time
    rob_idx_t rob;
    uop_t     uop;
  } pq_entry_t;

  // Timing the predictor needs about an in-flight producer.
  typedef struct packed {
    logic vld;         // producer is still in flight (DT hit)
    ts_t  t_pred;      // its predicted issue time
    ts_t  t_delay;     // its expected delay
  } prod_info_t;

  // Completion reported by a functional unit or the LSU.
  typedef struct packed {
    logic     vld;
    rob_idx_t rob;
    logic     has_dst;
    preg_t    dst;
    logic     l1_miss;  // load that missed in the L1 data cache
  } wb_t;

  // Wrap-safe "a is earlier than b" for free-running timestamps.
  function automatic logic ts_before(ts_t a, ts_t b);
    ts_t d;
    d = a - b;
    return d[TS_W-1];
  endfunction

  // Static delay of a uop class (loads: L1 hit time).
  function automatic ts_t static_delay(fu_class_e c);
    unique case (c)
      CLS_INT: return ts_t'(INT_LAT);
      CLS_FP:  return ts_t'(FP_LAT);
      CLS_BR:  return ts_t'(BR_LAT);
      default: return ts_t'(L1_HIT_LAT);
    endcase
  endfunction

endpackage
