// its_core: the scheduling back end of an issue-time-prediction core.
//
// Renamed uops enter four per cycle.  For each one the core
//   1. looks up its source registers in the Dependency Table to find the
//      in-flight producers (their ROB entries),
//   2. takes each producer's predicted issue time and expected delay from the
//      ROB, where they were stored at the producer's own dispatch from a
//      DelayCache lookup of the producer's PC (learned delay for loads that
//      missed L1 before, static delay otherwise); a load that the store-set
//      predictor (outside) ties to an older in-flight store (in_uop.mdep_*)
//      counts that store as one more producer,
//   3. predicts its issue time as max(now, max_p[T_pred(p) + T_delay(p)]),
//   4. is steered to a priority queue of its unit type and inserted with the
//      prediction as its priority, and gets a ROB entry.
// Queues issue from the head only, when the head's sources are computed.  When
// a load completes, its issue and completion cycles are written to the
// DelayCache under its PC if it missed L1 (or if the PC already had an entry,
// so the stored delay is always the latest), which trains the predictor for
// the next time the same code runs.
//
// Fetch, decode, rename, the register file, the functional units, the LSU and
// the caches are outside this module: uops arrive renamed on in_*, leave on
// iss_* (one port per unit: 0,1 integer, 2 fp, 3 branch, 4 load/store), and
// their completions come back on wb (l1_miss marks a load that missed).
// Retired uops leave on ret_*.  The ev_* outputs expose the events of the
// mechanism (tail-dependency steering, DelayCache hits and training writes,
// blocked queue heads, dispatch stalls) for measurement.
//
// Timing: a uop presented on in_* is accepted in the same cycle (in_accept),
// enters its queue at that clock edge and can issue from the next cycle.  A
// completion on wb makes dependants issuable from the next cycle.  Branch
// misprediction recovery and memory-ordering checks are not modelled.
module its_core
  import its_pkg::*;
#(
  parameter int unsigned W        = WIDTH,
  parameter int unsigned NPORT    = NUM_PORTS,
  parameter int unsigned PQ_D     = PQ_DEPTH,
  parameter int unsigned ROB_N    = ROB_SIZE,
  parameter int unsigned DC_N     = DC_ENTRIES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // dispatch (renamed uops, oldest first)
  input  logic      [W-1:0]     in_vld,
  input  uop_t      [W-1:0]     in_uop,
  output logic      [W-1:0]     in_accept,
  // issue to the units
  input  logic      [NPORT-1:0] port_rdy,
  output logic      [NPORT-1:0] iss_vld,
  output rob_idx_t  [NPORT-1:0] iss_rob,
  output uop_t      [NPORT-1:0] iss_uop,
  output ts_t       [NPORT-1:0] iss_pred,
  // completions from the units
  input  wb_t       [NPORT-1:0] wb,
  // retirement
  output logic      [W-1:0]     ret_vld,
  output rob_idx_t  [W-1:0]     ret_rob,
  output uop_t      [W-1:0]     ret_uop,
  // cycle counter and events
  output ts_t                   now,
  output logic      [W-1:0]     ev_tail_dep,
  output logic      [W-1:0]     ev_dc_hit,
  output logic                  ev_dc_train,
  output logic      [NPORT-1:0] ev_head_blocked,
  output logic                  ev_disp_stall
);

  localparam int unsigned PW     = $clog2(NPORT);
  localparam int unsigned FREE_W = $clog2(ROB_N + 1);
  localparam int unsigned CNT_W  = $clog2(PQ_D + 1);

  // ---------------- cycle counter ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;

  // ---------------- lookups ----------------
  pc_t  [W-1:0]                  dc_rd_pc;
  logic [W-1:0]                  dc_hit;
  ts_t  [W-1:0]                  dc_delay;
  localparam int unsigned NRD = W*NSRC + W;   // register producers + one store each

  logic [W*NSRC-1:0][PREG_W-1:0] dt_rd_preg;
  logic [W*NSRC-1:0]             dt_vld;
  rob_idx_t [W*NSRC-1:0]         dt_rob;
  rob_idx_t [NRD-1:0]            p_rob;
  ts_t  [NRD-1:0]                p_t_pred, p_t_delay;
  prod_info_t [W-1:0][NSRC-1:0]  prod;
  prod_info_t [W-1:0]            mprod;
  ts_t  [W-1:0]                  t_pred, t_delay;

  always_comb begin
    for (int k = 0; k < W; k++) begin
      dc_rd_pc[k] = in_uop[k].pc;
      p_rob[W*NSRC + k] = in_uop[k].mdep_rob;
      mprod[k] = '{vld:     1'b1,
                   t_pred:  p_t_pred[W*NSRC + k],
                   t_delay: p_t_delay[W*NSRC + k]};
      for (int j = 0; j < NSRC; j++) begin
        p_rob[k*NSRC + j] = dt_rob[k*NSRC + j];
        dt_rd_preg[k*NSRC + j] = in_uop[k].src[j];
        prod[k][j] = '{vld:     dt_vld[k*NSRC + j],
                       t_pred:  p_t_pred[k*NSRC + j],
                       t_delay: p_t_delay[k*NSRC + j]};
      end
    end
  end

  // ---------------- DelayCache and its training ----------------
  rob_idx_t q_rob;
  pc_t      q_pc;
  logic     q_is_load, q_dc_hit;
  ts_t      q_t_issue;
  logic     dc_wr_en;

  assign q_rob    = wb[PORT_MEM].rob;
  assign dc_wr_en = wb[PORT_MEM].vld && q_is_load && (wb[PORT_MEM].l1_miss || q_dc_hit);

  delay_cache #(.ENTRIES(DC_N), .NRD(W)) u_dc (
    .clk         (clk),
    .rst_n       (rst_n),
    .rd_pc       (dc_rd_pc),
    .rd_hit      (dc_hit),
    .rd_delay    (dc_delay),
    .wr_en       (dc_wr_en),
    .wr_pc       (q_pc),
    .wr_issue    (q_t_issue),
    .wr_complete (now)
  );

  // ---------------- Dependency Table ----------------
  logic     [W-1:0]             dt_wr_en;
  logic     [W-1:0][PREG_W-1:0] dt_wr_preg;
  rob_idx_t [W-1:0]             alloc_idx;
  logic     [W-1:0]             dt_clr_en;
  logic     [W-1:0][PREG_W-1:0] dt_clr_preg;

  always_comb begin
    for (int k = 0; k < W; k++) begin
      dt_wr_en[k]    = in_accept[k] && in_uop[k].has_dst;
      dt_wr_preg[k]  = in_uop[k].dst;
      dt_clr_en[k]   = ret_vld[k] && ret_uop[k].has_dst;
      dt_clr_preg[k] = ret_uop[k].dst;
    end
  end

  dependency_table #(.NRD(W*NSRC), .NWR(W), .NCLR(W)) u_dt (
    .clk      (clk),
    .rst_n    (rst_n),
    .rd_preg  (dt_rd_preg),
    .rd_vld   (dt_vld),
    .rd_rob   (dt_rob),
    .wr_en    (dt_wr_en),
    .wr_preg  (dt_wr_preg),
    .wr_rob   (alloc_idx),
    .clr_en   (dt_clr_en),
    .clr_preg (dt_clr_preg),
    .clr_rob  (ret_rob)
  );

  // ---------------- prediction ----------------
  issue_time_predictor #(.W(W)) u_pred (
    .now      (now),
    .uop_vld  (in_vld),
    .uop      (in_uop),
    .dc_hit   (dc_hit),
    .dc_delay (dc_delay),
    .prod     (prod),
    .mprod    (mprod),
    .grp_rob  (alloc_idx),
    .t_pred   (t_pred),
    .t_delay  (t_delay)
  );

  // ---------------- steering ----------------
  pq_entry_t [NPORT-1:0]            tail_entry;
  logic      [NPORT-1:0][CNT_W-1:0] pq_count;
  logic      [NPORT-1:0]            pq_full;
  logic      [FREE_W-1:0]           rob_free;
  logic      [W-1:0][PW-1:0]        port;

  pq_steering #(.W(W), .NPORT(NPORT), .CNT_W(CNT_W), .FREE_W(FREE_W)) u_steer (
    .uop_vld    (in_vld),
    .uop        (in_uop),
    .tail_entry (tail_entry),
    .pq_count   (pq_count),
    .pq_full    (pq_full),
    .rob_free   (rob_free),
    .accept     (in_accept),
    .port       (port),
    .tail_dep   (ev_tail_dep)
  );

  // ---------------- execution engine ----------------
  logic      [NPORT-1:0] push;
  pq_entry_t [NPORT-1:0] push_entry;
  pq_entry_t [NPORT-1:0] issue_entry;

  always_comb begin
    push       = '0;
    push_entry = '0;
    for (int k = 0; k < W; k++)
      if (in_accept[k]) begin
        push[port[k]]       = 1'b1;
        push_entry[port[k]] = '{vld: 1'b1, key: t_pred[k], rob: alloc_idx[k], uop: in_uop[k]};
      end
  end

  execution_engine #(.NPORT(NPORT), .DEPTH(PQ_D), .W(W)) u_eng (
    .clk          (clk),
    .rst_n        (rst_n),
    .push         (push),
    .push_entry   (push_entry),
    .disp_dst_en  (dt_wr_en),
    .disp_dst     (dt_wr_preg),
    .wb           (wb),
    .port_rdy     (port_rdy),
    .issue_vld    (iss_vld),
    .issue_entry  (issue_entry),
    .head_blocked (ev_head_blocked),
    .tail_entry   (tail_entry),
    .count        (pq_count),
    .full         (pq_full)
  );

  always_comb
    for (int p = 0; p < NPORT; p++) begin
      iss_rob[p]  = issue_entry[p].rob;
      iss_uop[p]  = issue_entry[p].uop;
      iss_pred[p] = issue_entry[p].key;
    end

  // ---------------- ROB ----------------
  rob_idx_t [NPORT-1:0] iss_rob_w;
  assign iss_rob_w = iss_rob;

  reorder_buffer #(.ENTRIES(ROB_N), .NALLOC(W), .NRD(NRD), .NPORT(NPORT), .NRET(W)) u_rob (
    .clk            (clk),
    .rst_n          (rst_n),
    .now            (now),
    .alloc_vld      (in_accept),
    .alloc_uop      (in_uop),
    .alloc_t_pred   (t_pred),
    .alloc_t_delay  (t_delay),
    .alloc_dc_hit   (dc_hit),
    .alloc_idx      (alloc_idx),
    .free_cnt       (rob_free),
    .prod_rob       (p_rob),
    .prod_t_pred    (p_t_pred),
    .prod_t_delay   (p_t_delay),
    .iss_vld        (iss_vld),
    .iss_rob        (iss_rob_w),
    .wb             (wb),
    .q_rob          (q_rob),
    .q_pc           (q_pc),
    .q_is_load      (q_is_load),
    .q_dc_hit       (q_dc_hit),
    .q_t_issue      (q_t_issue),
    .ret_vld        (ret_vld),
    .ret_idx        (ret_rob),
    .ret_uop        (ret_uop)
  );

  // ---------------- events ----------------
  assign ev_dc_hit     = in_accept & dc_hit;
  assign ev_dc_train   = dc_wr_en;
  assign ev_disp_stall = in_vld[0] && !in_accept[0];

endmodule
