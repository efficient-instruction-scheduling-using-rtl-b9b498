// reorder_buffer: in-order allocation, out-of-order completion, in-order
// retirement, plus the per-uop timing the delay learning needs.
//
// As in a conventional core, uops enter in program order at dispatch, record
// their completion in any order, and leave in program order.  Each entry also
// holds what the issue-time predictor and the DelayCache training use: the
// uop's PC, its predicted issue time and expected delay (written at dispatch),
// whether its PC hit in the DelayCache at dispatch, and the cycle it actually
// issued.  The completion cycle and the L1-miss flag are used at the moment
// of completion (they arrive with wb), so they are not stored.
//
// Interface and timing:
//  * alloc: alloc_vld[k] must be a prefix (k = 0..n-1); entry k gets index
//    alloc_idx[k] = tail + k.  free_cnt says how many entries are free.
//  * prod_rob[i] -> prod_t_pred/prod_t_delay: combinational reads for the
//    predictor (the DT, or a load's store dependence, supplies the index).
//  * iss_*: one port per issue port; records T_Issue = now.
//  * wb:    one port per issue port; marks the entry done.
//  * q_rob -> q_*: combinational read used by the DelayCache training.
//  * ret_vld/ret_*: up to NRET done entries leave from the head each cycle,
//    in order, with no back-pressure.  Values are those before the edge.
// Register updates happen at the clock edge; reset empties the buffer.
// Branch-misprediction flush is not modelled.
module reorder_buffer
  import its_pkg::*;
#(
  parameter int unsigned ENTRIES = ROB_SIZE,
  parameter int unsigned NALLOC  = WIDTH,
  parameter int unsigned NRD     = WIDTH * NSRC,
  parameter int unsigned NPORT   = NUM_PORTS,
  parameter int unsigned NRET    = WIDTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ts_t                   now,
  // allocation
  input  logic     [NALLOC-1:0] alloc_vld,
  input  uop_t     [NALLOC-1:0] alloc_uop,
  input  ts_t      [NALLOC-1:0] alloc_t_pred,
  input  ts_t      [NALLOC-1:0] alloc_t_delay,
  input  logic     [NALLOC-1:0] alloc_dc_hit,
  output rob_idx_t [NALLOC-1:0] alloc_idx,
  output logic [$clog2(ENTRIES+1)-1:0] free_cnt,
  // predictor reads
  input  rob_idx_t [NRD-1:0]    prod_rob,
  output ts_t      [NRD-1:0]    prod_t_pred,
  output ts_t      [NRD-1:0]    prod_t_delay,
  // issue and completion
  input  logic     [NPORT-1:0]  iss_vld,
  input  rob_idx_t [NPORT-1:0]  iss_rob,
  input  wb_t      [NPORT-1:0]  wb,
  // training read
  input  rob_idx_t              q_rob,
  output pc_t                   q_pc,
  output logic                  q_is_load,
  output logic                  q_dc_hit,
  output ts_t                   q_t_issue,
  // retirement
  output logic     [NRET-1:0]   ret_vld,
  output rob_idx_t [NRET-1:0]   ret_idx,
  output uop_t     [NRET-1:0]   ret_uop
);

  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned CW = $clog2(ENTRIES+1);

  // Fields are kept in separate arrays, grouped by the port that writes them:
  // dispatch writes the static part, issue writes t_issue, completion writes
  // done.  Only the done bits and the pointers are reset;
  // the other fields are meaningful only while an entry is live.
  typedef struct packed {
    logic dc_hit;
    uop_t uop;
    ts_t  t_pred;
    ts_t  t_delay;
  } rob_static_t;

  rob_static_t      st [ENTRIES];
  ts_t              t_issue [ENTRIES];
  logic [ENTRIES-1:0] done;
  logic [IW-1:0]    head, tail;
  logic [CW-1:0]    count;
  logic [CW-1:0]    n_alloc, n_ret;

  function automatic logic [IW-1:0] wrap(logic [IW-1:0] base, int unsigned off);
    return IW'((int'(base) + off) % ENTRIES);
  endfunction

  assign free_cnt = CW'(ENTRIES) - count;

  always_comb begin
    n_alloc = '0;
    for (int k = 0; k < NALLOC; k++) begin
      alloc_idx[k] = rob_idx_t'(wrap(tail, k));
      if (alloc_vld[k]) n_alloc = n_alloc + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < NRD; i++) begin
      prod_t_pred[i]  = st[prod_rob[i]].t_pred;
      prod_t_delay[i] = st[prod_rob[i]].t_delay;
    end
  end

  assign q_pc      = st[q_rob].uop.pc;
  assign q_is_load = st[q_rob].uop.is_load;
  assign q_dc_hit  = st[q_rob].dc_hit;
  assign q_t_issue = t_issue[q_rob];

  // In-order retirement of completed entries at the head.
  always_comb begin
    logic go;
    go    = 1'b1;
    n_ret = '0;
    for (int r = 0; r < NRET; r++) begin
      go = go && (CW'(r) < count) && done[wrap(head, r)];
      ret_vld[r]        = go;
      ret_idx[r]        = rob_idx_t'(wrap(head, r));
      ret_uop[r]        = st[wrap(head, r)].uop;
      if (go) n_ret = n_ret + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
      done  <= '0;
    end else begin
      for (int k = 0; k < NALLOC; k++)
        if (alloc_vld[k]) done[wrap(tail, k)] <= 1'b0;
      for (int p = 0; p < NPORT; p++)
        if (wb[p].vld) done[wb[p].rob] <= 1'b1;
      head  <= wrap(head, int'(n_ret));
      tail  <= wrap(tail, int'(n_alloc));
      count <= count + n_alloc - n_ret;
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NALLOC; k++)
      if (alloc_vld[k])
        st[wrap(tail, k)] <= '{dc_hit: alloc_dc_hit[k], uop: alloc_uop[k],
                               t_pred: alloc_t_pred[k], t_delay: alloc_t_delay[k]};
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++)
      if (iss_vld[p]) t_issue[iss_rob[p]] <= now;
  end

  // A completion or issue must name a live entry.
  for (genvar p = 0; p < NPORT; p++) begin : g_chk
    a_wb_live: assert property (@(posedge clk) disable iff (!rst_n)
      wb[p].vld |-> (CW'(IW'(wb[p].rob - head)) < count));
  end
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    n_alloc <= free_cnt);

endmodule
