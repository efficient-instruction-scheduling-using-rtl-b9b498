// issue_time_predictor: predicted issue time of each uop of a dispatch group.
//
// Implements the paper's two equations:
//   T_Delay(p)     = T_Complete(p) - T_Issue(p)      (learned, in delay_cache)
//   T_Predicted(c) = max over producers p of [T_Predicted(p) + T_Delay(p)]
// A uop with no in-flight producer is ready "now" (the cycle it is
// dispatched); this design also takes "now" as a lower bound for every uop,
// since nothing can issue before it is in a queue.
//
// Each uop's own expected delay, which its consumers will use, is the learned
// delay if it is a load whose PC hits in the DelayCache, else the static delay
// of its class (L1 hit time, 4 cycles, for loads without history).
//
// Producer information for source j of uop k arrives on prod[k][j] (from the
// DT and ROB).  If an older uop of the same group writes that source register,
// its freshly computed time and delay replace it (intra-group bypass), so a
// chain inside one group is predicted like a chain across groups.
//
// A load may also name an older store it is predicted to depend on
// (uop.mdep_vld/mdep_rob, from the store-set predictor); that store counts as
// one more producer, with its timing on mprod[k] (read from the ROB), or from
// the same group when mdep_rob equals grp_rob[m], the ROB index uop m of the
// group is given.  The paper says the store sets are communicated to the
// issue time predictor; treating the store as an ordinary producer is this
// design's reading of that.
// Purely combinational.
module issue_time_predictor
  import its_pkg::*;
#(
  parameter int unsigned W = WIDTH
) (
  input  ts_t                          now,
  input  logic [W-1:0]                 uop_vld,
  input  uop_t [W-1:0]                 uop,
  input  logic [W-1:0]                 dc_hit,
  input  ts_t  [W-1:0]                 dc_delay,
  input  prod_info_t [W-1:0][NSRC-1:0] prod,
  input  prod_info_t [W-1:0]           mprod,
  input  rob_idx_t   [W-1:0]           grp_rob,
  output ts_t  [W-1:0]                 t_pred,
  output ts_t  [W-1:0]                 t_delay
);

  ts_t [W-1:0] tp, td;
  prod_info_t  mp;
  ts_t         mready;

  always_comb begin
    tp = '0;
    td = '0;
    for (int k = 0; k < W; k++) begin
      ts_t best;
      best = now;
      for (int j = 0; j < NSRC; j++) begin
        prod_info_t p;
        ts_t        ready_at;
        p = prod[k][j];
        // Youngest older uop in this group that writes the source wins.
        for (int m = 0; m < k; m++)
          if (uop_vld[m] && uop[m].has_dst && uop[m].dst == uop[k].src[j])
            p = '{vld: 1'b1, t_pred: tp[m], t_delay: td[m]};
        ready_at = p.t_pred + p.t_delay;
        if (uop[k].src_vld[j] && p.vld && ts_before(best, ready_at))
          best = ready_at;
      end
      // The store a load is tied to, from the ROB or from this group.
      mp = mprod[k];
      for (int m = 0; m < k; m++)
        if (uop_vld[m] && grp_rob[m] == uop[k].mdep_rob)
          mp = '{vld: 1'b1, t_pred: tp[m], t_delay: td[m]};
      mready = mp.t_pred + mp.t_delay;
      if (uop[k].mdep_vld && mp.vld && ts_before(best, mready))
        best = mready;
      tp[k] = best;
      td[k] = (uop[k].is_load && dc_hit[k]) ? dc_delay[k] : static_delay(uop[k].cls);
    end
  end

  assign t_pred  = tp;
  assign t_delay = td;

endmodule
