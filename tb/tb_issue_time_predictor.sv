// tb_issue_time_predictor: the worked example of the prediction algorithm
// (a load feeding an add feeding a store, next to an independent load, with
// 4-cycle loads and 1-cycle ALU ops) plus random groups against an
// independent model of  T_pred(c) = max(now, max_p[T_pred(p) + T_delay(p)]),
// where the producers are the in-flight writers of the sources and, for a
// load tied to an older store by the store-set predictor, that store (read
// from the ROB, or from the same group when its ROB index is one the group
// is being given).
module tb_issue_time_predictor;
  import its_pkg::*;

  localparam int unsigned W = WIDTH;

  ts_t                          now;
  logic [W-1:0]                 uop_vld;
  uop_t [W-1:0]                 uop;
  logic [W-1:0]                 dc_hit;
  ts_t  [W-1:0]                 dc_delay;
  prod_info_t [W-1:0][NSRC-1:0] prod;
  prod_info_t [W-1:0]           mprod;
  rob_idx_t   [W-1:0]           grp_rob;
  ts_t  [W-1:0]                 t_pred, t_delay;

  issue_time_predictor dut (.*);

  int checks = 0, failures = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic uop_t mk(fu_class_e c, logic ld, logic hd, int d, logic [NSRC-1:0] sv, int s0, int s1, int s2);
    uop_t u;
    u = '0;
    u.pc = pc_t'($urandom);
    u.cls = c; u.is_load = ld; u.has_dst = hd; u.dst = preg_t'(d);
    u.src_vld = sv; u.src[0] = preg_t'(s0); u.src[1] = preg_t'(s1); u.src[2] = preg_t'(s2);
    return u;
  endfunction

  initial begin
    // ---- Directed: the loop body of the example, first iteration ----
    now = 32'd1000;
    prod = '0; dc_hit = '0; dc_delay = '0; uop_vld = '1; mprod = '0;
    for (int k = 0; k < W; k++) grp_rob[k] = rob_idx_t'(40 + k);
    uop[0] = mk(CLS_MEM, 1, 1, 10, 3'b000, 0, 0, 0);   // (1) load  -> p10
    uop[1] = mk(CLS_INT, 0, 1, 11, 3'b001, 10, 0, 0);  // (2) add   p10 -> p11
    uop[2] = mk(CLS_MEM, 0, 0, 0,  3'b001, 11, 0, 0);  // (3) store p11
    uop[3] = mk(CLS_MEM, 1, 1, 12, 3'b000, 0, 0, 0);   // (4) load  -> p12
    #1;
    check(t_pred[0] == 1000, "(1) now");
    check(t_pred[1] == 1004, "(2) T1+4");
    check(t_pred[2] == 1005, "(3) T2+1");
    check(t_pred[3] == 1000, "(4) independent load now");
    check(t_delay[0] == 4 && t_delay[1] == 1 && t_delay[3] == 4, "static delays");

    // Second group: (5) load, (6) add p12,p13 (two producers), (7) cmp p11,p14
    // with p11 coming from an in-flight producer (the add above).
    uop[0] = mk(CLS_MEM, 1, 1, 13, 3'b000, 0, 0, 0);
    uop[1] = mk(CLS_INT, 0, 1, 14, 3'b011, 12, 13, 0);
    uop[2] = mk(CLS_INT, 0, 1, 15, 3'b011, 11, 14, 0);
    uop[3] = mk(CLS_FP,  0, 1, 16, 3'b000, 0, 0, 0);
    prod = '0;
    prod[1][0] = '{vld: 1'b1, t_pred: 32'd1000, t_delay: 32'd4};  // p12 from (4)
    prod[2][0] = '{vld: 1'b1, t_pred: 32'd1004, t_delay: 32'd1};  // p11 from (2)
    now = 32'd1001;
    #1;
    check(t_pred[0] == 1001, "(5) now");
    check(t_pred[1] == 1005, "(6) max of p12 and p13");
    check(t_pred[2] == 1006, "(7) T6+1");
    check(t_delay[3] == FP_LAT, "fp static delay");

    // A load whose PC hit in the DelayCache carries its learned delay.
    uop[0] = mk(CLS_MEM, 1, 1, 20, 3'b000, 0, 0, 0);
    uop[1] = mk(CLS_INT, 0, 1, 21, 3'b001, 20, 0, 0);
    dc_hit = 4'b0001; dc_delay[0] = 32'd187; prod = '0;
    #1;
    check(t_delay[0] == 187, "learned load delay");
    check(t_pred[1] == now + 187, "consumer of missing load deferred");
    // A non-load ignores a DelayCache hit.
    uop[0].is_load = 0; uop[0].cls = CLS_INT; #1;
    check(t_delay[0] == 1, "non-load keeps static delay");
    // A producer whose prediction is in the past does not pull below now.
    uop[0] = mk(CLS_INT, 0, 1, 30, 3'b001, 40, 0, 0);
    prod = '0; dc_hit = '0;
    prod[0][0] = '{vld: 1'b1, t_pred: 32'd10, t_delay: 32'd4};
    #1;
    check(t_pred[0] == now, "past producer clamps to now");
    // Wrap: producer near the top of the counter.
    now = 32'hFFFF_FFFE;
    prod[0][0] = '{vld: 1'b1, t_pred: 32'hFFFF_FFFF, t_delay: 32'd4};
    #1;
    check(t_pred[0] == 32'd3, "prediction across wrap");

    // A load tied to an in-flight store waits for it; to a store of the same
    // group, it takes the store's fresh prediction.
    now = 32'd5000; prod = '0; dc_hit = '0;
    uop[0] = mk(CLS_MEM, 0, 0, 0, 3'b000, 0, 0, 0);          // store, rob 40
    uop[1] = mk(CLS_MEM, 1, 1, 50, 3'b000, 0, 0, 0);         // load tied to rob 40
    uop[1].mdep_vld = 1'b1; uop[1].mdep_rob = rob_idx_t'(40);
    uop[2] = mk(CLS_MEM, 1, 1, 51, 3'b000, 0, 0, 0);         // load tied to rob 7 (older)
    uop[2].mdep_vld = 1'b1; uop[2].mdep_rob = rob_idx_t'(7);
    mprod[2] = '{vld: 1'b1, t_pred: 32'd5010, t_delay: 32'd4};
    uop[3] = mk(CLS_MEM, 1, 1, 52, 3'b000, 0, 0, 0);         // independent load
    #1;
    check(t_pred[1] == 5004, "load after a store of its group");
    check(t_pred[2] == 5014, "load after an in-flight store");
    check(t_pred[3] == 5000, "untied load now");
    mprod = '0;

    // ---- Random groups against an independent model ----
    for (int it = 0; it < 20000; it++) begin
      ts_t  mp [W];
      ts_t  md [W];
      now = $urandom;
      for (int k = 0; k < W; k++) begin
        uop_vld[k] = $urandom_range(0, 3) != 0;
        uop[k] = mk(fu_class_e'($urandom_range(0, 3)), $urandom_range(0, 1), $urandom_range(0, 1),
                    $urandom_range(0, 7), 3'($urandom), $urandom_range(0, 7), $urandom_range(0, 7),
                    $urandom_range(0, 7));
        grp_rob[k] = rob_idx_t'(($urandom_range(0, 3) == 0) ? $urandom : 64 + k);
        uop[k].mdep_vld = $urandom_range(0, 2) == 0;
        uop[k].mdep_rob = ($urandom_range(0, 1) == 0 && k > 0) ? grp_rob[$urandom_range(0, k - 1)]
                                                                 : rob_idx_t'($urandom);
        mprod[k] = '{vld: 1'($urandom_range(0, 1)), t_pred: now + ts_t'($urandom_range(0, 100)) - 50,
                     t_delay: ts_t'($urandom_range(1, 300))};
        dc_hit[k] = $urandom_range(0, 1);
        dc_delay[k] = ts_t'($urandom_range(0, 300));
        for (int j = 0; j < NSRC; j++)
          prod[k][j] = '{vld: 1'($urandom_range(0, 1)), t_pred: now + ts_t'($urandom_range(0, 100)) - 50,
                         t_delay: ts_t'($urandom_range(1, 300))};
      end
      #1;
      for (int k = 0; k < W; k++) begin
        longint best;
        best = 0;   // offsets from now
        for (int j = 0; j < NSRC; j++) begin
          longint cand;
          logic   have;
          int     src_m;
          have = prod[k][j].vld;
          cand = longint'($signed(prod[k][j].t_pred - now)) + longint'(prod[k][j].t_delay);
          src_m = -1;
          for (int m = 0; m < k; m++)
            if (uop_vld[m] && uop[m].has_dst && uop[m].dst == uop[k].src[j]) src_m = m;
          if (src_m >= 0) begin
            have = 1;
            cand = longint'($signed(mp[src_m] - now)) + longint'(md[src_m]);
          end
          if (uop[k].src_vld[j] && have && cand > best) best = cand;
        end
        if (uop[k].mdep_vld) begin
          longint cand;
          logic   have;
          int     src_m;
          have = mprod[k].vld;
          cand = longint'($signed(mprod[k].t_pred - now)) + longint'(mprod[k].t_delay);
          src_m = -1;
          for (int m = 0; m < k; m++)
            if (uop_vld[m] && grp_rob[m] == uop[k].mdep_rob) src_m = m;
          if (src_m >= 0) begin
            have = 1;
            cand = longint'($signed(mp[src_m] - now)) + longint'(md[src_m]);
          end
          if (have && cand > best) best = cand;
        end
        mp[k] = now + ts_t'(best);
        md[k] = (uop[k].is_load && dc_hit[k]) ? dc_delay[k] :
                (uop[k].cls == CLS_INT) ? ts_t'(INT_LAT) : (uop[k].cls == CLS_FP) ? ts_t'(FP_LAT) :
                (uop[k].cls == CLS_BR) ? ts_t'(BR_LAT) : ts_t'(L1_HIT_LAT);
        check(t_pred[k] == mp[k], "random t_pred");
        check(t_delay[k] == md[k], "random t_delay");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
