// tb_hmmer_example: the nine-instruction hmmer fragment used to explain issue
// time prediction, run for two iterations through the full core at its
// default sizes.
//
//   (1) mov (r10,rax,4) -> ecx     load              (4) mov 0x18(rsp) -> rbx  load
//   (2) add 0(r13,rax,4), ecx      int, needs (1)    (5) mov (r9,rax,4) -> r15d load
//   (3) mov ecx -> 4(rdx)          store, needs (2)  (6) add (rbx,rax,4), r15d  needs (4),(5)
//   (7) cmp ecx, r15d    needs (2),(6)               (8) cmovge r15d, ecx  needs (2),(6),(7)
//   (9) mov ecx -> 4(rdx)          store, needs (8)
//
// The loads and stores share the single load/store queue, so the example's
// reordering shows there: in the first iteration, with no history, every
// load is assumed to hit L1 (4 cycles).  The store (3) is then predicted 5
// cycles after (1), while the loads (4) and (5) are predicted at their
// dispatch, so they overtake (3) in the queue.  Load (1) misses in the first
// iteration (its latency is set to MISS_LAT); the DelayCache learns that delay
// at its completion, and in the second iteration (2), (3), (7), (8), (9) are
// predicted that much later, while (4), (5), (6) are not affected.
//
// Checked, from values worked out here by hand from the data flow above (not
// from the core's own signals):
//  * the predicted issue time of every uop, at its actual dispatch cycle;
//  * the issue order on the load/store port in both iterations: 1,4,5,3,9;
//  * the DelayCache: no hit in iteration 1; a hit for load (1) in iteration
//    2 and none for (4) and (5); exactly one training write per iteration;
//  * every uop issues after its sources complete, and all nine retire.
// The units are modelled as in the paper's example: integer results after 1
// cycle, L1 hits after 4 cycles, stores after 1 cycle; one memory completion
// per cycle.
module tb_hmmer_example;
  import its_pkg::*;

  localparam int unsigned N        = 9;
  localparam int unsigned MISS_LAT = 20;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      [WIDTH-1:0]     in_vld, in_accept;
  uop_t      [WIDTH-1:0]     in_uop;
  logic      [NUM_PORTS-1:0] port_rdy, iss_vld;
  rob_idx_t  [NUM_PORTS-1:0] iss_rob;
  uop_t      [NUM_PORTS-1:0] iss_uop;
  ts_t       [NUM_PORTS-1:0] iss_pred;
  wb_t       [NUM_PORTS-1:0] wb;
  logic      [WIDTH-1:0]     ret_vld;
  rob_idx_t  [WIDTH-1:0]     ret_rob;
  uop_t      [WIDTH-1:0]     ret_uop;
  ts_t                       now;
  logic      [WIDTH-1:0]     ev_tail_dep, ev_dc_hit;
  logic                      ev_dc_train, ev_disp_stall;
  logic      [NUM_PORTS-1:0] ev_head_blocked;

  its_core dut (.*);

  int checks = 0, failures = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, now);
    end
  endtask

  // Instruction i (0-based: (1) is 0) of the fragment.
  fu_class_e cls_of [N] = '{CLS_MEM, CLS_INT, CLS_MEM, CLS_MEM, CLS_MEM,
                            CLS_INT, CLS_INT, CLS_INT, CLS_MEM};
  logic      ld_of  [N] = '{1, 0, 0, 1, 1, 0, 0, 0, 0};

  function automatic pc_t pc_of(int i);
    return pc_t'(48'h41_0000 + 4 * i);
  endfunction

  // Producers of instruction i inside the fragment (-1: none).
  function automatic int prod_of(int i, int s);
    case (i)
      1: return (s == 0) ? 0 : -1;
      2: return (s == 0) ? 1 : -1;
      5: return (s == 0) ? 3 : (s == 1) ? 4 : -1;
      6: return (s == 0) ? 1 : (s == 1) ? 5 : -1;
      7: return (s == 0) ? 1 : (s == 1) ? 5 : 6;
      8: return (s == 0) ? 7 : -1;
      default: return -1;
    endcase
  endfunction

  // Per-iteration record, filled as the uops move.
  int   it;                       // current iteration (0, 1)
  int   disp_cyc [2][N];
  ts_t  exp_pred [2][N];
  int   iss_cyc  [2][N];
  int   cmp_cyc  [2][N];
  logic dc_hit_seen [2][N];
  int   trains [2];
  int   mem_order [2][$];
  preg_t dst_preg [2][N];
  logic  preg_done [NUM_PREGS];
  int   rob2i [ROB_SIZE];
  int   rob_next = 0;
  int   n_ret [2];

  // Delay a producer contributes: learned for load (1) in iteration 2,
  // otherwise the static value of its type.
  int   learned;
  function automatic int delay_of(int i);
    if (ld_of[i]) return (it == 1 && i == 0) ? learned : L1_HIT_LAT;
    return INT_LAT;
  endfunction

  function automatic int lat_of(int i);
    if (ld_of[i]) return (i == 0) ? MISS_LAT : L1_HIT_LAT;
    if (cls_of[i] == CLS_MEM) return 1;
    return INT_LAT;
  endfunction

  // ---------------- stimulus ----------------
  uop_t u_of [2][N];
  int   nxt;                      // next instruction to present
  initial begin
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < N; i++) begin
        uop_t u;
        int base;
        base = 32 + 16 * k;
        u = '0;
        u.pc = pc_of(i);
        u.cls = cls_of[i];
        u.is_load = ld_of[i];
        for (int s = 0; s < NSRC; s++)
          if (prod_of(i, s) >= 0) begin
            u.src_vld[s] = 1'b1;
            u.src[s] = preg_t'(base + prod_of(i, s));
          end
        // loop-invariant address registers
        if (ld_of[i] || cls_of[i] == CLS_MEM)
          for (int s = 0; s < NSRC; s++)
            if (!u.src_vld[s]) begin u.src_vld[s] = 1'b1; u.src[s] = preg_t'(1 + i); break; end
        if (ld_of[i] || cls_of[i] == CLS_INT) begin
          u.has_dst = 1'b1;
          u.dst = preg_t'(base + i);
        end
        u_of[k][i] = u;
        dst_preg[k][i] = u.dst;
      end
  end

  always_comb begin
    in_vld = '0;
    in_uop = '0;
    for (int k = 0; k < WIDTH; k++)
      if (rst_n && nxt + k < N) begin
        in_vld[k] = 1'b1;
        in_uop[k] = u_of[it][nxt + k];
      end
  end

  assign port_rdy = '1;

  // ---------------- unit models ----------------
  typedef struct { int cyc; int port; rob_idx_t rob; logic miss; preg_t dst; logic has_dst; } cmpl_t;
  cmpl_t pend [$];
  logic  mem_slot_used [int];

  always_comb begin
    wb = '0;
    foreach (pend[q])
      if (pend[q].cyc == int'(now)) begin
        wb[pend[q].port] = '{vld: 1'b1, rob: pend[q].rob, has_dst: pend[q].has_dst,
                             dst: pend[q].dst, l1_miss: pend[q].miss};
      end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- monitor ----------------
  always @(negedge clk) if (rst_n) begin
    // dispatch: compute the expected prediction from the hand-written data flow
    for (int k = 0; k < WIDTH; k++)
      if (in_accept[k]) begin
        int i;
        ts_t e;
        i = nxt + k;
        disp_cyc[it][i] = int'(now);
        e = now;
        for (int s = 0; s < NSRC; s++)
          if (prod_of(i, s) >= 0) begin
            ts_t c;
            c = exp_pred[it][prod_of(i, s)] + ts_t'(delay_of(prod_of(i, s)));
            if (ts_before(e, c)) e = c;
          end
        exp_pred[it][i] = e;
        dc_hit_seen[it][i] = ev_dc_hit[k];
        rob2i[rob_next] = i;          // ROB entries are handed out in order
        rob_next = (rob_next + 1) % ROB_SIZE;
      end
    if (ev_dc_train) trains[it]++;
    // issue: prediction, source readiness, load/store order
    for (int p = 0; p < NUM_PORTS; p++)
      if (iss_vld[p]) begin
        int i;
        int c;
        i = rob2i[iss_rob[p]];
        iss_cyc[it][i] = int'(now);
        check(iss_pred[p] == exp_pred[it][i], $sformatf("prediction of (%0d) in iteration %0d: %0d, expected %0d",
              i + 1, it + 1, iss_pred[p] - ts_t'(disp_cyc[it][0]), exp_pred[it][i] - ts_t'(disp_cyc[it][0])));
        for (int s = 0; s < NSRC; s++)
          if (prod_of(i, s) >= 0)
            check(cmp_cyc[it][prod_of(i, s)] >= 0 && cmp_cyc[it][prod_of(i, s)] < int'(now),
                  $sformatf("(%0d) issued before its source (%0d) completed", i + 1, prod_of(i, s) + 1));
        if (p == PORT_MEM) mem_order[it].push_back(i);
        c = int'(now) + lat_of(i);
        if (p == PORT_MEM) begin
          while (mem_slot_used.exists(c)) c++;
          mem_slot_used[c] = 1'b1;
        end
        pend.push_back('{cyc: c, port: p, rob: iss_rob[p], miss: (ld_of[i] && i == 0),
                         dst: u_of[it][i].dst, has_dst: u_of[it][i].has_dst});
      end
    for (int p = 0; p < NUM_PORTS; p++)
      if (wb[p].vld) begin
        int i;
        i = rob2i[wb[p].rob];
        cmp_cyc[it][i] = int'(now);
        if (it == 0 && i == 0) learned = int'(now) - iss_cyc[0][0];
      end
    for (int q = pend.size() - 1; q >= 0; q--)
      if (pend[q].cyc < int'(now)) pend.delete(q);
    for (int k = 0; k < WIDTH; k++)
      if (ret_vld[k]) n_ret[it]++;
  end

  // advance the dispatch pointer at the edge
  always @(posedge clk)
    if (rst_n) nxt <= nxt + $countones(in_accept);

  // ---------------- sequence ----------------
  initial begin
    int order [5] = '{0, 3, 4, 2, 8};
    nxt = N;
    it = 0;
    for (int k = 0; k < 2; k++) begin
      trains[k] = 0; n_ret[k] = 0;
      for (int i = 0; i < N; i++) begin cmp_cyc[k][i] = -1; iss_cyc[k][i] = -1; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 2; k++) begin
      @(negedge clk);
      it = k;
      nxt = 0;
      while (n_ret[k] < N) @(negedge clk);
      repeat (3) @(negedge clk);

      // issue order on the load/store port
      check(mem_order[k].size() == 5, "five memory uops issued");
      for (int j = 0; j < 5 && j < mem_order[k].size(); j++)
        check(mem_order[k][j] == order[j], $sformatf("iteration %0d memory issue slot %0d is (%0d), expected (%0d)",
              k + 1, j, mem_order[k][j] + 1, order[j] + 1));
      // the loads overtook the older store
      check(iss_cyc[k][3] < iss_cyc[k][2] && iss_cyc[k][4] < iss_cyc[k][2], "loads (4),(5) before store (3)");
      // DelayCache
      check(trains[k] == 1, $sformatf("iteration %0d: %0d DelayCache writes, expected 1", k + 1, trains[k]));
      check(dc_hit_seen[k][0] == (k == 1), "DelayCache hit for load (1) only after learning");
      check(!dc_hit_seen[k][3] && !dc_hit_seen[k][4], "no DelayCache entry for L1-hit loads");
      $display("iteration %0d: dispatch of (1) at %0d, predictions relative to it:", k + 1, disp_cyc[k][0]);
      for (int i = 0; i < N; i++)
        $display("  (%0d) dispatch +%0d  predicted +%0d  issued +%0d", i + 1,
                 disp_cyc[k][i] - disp_cyc[k][0], int'(exp_pred[k][i] - ts_t'(disp_cyc[k][0])),
                 iss_cyc[k][i] - disp_cyc[k][0]);
    end
    // The learned delay reaches the dependants of (1) in iteration 2.
    check(learned >= int'(MISS_LAT), "learned delay is the miss latency");
    check(exp_pred[1][1] - exp_pred[1][0] == ts_t'(learned), "(2) predicted the learned delay after (1)");
    check(exp_pred[0][1] - exp_pred[0][0] == ts_t'(L1_HIT_LAT), "(2) predicted the L1 hit time after (1) without history");
    $display("learned delay of (1): %0d cycles", learned);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
