// tb_its_core: end-to-end run of the scheduler on a loop, at the default
// (paper) sizes.
//
// The loop is the hmmer fragment used to explain the prediction algorithm
// (two load chains, a compare, a conditional move, two stores), plus the
// induction-variable add, the loop branch and an independent fp multiply.
// The testbench renames it, feeds it four uops per cycle, and models the
// units: integer and branch results 1 cycle after issue, fp 3 cycles, loads a
// per-PC latency that changes between iterations (L1 hits of 4 cycles, L2
// misses and long misses), at most 8 loads/stores outstanding, one memory
// completion per cycle.
//
// An independent reference follows every dispatched uop and checks:
//  * the predicted issue time the core attaches to every issued uop equals
//    max(dispatch cycle, max over in-flight producers of prediction + delay),
//    with the producer delay taken from the reference's own record of learned
//    load delays (latest completion - issue of a load that missed, or of a PC
//    already learned), or the static delay otherwise;
//  * no uop issues before all its sources have completed;
//  * uops retire in program order, and all of them retire;
//  * a load tied by the store-set predictor to an older store issues after
//    that store.  The store-set predictor is modelled here: load (5) is tied
//    to the store (9) of the previous iteration while that store has not
//    retired, and the reference counts the store as one more producer.
// It also counts each mechanism and fails if one never happened: reordering
// within a queue, a blocked queue head, tail-dependency steering, DelayCache
// hits, DelayCache training writes, a dispatch stall, a learned delay larger
// than the L1 hit time pushing a consumer back, a load tied to a store.  (How often the memory unit
// refused a uop for lack of miss slots is printed, not required.)
module tb_its_core;
  import its_pkg::*;

  localparam int unsigned ITERS   = 300;
  localparam int unsigned NUOPS   = 12;
  localparam int unsigned TOTAL   = ITERS * NUOPS;
  localparam int unsigned MAX_OUT = 8;        // L1-D outstanding misses

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
      if (failures < 10) $display("FAIL %s at cycle %0d", what, now);
    end
  endtask

  // ---------------- the loop ----------------
  // Architectural registers: 0 rax, 1 ecx, 2 rbx, 3 r15, 4 flags, 5 f0,
  // 6 r10, 7 r13, 8 rdx, 9 rsp, 10 r9, 11 f1 (6..11 are loop invariant).
  typedef struct {
    fu_class_e cls; logic ld; int dst; int s0; int s1; int s2;
  } inst_t;
  inst_t prog [NUOPS];
  initial begin
    prog[0]  = '{CLS_MEM, 1,  1,  6,  0, -1};   // (1) mov (r10,rax,4) -> ecx
    prog[1]  = '{CLS_INT, 0,  1,  1,  7,  0};   // (2) add 0(r13,rax,4), ecx
    prog[2]  = '{CLS_MEM, 0, -1,  1,  8, -1};   // (3) mov ecx -> 4(rdx)
    prog[3]  = '{CLS_MEM, 1,  2,  9, -1, -1};   // (4) mov 0x18(rsp) -> rbx
    prog[4]  = '{CLS_MEM, 1,  3, 10,  0, -1};   // (5) mov (r9,rax,4) -> r15d
    prog[5]  = '{CLS_INT, 0,  3,  3,  2,  0};   // (6) add (rbx,rax,4), r15d
    prog[6]  = '{CLS_INT, 0,  4,  1,  3, -1};   // (7) cmp ecx, r15d
    prog[7]  = '{CLS_INT, 0,  3,  3,  1,  4};   // (8) cmovge r15d, ecx
    prog[8]  = '{CLS_MEM, 0, -1,  3,  8, -1};   // (9) mov ecx -> 4(rdx)
    prog[9]  = '{CLS_INT, 0,  0,  0, -1, -1};   // add rax, 1
    prog[10] = '{CLS_BR,  0, -1,  0, -1, -1};   // loop branch
    prog[11] = '{CLS_FP,  0,  5,  5, 11, -1};   // mulsd f1, f0
  end

  function automatic pc_t pc_of(int i);
    return pc_t'(48'h40_0000 + 4 * i);
  endfunction

  // Memory latency of load i in iteration it (completion - issue).
  function automatic int mem_lat(int i, int it);
    case (i)
      0: return (it % 7 == 6) ? 12 : 30;     // mostly an L2-side miss
      3: return 4;                            // stack: L1 hit
      4: return (it % 3 == 0) ? 60 : 4;       // periodic long miss
      default: return 1;                      // stores
    endcase
  endfunction

  // ---------------- renaming (testbench side) ----------------
  int   map [12];
  int   next_preg = 32;
  function automatic int alloc_preg();
    int p;
    p = next_preg;
    next_preg = (next_preg == NUM_PREGS - 1) ? 32 : next_preg + 1;
    return p;
  endfunction

  uop_t stream [$];
  int   s_inst [$];
  int   s_iter [$];
  initial begin
    for (int a = 0; a < 12; a++) map[a] = a;
    for (int it = 0; it < ITERS; it++)
      for (int i = 0; i < NUOPS; i++) begin
        uop_t u;
        u = '0;
        u.pc = pc_of(i);
        u.cls = prog[i].cls;
        u.is_load = prog[i].ld;
        if (prog[i].s0 >= 0) begin u.src_vld[0] = 1; u.src[0] = preg_t'(map[prog[i].s0]); end
        if (prog[i].s1 >= 0) begin u.src_vld[1] = 1; u.src[1] = preg_t'(map[prog[i].s1]); end
        if (prog[i].s2 >= 0) begin u.src_vld[2] = 1; u.src[2] = preg_t'(map[prog[i].s2]); end
        if (prog[i].dst >= 0) begin
          map[prog[i].dst] = alloc_preg();
          u.has_dst = 1; u.dst = preg_t'(map[prog[i].dst]);
        end
        stream.push_back(u);
        s_inst.push_back(i);
        s_iter.push_back(it);
      end
  end

  // ---------------- reference state ----------------
  typedef struct { logic vld; int rob; ts_t key; ts_t dly; } dtref_t;
  dtref_t dtr [NUM_PREGS];
  logic   rdy [NUM_PREGS];
  logic   learned_vld [NUOPS];
  ts_t    learned [NUOPS];
  ts_t    exp_key [ROB_SIZE];
  int     rob_seq [ROB_SIZE];
  logic   rob_dch [ROB_SIZE];
  ts_t    rob_iss [ROB_SIZE];
  int     ret_q [$];
  int     last_seq [NUM_PORTS];
  ts_t    exp_dly [ROB_SIZE];
  int     seq_rob [int];
  logic   seq_ret [int];
  logic   seq_iss [int];
  int     mdep_seq [int];

  typedef struct { int due; int rob; int port; logic has_dst; int dst; logic miss; } comp_t;
  comp_t  pend [$];
  int     mem_out = 0;

  int ptr = 0, retired = 0;
  int n_reorder = 0, n_blocked = 0, n_taildep = 0, n_dchit = 0, n_train = 0,
      n_stall = 0, n_learned = 0, n_membusy = 0, n_mdep = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int start_cycle;
    for (int p = 0; p < NUM_PREGS; p++) begin dtr[p] = '{0, 0, '0, '0}; rdy[p] = 1; end
    for (int i = 0; i < NUOPS; i++) begin learned_vld[i] = 0; learned[i] = '0; end
    for (int p = 0; p < NUM_PORTS; p++) last_seq[p] = -1;
    in_vld = '0; in_uop = '0; wb = '0; port_rdy = '1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start_cycle = int'(now);

    while (retired < TOTAL) begin
      int n_acc;
      comp_t keep [$];
      logic mem_used;
      // ---- drive: completions due now, dispatch group, unit readiness ----
      wb = '0;
      mem_used = 0;
      keep = {};
      pend.sort(x) with (x.due);
      foreach (pend[i]) begin
        comp_t c;
        c = pend[i];
        if (c.due <= int'(now) && !wb[c.port].vld && !(c.port == PORT_MEM && mem_used)) begin
          wb[c.port] = '{vld: 1'b1, rob: rob_idx_t'(c.rob), has_dst: c.has_dst, dst: preg_t'(c.dst), l1_miss: c.miss};
          if (c.port == PORT_MEM) mem_used = 1;
        end else keep.push_back(c);
      end
      pend = keep;
      for (int k = 0; k < WIDTH; k++) begin
        in_vld[k] = (ptr + k) < TOTAL;
        in_uop[k] = in_vld[k] ? stream[ptr + k] : '0;
        // store-set model: (5) depends on the previous iteration's (9)
        if (in_vld[k] && s_inst[ptr + k] == 4 && s_iter[ptr + k] > 0 && !seq_ret.exists(ptr + k - 8)) begin
          in_uop[k].mdep_vld = 1'b1;
          in_uop[k].mdep_rob = rob_idx_t'(seq_rob.exists(ptr + k - 8) ? seq_rob[ptr + k - 8]
                                                                       : alloc_rob(ptr + k - 8 - ptr));
        end
      end
      port_rdy = '1;
      port_rdy[PORT_MEM] = mem_out < MAX_OUT;
      if (!port_rdy[PORT_MEM]) n_membusy++;
      #1;

      // ---- retirement order ----
      for (int r = 0; r < WIDTH; r++)
        if (ret_vld[r]) begin
          check(ret_q.size() > 0 && rob_seq[ret_rob[r]] == ret_q[0], "retire in program order");
          seq_ret[rob_seq[ret_rob[r]]] = 1'b1;
          void'(ret_q.pop_front());
          retired++;
        end

      // ---- issue: sources complete, predicted time as the reference says ----
      for (int p = 0; p < NUM_PORTS; p++)
        if (iss_vld[p]) begin
          int lat, i, it, seq;
          for (int j = 0; j < NSRC; j++)
            if (iss_uop[p].src_vld[j]) check(rdy[iss_uop[p].src[j]], "issue after producers complete");
          check(iss_pred[p] == exp_key[iss_rob[p]], "predicted issue time");
          seq = rob_seq[iss_rob[p]];
          if (mdep_seq.exists(seq)) check(seq_iss.exists(mdep_seq[seq]), "load after the store it depends on");
          seq_iss[seq] = 1'b1;
          if (seq < last_seq[p]) n_reorder++;
          last_seq[p] = seq;
          i = s_inst[seq]; it = s_iter[seq];
          rob_iss[iss_rob[p]] = now;
          case (p)
            PORT_FP:  lat = FP_LAT;
            PORT_MEM: lat = mem_lat(i, it);
            default:  lat = 1;
          endcase
          if (p == PORT_MEM) mem_out++;
          pend.push_back('{due: int'(now) + lat, rob: int'(iss_rob[p]), port: p,
                           has_dst: iss_uop[p].has_dst, dst: int'(iss_uop[p].dst),
                           miss: (p == PORT_MEM) && iss_uop[p].is_load && lat > int'(L1_HIT_LAT)});
        end

      // ---- dispatch: expected predictions, using state before this edge ----
      n_acc = 0;
      for (int k = 0; k < WIDTH; k++) if (in_accept[k]) n_acc++;
      for (int k = 0; k < WIDTH; k++) begin
        if (k > 0) check(!in_accept[k] || in_accept[k-1], "accept is a prefix");
      end
      begin
        ts_t gk [WIDTH];
        ts_t gd [WIDTH];
        int  i;
        for (int k = 0; k < n_acc; k++) begin
          uop_t u;
          ts_t best;
          u = in_uop[k];
          i = s_inst[ptr + k];
          best = now;
          for (int j = 0; j < NSRC; j++)
            if (u.src_vld[j]) begin
              logic have;
              ts_t  cand;
              have = dtr[u.src[j]].vld;
              cand = dtr[u.src[j]].key + dtr[u.src[j]].dly;
              for (int m = 0; m < k; m++)
                if (in_uop[m].has_dst && in_uop[m].dst == u.src[j]) begin have = 1; cand = gk[m] + gd[m]; end
              if (have && ts_before(best, cand)) begin
                best = cand;
              end
            end
          if (u.mdep_vld) begin
            ts_t cand;
            cand = exp_key[u.mdep_rob] + exp_dly[u.mdep_rob];
            for (int m = 0; m < k; m++)
              if (alloc_rob(m) == int'(u.mdep_rob)) cand = gk[m] + gd[m];
            if (ts_before(best, cand)) best = cand;
            mdep_seq[ptr + k] = ptr + k - 8;
            n_mdep++;
          end
          gk[k] = best;
          gd[k] = (u.is_load && learned_vld[i]) ? learned[i] : static_delay(u.cls);
          if (u.is_load && learned_vld[i]) n_dchit++;
          if (u.is_load && learned_vld[i] && learned[i] > ts_t'(L1_HIT_LAT)) n_learned++;
          exp_key[alloc_rob(k)] = gk[k];
          exp_dly[alloc_rob(k)] = gd[k];
          seq_rob[ptr + k] = alloc_rob(k);
          rob_seq[alloc_rob(k)] = ptr + k;
          rob_dch[alloc_rob(k)] = u.is_load && learned_vld[i];
          ret_q.push_back(ptr + k);
        end
        // retire clears, then dispatch writes (a write wins)
        for (int r = 0; r < WIDTH; r++)
          if (ret_vld[r] && ret_uop[r].has_dst && dtr[ret_uop[r].dst].vld && dtr[ret_uop[r].dst].rob == int'(ret_rob[r]))
            dtr[ret_uop[r].dst].vld = 0;
        for (int k = 0; k < n_acc; k++)
          if (in_uop[k].has_dst) dtr[in_uop[k].dst] = '{1, alloc_rob(k), gk[k], gd[k]};
      end

      // ---- learning: a completing load that missed, or a PC already learned ----
      if (wb[PORT_MEM].vld) begin
        int seq, i;
        seq = rob_seq[wb[PORT_MEM].rob];
        i = s_inst[seq];
        mem_out--;
        if (prog[i].ld && (wb[PORT_MEM].l1_miss || rob_dch[wb[PORT_MEM].rob])) begin
          learned_vld[i] = 1;
          learned[i] = now - rob_iss[wb[PORT_MEM].rob];
          check(ev_dc_train, "training write on load completion");
        end else check(!ev_dc_train, "no training write");
      end
      if (ev_dc_train) n_train++;

      // ---- ready bits: completions set, dispatch clears ----
      for (int p = 0; p < NUM_PORTS; p++) if (wb[p].vld && wb[p].has_dst) rdy[wb[p].dst] = 1;
      for (int k = 0; k < n_acc; k++) if (in_uop[k].has_dst) rdy[in_uop[k].dst] = 0;

      // ---- events ----
      n_taildep += $countones(ev_tail_dep);
      n_blocked += $countones(ev_head_blocked);
      if (ev_disp_stall) n_stall++;
      ptr += n_acc;
      @(negedge clk);
    end

    check(ptr == TOTAL && retired == TOTAL, "every uop retired");
    $display("uops %0d cycles %0d (IPC x100 = %0d)", TOTAL, int'(now) - start_cycle,
             (TOTAL * 100) / (int'(now) - start_cycle));
    $display("reordered %0d  blocked-head %0d  tail-dep %0d  dc-hit %0d  dc-train %0d  stall %0d  learned>L1 %0d  store-tied %0d  mem-busy %0d",
             n_reorder, n_blocked, n_taildep, n_dchit, n_train, n_stall, n_learned, n_mdep, n_membusy);
    check(n_reorder > 0, "reordering happened");
    check(n_blocked > 0, "a queue head blocked");
    check(n_taildep > 0, "tail-dependency steering happened");
    check(n_dchit > 0, "DelayCache hits happened");
    check(n_train > 0, "DelayCache training happened");
    check(n_stall > 0, "dispatch stalled");
    check(n_learned > 0, "a learned miss delay was used");
    check(n_mdep > 0, "a load was tied to a store");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ROB index the core gives the k-th uop of this cycle's group.
  int rob_tail = 0;
  function automatic int alloc_rob(int k);
    return (rob_tail + k) % ROB_SIZE;
  endfunction
  always @(posedge clk)
    if (rst_n) rob_tail <= (rob_tail + $countones(in_accept)) % ROB_SIZE;
endmodule
