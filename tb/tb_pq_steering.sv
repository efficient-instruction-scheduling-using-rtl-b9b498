// tb_pq_steering: directed cases of the steering rule (type, tail
// dependency, least occupied, fallback, one insert per queue per cycle, ROB
// space, in-order stop) and random groups against an independent model.
module tb_pq_steering;
  import its_pkg::*;

  localparam int unsigned W = WIDTH, NPORT = NUM_PORTS;
  localparam int unsigned CNT_W = $clog2(PQ_DEPTH + 1), FREE_W = $clog2(ROB_SIZE + 1);

  logic      [W-1:0]                uop_vld;
  uop_t      [W-1:0]                uop;
  pq_entry_t [NPORT-1:0]            tail_entry;
  logic      [NPORT-1:0][CNT_W-1:0] pq_count;
  logic      [NPORT-1:0]            pq_full;
  logic      [FREE_W-1:0]           rob_free;
  logic      [W-1:0]                accept;
  logic      [W-1:0][2:0]           port;
  logic      [W-1:0]                tail_dep;

  pq_steering dut (.*);

  int checks = 0, failures = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic uop_t mk(fu_class_e c, int s0);
    uop_t u;
    u = '0;
    u.cls = c; u.has_dst = 1; u.dst = preg_t'($urandom_range(100, 200));
    u.src_vld = 3'b001; u.src[0] = preg_t'(s0);
    return u;
  endfunction

  task automatic clear_state();
    uop_vld = '0; uop = '0; tail_entry = '0; pq_count = '0; pq_full = '0; rob_free = FREE_W'(ROB_SIZE);
  endtask

  initial begin
    // Type steering.
    clear_state();
    uop_vld = 4'b1111;
    uop[0] = mk(CLS_FP, 1); uop[1] = mk(CLS_BR, 2); uop[2] = mk(CLS_MEM, 3); uop[3] = mk(CLS_INT, 4);
    #1;
    check(accept == 4'b1111, "one per type accepted");
    check(port[0] == PORT_FP && port[1] == PORT_BR && port[2] == PORT_MEM, "type to unit");
    check(port[3] == PORT_INT0, "int tie goes to first queue");
    // Tail dependency: producer at tail of INT1.
    clear_state();
    uop_vld = 4'b0001; uop[0] = mk(CLS_INT, 42);
    tail_entry[PORT_INT1].vld = 1; tail_entry[PORT_INT1].uop.has_dst = 1; tail_entry[PORT_INT1].uop.dst = 8'd42;
    pq_count[PORT_INT1] = 5; pq_count[PORT_INT0] = 1;
    #1;
    check(port[0] == PORT_INT1 && tail_dep[0], "follow producer at tail");
    // No dependency: least occupied.
    uop[0] = mk(CLS_INT, 43); #1;
    check(port[0] == PORT_INT0 && !tail_dep[0], "least occupied");
    // Preferred queue full: fallback.
    uop[0] = mk(CLS_INT, 42); pq_full[PORT_INT1] = 1; #1;
    check(accept[0] && port[0] == PORT_INT0, "fallback when full");
    // Two ints in a group use both queues; a third int waits, and so does the rest.
    clear_state();
    uop_vld = 4'b1111;
    uop[0] = mk(CLS_INT, 1); uop[1] = mk(CLS_INT, 2); uop[2] = mk(CLS_INT, 3); uop[3] = mk(CLS_FP, 4);
    #1;
    check(accept == 4'b0011 && port[0] != port[1], "one insert per queue per cycle, in order");
    // ROB space limits the group.
    clear_state();
    uop_vld = 4'b1111; rob_free = 2;
    uop[0] = mk(CLS_INT, 1); uop[1] = mk(CLS_FP, 2); uop[2] = mk(CLS_BR, 3); uop[3] = mk(CLS_MEM, 4);
    #1;
    check(accept == 4'b0011, "ROB space");
    // A full single queue stalls dispatch.
    rob_free = 100; pq_full[PORT_FP] = 1; #1;
    check(accept == 4'b0001, "full queue stalls");

    // Random groups against an independent model.
    for (int it = 0; it < 20000; it++) begin
      logic [NPORT-1:0] used;
      logic go;
      int n;
      clear_state();
      rob_free = FREE_W'($urandom_range(0, 6));
      for (int p = 0; p < NPORT; p++) begin
        pq_count[p] = CNT_W'($urandom_range(0, PQ_DEPTH));
        pq_full[p] = (pq_count[p] == PQ_DEPTH);
        tail_entry[p].vld = $urandom_range(0, 1);
        tail_entry[p].uop.has_dst = $urandom_range(0, 1);
        tail_entry[p].uop.dst = preg_t'($urandom_range(0, 7));
      end
      for (int k = 0; k < W; k++) begin
        uop_vld[k] = $urandom_range(0, 5) != 0;
        uop[k] = mk(fu_class_e'($urandom_range(0, 3)), $urandom_range(0, 7));
        uop[k].src_vld = 3'($urandom);
        uop[k].src[1] = preg_t'($urandom_range(0, 7));
        uop[k].src[2] = preg_t'($urandom_range(0, 7));
      end
      #1;
      used = '0; go = 1; n = 0;
      for (int k = 0; k < W; k++) begin
        int cand [$];
        int pick;
        logic dep;
        case (uop[k].cls)
          CLS_INT: cand = '{0, 1};
          CLS_FP:  cand = '{2};
          CLS_BR:  cand = '{3};
          default: cand = '{4};
        endcase
        pick = -1; dep = 0;
        if (cand.size() == 2) begin
          foreach (cand[c])
            if (pick < 0) for (int j = 0; j < NSRC; j++)
              if (tail_entry[cand[c]].vld && tail_entry[cand[c]].uop.has_dst && uop[k].src_vld[j] &&
                  tail_entry[cand[c]].uop.dst == uop[k].src[j]) begin pick = cand[c]; dep = 1; end
          if (pick < 0) pick = (pq_count[1] < pq_count[0]) ? 1 : 0;
          if (used[pick] || pq_full[pick]) begin pick = 1 - pick; dep = 0; end
        end else pick = cand[0];
        go = go && uop_vld[k] && !used[pick] && !pq_full[pick] && (n < int'(rob_free));
        check(accept[k] == go, "random accept");
        if (go) begin
          check(int'(port[k]) == pick, "random port");
          check(tail_dep[k] == dep, "random tail_dep");
          used[pick] = 1; n++;
        end
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
