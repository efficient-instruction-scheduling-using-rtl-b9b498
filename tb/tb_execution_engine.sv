// tb_execution_engine: head-of-queue issue with the register scoreboard.
// Directed checks: an entry pushed later with an earlier predicted time
// issues first; a head waiting on a source blocks its own queue only; the
// consumer issues exactly one cycle after its producer's completion; port_rdy
// holds a head back.  Then random traffic against a reference model of the
// five sorted queues and the ready bits.
module tb_execution_engine;
  import its_pkg::*;

  localparam int unsigned NPORT = NUM_PORTS, DEPTH = PQ_DEPTH, W = WIDTH;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      [NPORT-1:0] push;
  pq_entry_t [NPORT-1:0] push_entry;
  logic      [W-1:0]     disp_dst_en;
  logic      [W-1:0][PREG_W-1:0] disp_dst;
  wb_t       [NPORT-1:0] wb;
  logic      [NPORT-1:0] port_rdy;
  logic      [NPORT-1:0] issue_vld;
  pq_entry_t [NPORT-1:0] issue_entry;
  logic      [NPORT-1:0] head_blocked;
  pq_entry_t [NPORT-1:0] tail_entry;
  logic      [NPORT-1:0][$clog2(DEPTH+1)-1:0] count;
  logic      [NPORT-1:0] full;

  execution_engine dut (.*);

  int checks = 0, failures = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic pq_entry_t mk(int key, int rob, int dst, logic sv, int src);
    pq_entry_t e;
    e = '0;
    e.vld = 1; e.key = ts_t'(key); e.rob = rob_idx_t'(rob);
    e.uop.has_dst = 1; e.uop.dst = preg_t'(dst);
    e.uop.src_vld = {2'b00, sv}; e.uop.src[0] = preg_t'(src);
    return e;
  endfunction

  task automatic idle();
    push = '0; disp_dst_en = '0; wb = '0;
  endtask

  // reference
  pq_entry_t rq [NPORT][$];
  logic [NUM_PREGS-1:0] rrdy;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); push_entry = '0; disp_dst = '0; port_rdy = '1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Producer p20 is in flight (not ready).  Queue 0 gets its consumer with
    // key 10, queue 1 an independent uop.
    disp_dst_en[0] = 1; disp_dst[0] = 8'd20;
    port_rdy = '0;
    push[0] = 1; push_entry[0] = mk(10, 1, 21, 1, 20);
    push[1] = 1; push_entry[1] = mk(12, 2, 22, 0, 0);
    @(negedge clk); idle();
    // A later push with an earlier key goes ahead of the consumer.
    push[0] = 1; push_entry[0] = mk(5, 3, 23, 0, 0);
    @(negedge clk); idle(); #1;
    check(issue_entry[0].rob == 3, "earlier prediction reordered to head");
    port_rdy = '1; #1;
    check(issue_vld[0] && issue_vld[1], "independent heads issue");
    @(negedge clk); #1;
    check(issue_entry[0].rob == 1 && !issue_vld[0] && head_blocked[0], "head waits for its source");
    check(!issue_vld[1] && !head_blocked[1], "other queue unaffected");
    @(negedge clk); #1;
    check(head_blocked[0], "still blocked");
    wb[3] = '{vld: 1'b1, rob: 7'd0, has_dst: 1'b1, dst: 8'd20, l1_miss: 1'b0}; #1;
    check(!issue_vld[0], "not before the completion edge");
    @(negedge clk); idle(); #1;
    check(issue_vld[0] && issue_entry[0].rob == 1, "issues one cycle after completion");
    port_rdy[0] = 0; #1;
    check(!issue_vld[0], "unit busy holds the head");
    port_rdy = '1;
    @(negedge clk); #1;
    check(count == '0, "all drained");

    // Random traffic against the reference.
    rrdy = '1;
    for (int p = 0; p < NPORT; p++) rq[p].delete();
    for (int c = 0; c < 20000; c++) begin
      idle();
      for (int p = 0; p < NPORT; p++) port_rdy[p] = $urandom_range(0, 3) != 0;
      for (int p = 0; p < NPORT; p++)
        if ($urandom_range(0, 1) && rq[p].size() < DEPTH) begin
          push[p] = 1;
          push_entry[p] = mk($urandom_range(0, 30), $urandom, $urandom_range(0, 15), $urandom_range(0, 1), $urandom_range(0, 15));
        end
      for (int k = 0; k < W; k++) begin
        disp_dst_en[k] = $urandom_range(0, 3) == 0; disp_dst[k] = PREG_W'($urandom_range(0, 15));
      end
      for (int p = 0; p < NPORT; p++) begin
        wb[p].vld = $urandom_range(0, 1); wb[p].has_dst = 1; wb[p].dst = PREG_W'($urandom_range(0, 15));
      end
      #1;
      for (int p = 0; p < NPORT; p++) begin
        logic hv, rdy;
        hv = rq[p].size() > 0;
        rdy = hv && (!rq[p][0].uop.src_vld[0] || rrdy[rq[p][0].uop.src[0]]);
        check(issue_vld[p] == (rdy && port_rdy[p]), "random issue");
        check(head_blocked[p] == (hv && !rdy), "random blocked");
        if (hv) check(issue_entry[p].rob == rq[p][0].rob && issue_entry[p].key == rq[p][0].key, "random head");
        check(int'(count[p]) == rq[p].size(), "random count");
      end
      // reference update
      for (int p = 0; p < NPORT; p++) begin
        if (issue_vld[p]) void'(rq[p].pop_front());
        if (push[p]) begin
          int pos;
          pos = 0;
          while (pos < rq[p].size() && !ts_before(push_entry[p].key, rq[p][pos].key)) pos++;
          rq[p].insert(pos, push_entry[p]);
        end
      end
      for (int p = 0; p < NPORT; p++) if (wb[p].vld) rrdy[wb[p].dst] = 1;
      for (int k = 0; k < W; k++) if (disp_dst_en[k]) rrdy[disp_dst[k]] = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
