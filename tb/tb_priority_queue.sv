// tb_priority_queue: random push/pop traffic against a reference sorted list.
//
// The reference keeps the entries in a SystemVerilog queue ordered by key,
// equal keys in arrival order.  Every cycle the DUT's head, tail and count are
// compared with it.  It also checks that a new earliest entry is at the head
// one cycle after its push (the back-to-back property), and that keys
// straddling the timestamp wrap are ordered correctly.
module tb_priority_queue;
  import its_pkg::*;

  localparam int unsigned DEPTH = PQ_DEPTH;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      push, pop, full;
  pq_entry_t push_entry, head_entry, tail_entry;
  logic [$clog2(DEPTH+1)-1:0] count;

  priority_queue dut (.*);

  int checks = 0, failures = 0;
  pq_entry_t ref_q[$];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic void ref_apply(logic do_push, pq_entry_t e, logic do_pop);
    int pos;
    if (do_pop && ref_q.size() > 0) void'(ref_q.pop_front());
    if (do_push) begin
      pos = 0;
      while (pos < ref_q.size() && !ts_before(e.key, ref_q[pos].key)) pos++;
      ref_q.insert(pos, e);
    end
  endfunction

  task automatic compare();
    check(int'(count) == ref_q.size(), "count");
    check(full == (ref_q.size() == DEPTH), "full");
    if (ref_q.size() > 0) begin
      check(head_entry.vld && head_entry.key == ref_q[0].key && head_entry.rob == ref_q[0].rob, "head");
      check(tail_entry.vld && tail_entry.rob == ref_q[ref_q.size()-1].rob, "tail");
    end else begin
      check(!head_entry.vld, "empty head");
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tag;
    ts_t base;
    tag = 0;
    push = 0; pop = 0; push_entry = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare();

    // Directed: fill with descending keys; the newest is at the head next cycle.
    for (int i = 0; i < DEPTH; i++) begin
      push = 1; pop = 0;
      push_entry = '0;
      push_entry.vld = 1; push_entry.key = ts_t'(100 - i); push_entry.rob = rob_idx_t'(tag++);
      ref_apply(1, push_entry, 0);
      @(negedge clk);
      push = 0;
      check(head_entry.key == ts_t'(100 - i), "new earliest at head next cycle");
      compare();
    end
    // Drain in key order.
    for (int i = 0; i < DEPTH; i++) begin
      pop = 1;
      ref_apply(0, '0, 1);
      @(negedge clk);
      pop = 0;
      compare();
    end

    // Wrap-around: a key just past 2^32 is later than one just below it.
    base = '1 - ts_t'(2);
    for (int i = 0; i < 6; i++) begin
      push = 1;
      push_entry = '0;
      push_entry.vld = 1; push_entry.key = base + ts_t'(5 - i); push_entry.rob = rob_idx_t'(tag++);
      ref_apply(1, push_entry, 0);
      @(negedge clk);
      push = 0;
      compare();
    end
    check(head_entry.key == base, "wrap order head");
    while (ref_q.size() > 0) begin
      pop = 1; ref_apply(0, '0, 1); @(negedge clk); pop = 0; compare();
    end

    // Random traffic with push and pop, including both in one cycle.
    for (int c = 0; c < 20000; c++) begin
      logic dp, dq;
      dq = ($urandom_range(0, 99) < 45) && (ref_q.size() > 0);
      dp = ($urandom_range(0, 99) < 55) && (ref_q.size() < DEPTH);
      push = dp; pop = dq;
      push_entry = '0;
      push_entry.vld = 1;
      push_entry.key = ts_t'($urandom_range(0, 40));
      push_entry.rob = rob_idx_t'(tag++);
      ref_apply(dp, push_entry, dq);
      @(negedge clk);
      push = 0; pop = 0;
      compare();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
