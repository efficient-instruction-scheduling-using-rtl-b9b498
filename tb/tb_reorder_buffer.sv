// tb_reorder_buffer: random allocation, issue and out-of-order completion
// against a reference list.  Checks that entries retire in allocation order,
// only when done, at most four per cycle and without skipping a pending
// entry; that free_cnt tracks occupancy; and that the predictor and training
// read ports return what was written at dispatch and issue.
module tb_reorder_buffer;
  import its_pkg::*;

  localparam int unsigned N = ROB_SIZE;
  localparam int unsigned NALLOC = WIDTH, NRD = WIDTH * NSRC, NPORT = NUM_PORTS, NRET = WIDTH;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  ts_t now;
  logic     [NALLOC-1:0] alloc_vld;
  uop_t     [NALLOC-1:0] alloc_uop;
  ts_t      [NALLOC-1:0] alloc_t_pred, alloc_t_delay;
  logic     [NALLOC-1:0] alloc_dc_hit;
  rob_idx_t [NALLOC-1:0] alloc_idx;
  logic [$clog2(N+1)-1:0] free_cnt;
  rob_idx_t [NRD-1:0]    prod_rob;
  ts_t      [NRD-1:0]    prod_t_pred, prod_t_delay;
  logic     [NPORT-1:0]  iss_vld;
  rob_idx_t [NPORT-1:0]  iss_rob;
  wb_t      [NPORT-1:0]  wb;
  rob_idx_t q_rob;
  pc_t      q_pc;
  logic     q_is_load, q_dc_hit;
  ts_t      q_t_issue;
  logic     [NRET-1:0]   ret_vld;
  rob_idx_t [NRET-1:0]   ret_idx;
  uop_t     [NRET-1:0]   ret_uop;

  reorder_buffer dut (.*);

  int checks = 0, failures = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Reference: live entries in order, with what the DUT must hold.
  typedef struct { rob_idx_t idx; pc_t pc; ts_t tp; ts_t td; logic issued; logic done; ts_t ti; logic dch; } ref_t;
  ref_t live[$];
  int   next_idx = 0;
  int   retired = 0;

  always_ff @(posedge clk) if (rst_n) now <= now + 1; else now <= 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_vld = '0; alloc_uop = '0; alloc_t_pred = '0; alloc_t_delay = '0; alloc_dc_hit = '0;
    prod_rob = '0; iss_vld = '0; iss_rob = '0; wb = '0; q_rob = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(free_cnt == N, "empty after reset");
    check(ret_vld == '0, "nothing retires when empty");

    for (int c = 0; c < 20000; c++) begin
      int na, exp_ret;
      logic [NPORT-1:0] used;
      // ---- drive ----
      na = $urandom_range(0, NALLOC);
      if (na > int'(free_cnt)) na = free_cnt;
      alloc_vld = '0;
      for (int k = 0; k < NALLOC; k++) begin
        alloc_uop[k] = '0;
        alloc_uop[k].pc = pc_t'($urandom);
        alloc_uop[k].is_load = $urandom_range(0, 1);
        alloc_t_pred[k] = $urandom;
        alloc_t_delay[k] = $urandom;
        alloc_dc_hit[k] = $urandom_range(0, 1);
        if (k < na) alloc_vld[k] = 1;
      end
      // issue and complete random live entries (each at most once, distinct)
      iss_vld = '0; wb = '0;
      for (int p = 0; p < NPORT; p++) begin
        if (live.size() > 0) begin
          int i;
          i = $urandom_range(0, live.size() - 1);
          if (!live[i].issued && $urandom_range(0, 1)) begin
            logic dup;
            dup = 0;
            for (int q = 0; q < p; q++) if (iss_vld[q] && iss_rob[q] == live[i].idx) dup = 1;
            if (!dup) begin iss_vld[p] = 1; iss_rob[p] = live[i].idx; end
          end
          i = $urandom_range(0, live.size() - 1);
          if (live[i].issued && !live[i].done && $urandom_range(0, 1)) begin
            logic dup;
            dup = 0;
            for (int q = 0; q < p; q++) if (wb[q].vld && wb[q].rob == live[i].idx) dup = 1;
            if (!dup) begin wb[p].vld = 1; wb[p].rob = live[i].idx; end
          end
        end
      end
      for (int r = 0; r < NRD; r++) prod_rob[r] = (live.size() > 0) ? live[$urandom_range(0, live.size()-1)].idx : '0;
      q_rob = (live.size() > 0) ? live[$urandom_range(0, live.size()-1)].idx : '0;
      #1;
      // ---- check combinational outputs ----
      for (int k = 0; k < na; k++) check(int'(alloc_idx[k]) == (next_idx + k) % N, "alloc index");
      check(int'(free_cnt) == N - live.size(), "free_cnt");
      exp_ret = 0;
      while (exp_ret < NRET && exp_ret < live.size() && live[exp_ret].done) exp_ret++;
      for (int r = 0; r < NRET; r++) begin
        check(ret_vld[r] == (r < exp_ret), "retire prefix");
        if (r < exp_ret) check(ret_idx[r] == live[r].idx && ret_uop[r].pc == live[r].pc, "retire order");
      end
      foreach (live[i]) begin
        for (int r = 0; r < NRD; r++)
          if (prod_rob[r] == live[i].idx)
            check(prod_t_pred[r] == live[i].tp && prod_t_delay[r] == live[i].td, "producer read");
        if (q_rob == live[i].idx) begin
          check(q_pc == live[i].pc && q_dc_hit == live[i].dch, "training read");
          if (live[i].issued) check(q_t_issue == live[i].ti, "issue time");
        end
      end
      // ---- reference update at the edge ----
      for (int r = 0; r < exp_ret; r++) void'(live.pop_front());
      retired += exp_ret;
      foreach (live[i]) begin
        for (int p = 0; p < NPORT; p++) begin
          if (iss_vld[p] && iss_rob[p] == live[i].idx) begin live[i].issued = 1; live[i].ti = now; end
          if (wb[p].vld && wb[p].rob == live[i].idx) live[i].done = 1;
        end
      end
      for (int k = 0; k < na; k++) begin
        ref_t e;
        e.idx = rob_idx_t'((next_idx + k) % N); e.pc = alloc_uop[k].pc; e.tp = alloc_t_pred[k];
        e.td = alloc_t_delay[k]; e.issued = 0; e.done = 0; e.ti = 0; e.dch = alloc_dc_hit[k];
        live.push_back(e);
      end
      next_idx = (next_idx + na) % N;
      @(negedge clk);
    end
    check(retired > 1000, "enough retirements");
    $display("retired %0d", retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
