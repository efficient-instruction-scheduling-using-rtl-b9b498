// tb_delay_cache: trains random load PCs and reads them back through the four
// read ports, against a reference direct-mapped table.  Covers: miss before
// training, delay = completion - issue, overwrite with the latest delay,
// eviction by a PC that maps to the same set, and timestamps that wrap.
module tb_delay_cache;
  import its_pkg::*;

  localparam int unsigned NRD = WIDTH;
  localparam int unsigned IDX_W = $clog2(DC_ENTRIES);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  pc_t  [NRD-1:0] rd_pc;
  logic [NRD-1:0] rd_hit;
  ts_t  [NRD-1:0] rd_delay;
  logic wr_en;
  pc_t  wr_pc;
  ts_t  wr_issue, wr_complete;

  delay_cache dut (.*);

  int checks = 0, failures = 0;
  pc_t  ref_pc    [DC_ENTRIES];
  logic ref_vld   [DC_ENTRIES];
  ts_t  ref_delay [DC_ENTRIES];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic pc_t rand_pc();
    // 64 distinct sets, two possible tags each, so conflicts happen.
    return {PC_W'($urandom_range(0, 1)) << 20} | pc_t'($urandom_range(0, 63) * 8);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < DC_ENTRIES; s++) begin ref_vld[s] = 0; ref_pc[s] = '0; ref_delay[s] = '0; end
    wr_en = 0; wr_pc = '0; wr_issue = '0; wr_complete = '0; rd_pc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Directed: untrained PC misses; trained one returns complete - issue.
    rd_pc[0] = 48'h40_1000; #1;
    check(!rd_hit[0], "miss before training");
    wr_en = 1; wr_pc = 48'h40_1000; wr_issue = 32'd100; wr_complete = 32'd237;
    @(negedge clk); wr_en = 0; #1;
    check(rd_hit[0] && rd_delay[0] == 32'd137, "learned delay");
    // Wrapping timestamps.
    wr_en = 1; wr_issue = 32'hFFFF_FFF0; wr_complete = 32'h0000_0010;
    @(negedge clk); wr_en = 0; #1;
    check(rd_hit[0] && rd_delay[0] == 32'd32, "delay across wrap");
    // Same set, other tag evicts it.
    wr_en = 1; wr_pc = 48'h40_1000 + (48'h1 << IDX_W); wr_issue = 0; wr_complete = 9;
    @(negedge clk); wr_en = 0; #1;
    check(!rd_hit[0], "evicted by same-set PC");
    rd_pc[1] = wr_pc; #1;
    check(rd_hit[1] && rd_delay[1] == 9, "new owner of set");
    ref_vld[wr_pc[IDX_W-1:0]] = 1; ref_pc[wr_pc[IDX_W-1:0]] = wr_pc; ref_delay[wr_pc[IDX_W-1:0]] = 9;

    for (int c = 0; c < 5000; c++) begin
      ts_t iss;
      wr_en = $urandom_range(0, 1);
      wr_pc = rand_pc();
      iss = $urandom;
      wr_issue = iss;
      wr_complete = iss + ts_t'($urandom_range(4, 400));
      if (wr_en) begin
        ref_vld[wr_pc[IDX_W-1:0]] = 1;
        ref_pc[wr_pc[IDX_W-1:0]] = wr_pc;
        ref_delay[wr_pc[IDX_W-1:0]] = wr_complete - wr_issue;
      end
      @(negedge clk);
      wr_en = 0;
      for (int i = 0; i < NRD; i++) rd_pc[i] = rand_pc();
      #1;
      for (int i = 0; i < NRD; i++) begin
        logic exp_hit;
        exp_hit = ref_vld[rd_pc[i][IDX_W-1:0]] && ref_pc[rd_pc[i][IDX_W-1:0]] == rd_pc[i];
        check(rd_hit[i] == exp_hit, "hit");
        if (exp_hit) check(rd_delay[i] == ref_delay[rd_pc[i][IDX_W-1:0]], "delay");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
