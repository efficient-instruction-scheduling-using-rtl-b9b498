// tb_dependency_table: random dispatch writes and retire clears against a
// reference array, checked through all twelve read ports every cycle.
// Covers: a younger write surviving the clear of an older producer, write
// beating clear in the same cycle, and the higher write port winning.
module tb_dependency_table;
  import its_pkg::*;

  localparam int unsigned NRD = WIDTH * NSRC;
  localparam int unsigned NWR = WIDTH;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NRD-1:0][PREG_W-1:0] rd_preg;
  logic [NRD-1:0]             rd_vld;
  rob_idx_t [NRD-1:0]         rd_rob;
  logic [NWR-1:0]             wr_en;
  logic [NWR-1:0][PREG_W-1:0] wr_preg;
  rob_idx_t [NWR-1:0]         wr_rob;
  logic [NWR-1:0]             clr_en;
  logic [NWR-1:0][PREG_W-1:0] clr_preg;
  rob_idx_t [NWR-1:0]         clr_rob;

  dependency_table dut (.*);

  int checks = 0, failures = 0;
  logic     ref_vld [NUM_PREGS];
  rob_idx_t ref_rob [NUM_PREGS];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare();
    for (int i = 0; i < NRD; i++) begin
      check(rd_vld[i] == ref_vld[rd_preg[i]], "vld");
      if (ref_vld[rd_preg[i]]) check(rd_rob[i] == ref_rob[rd_preg[i]], "rob");
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NUM_PREGS; r++) begin ref_vld[r] = 0; ref_rob[r] = '0; end
    wr_en = '0; clr_en = '0; wr_preg = '0; wr_rob = '0; clr_preg = '0; clr_rob = '0; rd_preg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Directed: older producer's retire does not clear a younger mapping.
    wr_en = 4'b0001; wr_preg[0] = 8'd7; wr_rob[0] = 7'd3;
    @(negedge clk); wr_en = '0;
    wr_en = 4'b0001; wr_preg[0] = 8'd7; wr_rob[0] = 7'd9;
    @(negedge clk); wr_en = '0;
    clr_en = 4'b0001; clr_preg[0] = 8'd7; clr_rob[0] = 7'd3;
    @(negedge clk); clr_en = '0;
    rd_preg[0] = 8'd7; #1;
    check(rd_vld[0] && rd_rob[0] == 7'd9, "younger mapping kept");
    clr_en = 4'b0001; clr_preg[0] = 8'd7; clr_rob[0] = 7'd9;
    @(negedge clk); clr_en = '0; #1;
    check(!rd_vld[0], "cleared on own retire");
    ref_vld[7] = 0;

    for (int c = 0; c < 5000; c++) begin
      for (int w = 0; w < NWR; w++) begin
        wr_en[w]   = $urandom_range(0, 1);
        wr_preg[w] = PREG_W'($urandom_range(0, 31));
        wr_rob[w]  = rob_idx_t'($urandom);
        clr_en[w]  = $urandom_range(0, 1);
        clr_preg[w] = PREG_W'($urandom_range(0, 31));
        clr_rob[w] = ($urandom_range(0, 1) == 1) ? ref_rob[clr_preg[w]] : rob_idx_t'($urandom);
      end
      // Reference update, mirroring the documented priority.
      for (int w = 0; w < NWR; w++)
        if (clr_en[w] && ref_vld[clr_preg[w]] && ref_rob[clr_preg[w]] == clr_rob[w])
          ref_vld[clr_preg[w]] = 0;
      for (int w = 0; w < NWR; w++)
        if (wr_en[w]) begin ref_vld[wr_preg[w]] = 1; ref_rob[wr_preg[w]] = wr_rob[w]; end
      @(negedge clk);
      wr_en = '0; clr_en = '0;
      for (int i = 0; i < NRD; i++) rd_preg[i] = PREG_W'($urandom_range(0, 31));
      #1;
      compare();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
