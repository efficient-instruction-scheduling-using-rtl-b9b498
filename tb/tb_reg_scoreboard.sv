// tb_reg_scoreboard: random dispatch clears and completion sets against a
// reference bit vector; dispatch wins over a completion to the same register,
// and a set is visible one cycle after it is applied.
module tb_reg_scoreboard;
  import its_pkg::*;

  localparam int unsigned NCLR = WIDTH, NSET = NUM_PORTS, NRD = NUM_PORTS * NSRC;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCLR-1:0]             clr_en;
  logic [NCLR-1:0][PREG_W-1:0] clr_preg;
  logic [NSET-1:0]             set_en;
  logic [NSET-1:0][PREG_W-1:0] set_preg;
  logic [NRD-1:0][PREG_W-1:0]  rd_preg;
  logic [NRD-1:0]              rd_ready;

  reg_scoreboard dut (.*);

  int checks = 0, failures = 0;
  logic [NUM_PREGS-1:0] ref_rdy;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr_en = '0; set_en = '0; clr_preg = '0; set_preg = '0; rd_preg = '0;
    ref_rdy = '1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < NRD; i++) begin rd_preg[i] = PREG_W'(i * 17); end
    #1;
    check(&rd_ready, "all ready after reset");
    // Dispatch clears, completion sets one cycle later.
    clr_en[0] = 1; clr_preg[0] = 8'd5; rd_preg[0] = 8'd5;
    @(negedge clk); clr_en = '0; #1;
    check(!rd_ready[0], "not ready after dispatch");
    set_en[2] = 1; set_preg[2] = 8'd5; #1;
    check(!rd_ready[0], "set not visible before the edge");
    @(negedge clk); set_en = '0; #1;
    check(rd_ready[0], "ready after completion");
    // Same-cycle clear and set: dispatch wins.
    clr_en[1] = 1; clr_preg[1] = 8'd9; set_en[0] = 1; set_preg[0] = 8'd9; rd_preg[1] = 8'd9;
    @(negedge clk); clr_en = '0; set_en = '0; #1;
    check(!rd_ready[1], "dispatch beats completion");
    ref_rdy[9] = 0;

    for (int c = 0; c < 5000; c++) begin
      for (int i = 0; i < NCLR; i++) begin clr_en[i] = $urandom_range(0, 1); clr_preg[i] = PREG_W'($urandom_range(0, 40)); end
      for (int i = 0; i < NSET; i++) begin set_en[i] = $urandom_range(0, 1); set_preg[i] = PREG_W'($urandom_range(0, 40)); end
      for (int i = 0; i < NSET; i++) if (set_en[i]) ref_rdy[set_preg[i]] = 1;
      for (int i = 0; i < NCLR; i++) if (clr_en[i]) ref_rdy[clr_preg[i]] = 0;
      @(negedge clk);
      clr_en = '0; set_en = '0;
      for (int i = 0; i < NRD; i++) rd_preg[i] = PREG_W'($urandom_range(0, 40));
      #1;
      for (int i = 0; i < NRD; i++) check(rd_ready[i] == ref_rdy[rd_preg[i]], "ready bit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
