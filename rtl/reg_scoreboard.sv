// reg_scoreboard: one "value computed" bit per physical register.
//
// The paper keeps, as part of renaming, "the status for each register,
// indicating whether or not it has been computed yet"; the execution engine
// uses it to decide whether the uop at the head of a queue may issue.
// A register becomes not-ready when a uop that writes it is dispatched
// (clr_en/clr_preg) and ready again at the clock edge after that uop's
// completion is reported (set_en/set_preg).  If both name the same register in
// one cycle the dispatch wins.  Reads (rd_preg -> rd_ready) are combinational
// and see the state before the edge, so a consumer issues at the earliest one
// cycle after its producer's completion.  Reset marks every register ready.
module reg_scoreboard
  import its_pkg::*;
#(
  parameter int unsigned NREGS = NUM_PREGS,
  parameter int unsigned NCLR  = WIDTH,
  parameter int unsigned NSET  = NUM_PORTS,
  parameter int unsigned NRD   = NUM_PORTS * NSRC
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NCLR-1:0]             clr_en,
  input  logic [NCLR-1:0][PREG_W-1:0] clr_preg,
  input  logic [NSET-1:0]             set_en,
  input  logic [NSET-1:0][PREG_W-1:0] set_preg,
  input  logic [NRD-1:0][PREG_W-1:0]  rd_preg,
  output logic [NRD-1:0]              rd_ready
);

  logic [NREGS-1:0] ready;

  always_comb
    for (int i = 0; i < NRD; i++) rd_ready[i] = ready[rd_preg[i]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready <= '1;
    end else begin
      for (int s = 0; s < NSET; s++) if (set_en[s]) ready[set_preg[s]] <= 1'b1;
      for (int c = 0; c < NCLR; c++) if (clr_en[c]) ready[clr_preg[c]] <= 1'b0;
    end
  end

endmodule
