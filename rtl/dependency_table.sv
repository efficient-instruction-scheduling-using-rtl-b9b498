// dependency_table (DT): for every physical register, which in-flight
// instruction last wrote it.
//
// The paper keeps one entry per physical register that "maps it to the
// instruction pointer that last wrote to this register", sized 256 entries x
// 1 byte with 12 read and 4 write ports.  Here the byte is a valid bit plus a
// 7-bit ROB index: the ROB index is the pointer the rest of the scheduler uses
// to reach the producer's PC and timing (this reading of "instruction pointer"
// is this design's choice; it is what makes the entry exactly one byte).
//
// Reads are combinational: rd_preg[i] -> rd_vld[i], rd_rob[i].  Writes
// (wr_en/wr_preg/wr_rob, one per dispatched uop) take effect at the clock
// edge; a higher-numbered write port wins if two name the same register.
// When a uop retires its register is no longer "in flight": clr_en/clr_preg/
// clr_rob invalidate the entry only if it still points at that ROB index, so
// a younger writer's mapping is kept.  A write in the same cycle beats a clear.
// Reset clears every valid bit.
module dependency_table
  import its_pkg::*;
#(
  parameter int unsigned NREGS = NUM_PREGS,
  parameter int unsigned NRD   = WIDTH * NSRC,
  parameter int unsigned NWR   = WIDTH,
  parameter int unsigned NCLR  = WIDTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NRD-1:0][PREG_W-1:0] rd_preg,
  output logic [NRD-1:0]           rd_vld,
  output rob_idx_t [NRD-1:0]       rd_rob,
  input  logic [NWR-1:0]           wr_en,
  input  logic [NWR-1:0][PREG_W-1:0] wr_preg,
  input  rob_idx_t [NWR-1:0]       wr_rob,
  input  logic [NCLR-1:0]          clr_en,
  input  logic [NCLR-1:0][PREG_W-1:0] clr_preg,
  input  rob_idx_t [NCLR-1:0]      clr_rob
);

  typedef struct packed {
    logic     vld;
    rob_idx_t rob;
  } dt_entry_t;

  dt_entry_t tbl [NREGS];

  always_comb begin
    for (int i = 0; i < NRD; i++) begin
      rd_vld[i] = tbl[rd_preg[i]].vld;
      rd_rob[i] = tbl[rd_preg[i]].rob;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) tbl[r] <= '0;
    end else begin
      for (int c = 0; c < NCLR; c++)
        if (clr_en[c] && tbl[clr_preg[c]].vld && tbl[clr_preg[c]].rob == clr_rob[c])
          tbl[clr_preg[c]].vld <= 1'b0;
      for (int w = 0; w < NWR; w++)
        if (wr_en[w]) tbl[wr_preg[w]] <= '{vld: 1'b1, rob: wr_rob[w]};
    end
  end

endmodule
