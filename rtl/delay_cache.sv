// delay_cache: direct-mapped, per-PC memory of the most recent real delay of
// loads that missed in the L1 data cache.
//
// As in the paper, an entry stores the issue time and the completion time of
// the load, and the delay used by the predictor is their difference
// (T_Delay = T_Complete - T_Issue).  The paper sizes it 512 entries x 12 bytes
// with 4 read and 1 write ports; here the 12 bytes are a 32-bit partial PC tag
// and two 32-bit timestamps, plus a valid bit (the field split is this design's
// choice).  The set is PC[IDX_W-1:0]; the tag is the next TAG_W bits of the PC.
//
// Reads are combinational: rd_pc[i] -> rd_hit[i], rd_delay[i] (0 on a miss).
// The single write port (wr_en, wr_pc, wr_issue, wr_complete) overwrites the
// set at the clock edge: the newest delay always replaces the old one, which is
// the paper's "train every iteration" policy.  Reset clears every valid bit.
module delay_cache
  import its_pkg::*;
#(
  parameter int unsigned ENTRIES = DC_ENTRIES,
  parameter int unsigned TAG_W   = 32,
  parameter int unsigned NRD     = WIDTH
) (
  input  logic            clk,
  input  logic            rst_n,
  input  pc_t [NRD-1:0]   rd_pc,
  output logic [NRD-1:0]  rd_hit,
  output ts_t [NRD-1:0]   rd_delay,
  input  logic            wr_en,
  input  pc_t             wr_pc,
  input  ts_t             wr_issue,
  input  ts_t             wr_complete
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  // The valid bits are flops with reset; the rest is a plain RAM without reset.
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    ts_t              t_issue;
    ts_t              t_complete;
  } dc_entry_t;

  logic [ENTRIES-1:0] vld;
  dc_entry_t          mem [ENTRIES];

  function automatic logic [IDX_W-1:0] idx_of(pc_t pc);
    return pc[IDX_W-1:0];
  endfunction

  function automatic logic [TAG_W-1:0] tag_of(pc_t pc);
    return pc[IDX_W +: TAG_W];
  endfunction

  always_comb begin
    for (int i = 0; i < NRD; i++) begin
      dc_entry_t e;
      e = mem[idx_of(rd_pc[i])];
      rd_hit[i]   = vld[idx_of(rd_pc[i])] && (e.tag == tag_of(rd_pc[i]));
      rd_delay[i] = rd_hit[i] ? (e.t_complete - e.t_issue) : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     vld <= '0;
    else if (wr_en) vld[idx_of(wr_pc)] <= 1'b1;

  always_ff @(posedge clk)
    if (wr_en)
      mem[idx_of(wr_pc)] <= '{tag: tag_of(wr_pc), t_issue: wr_issue, t_complete: wr_complete};

endmodule
