// training_table -- per-PC training table of the Triangel prefetcher.
//
// Every L2 miss or tagged prefetch hit looks up the entry of its PC. An
// entry holds the PC's hashed tag, its last two trained addresses (a two-deep
// shift register, LastAddr[0] and LastAddr[1]), a local timestamp that counts
// the PC's accesses, and the per-PC classifiers: ReuseConf, BasePatternConf,
// HighPatternConf, SampleRate and the Lookahead bit. The field widths are the
// published ones; the valid bit is added here.
//
// The table is a direct-mapped register file of ENTRIES records, indexed by
// a 9-bit hash of the PC (the published design gives the 9-bit index, as the
// samplers' Train-Idx, but not the associativity). It has two asynchronous
// read ports -- one for the current PC and one for an entry named by a
// sampler (another PC whose counters must be read or adjusted) -- and one
// synchronous write port. All entries are invalid after reset.
module training_table
  import triangel_pkg::*;
#(
  parameter int unsigned ENTRIES = 512
) (
  input  logic      clk,
  input  logic      rst_n,
  input  tt_idx_t   rd_a_idx,
  output tt_entry_t rd_a_entry,
  input  tt_idx_t   rd_b_idx,
  output tt_entry_t rd_b_entry,
  input  logic      wr_en,
  input  tt_idx_t   wr_idx,
  input  tt_entry_t wr_entry
);
  localparam int unsigned IW = $clog2(ENTRIES);

  tt_entry_t mem [ENTRIES];
  logic [ENTRIES-1:0] valid_q;

  always_comb begin
    rd_a_entry       = mem[rd_a_idx[IW-1:0]];
    rd_a_entry.valid = valid_q[rd_a_idx[IW-1:0]];
    rd_b_entry       = mem[rd_b_idx[IW-1:0]];
    rd_b_entry.valid = valid_q[rd_b_idx[IW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx[IW-1:0]] <= wr_entry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid_q <= '0;
    else if (wr_en) valid_q[wr_idx[IW-1:0]] <= wr_entry.valid;
  end
endmodule
