// metadata_reuse_buffer -- Triangel's Metadata Reuse Buffer (MRB).
//
// A small cache of Markov-table entries held next to the prefetcher. At
// degree 4 consecutive triggers walk overlapping chains of the Markov table;
// the MRB serves the repeated links locally, so most chains cost one L3
// access. It also lets the trainer skip an L3 update whose result would be
// unchanged (same target, confidence already set).
//
// 256 entries, 2-way set associative (published). An entry is keyed by the
// lookup address: set = Markov set-index bits [6:0]; the remaining four
// Markov set-index bits [10:7] and the 10-bit Markov Tag# are stored and
// compared. Its payload is the 42-bit Markov entry. Replacement is FIFO per
// set (published); the valid bit is this design's addition.
//
// Ports: a combinational lookup port (lk_*) and one write port. A write with
// wr_alloc=1 inserts (or overwrites a matching entry); with wr_alloc=0 it only
// refreshes an entry that is already held, keeping the copy coherent with the
// L3 after a training update.
module metadata_reuse_buffer
  import triangel_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned WAYS    = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  line_addr_t lk_addr,
  output logic       lk_hit,
  output mk_entry_t  lk_entry,
  input  logic       wr_valid,
  input  logic       wr_alloc,
  input  line_addr_t wr_addr,
  input  mk_entry_t  wr_entry
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned HW   = MK_SET_W - SW;   // stored set-index bits
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic [HW-1:0] set_hi;
    mk_entry_t     ent;
  } mrb_line_t;

  mrb_line_t mem [SETS][WAYS];
  logic [SETS-1:0][WAYS-1:0] valid_q;
  logic [SETS-1:0][WW-1:0]   fifo_q;

  function automatic logic [HW-1:0] hi_of(input line_addr_t a);
    return a[MK_SET_W-1:SW];
  endfunction

  // lookup
  always_comb begin
    logic [SW-1:0] s;
    s        = lk_addr[SW-1:0];
    lk_hit   = 1'b0;
    lk_entry = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!lk_hit && valid_q[s][w] && mem[s][w].set_hi == hi_of(lk_addr) &&
          mem[s][w].ent.tag == mk_tag(lk_addr)) begin
        lk_hit   = 1'b1;
        lk_entry = mem[s][w].ent;
      end
    end
  end

  // write
  logic [SW-1:0] ws;
  logic          wr_match;
  logic [WW-1:0] wr_way;
  always_comb begin
    ws       = wr_addr[SW-1:0];
    wr_match = 1'b0;
    wr_way   = fifo_q[ws];
    for (int w = 0; w < WAYS; w++) begin
      if (!wr_match && valid_q[ws][w] && mem[ws][w].set_hi == hi_of(wr_addr) &&
          mem[ws][w].ent.tag == wr_entry.tag) begin
        wr_match = 1'b1;
        wr_way   = WW'(w);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && (wr_match || wr_alloc))
      mem[ws][wr_way] <= '{set_hi: hi_of(wr_addr), ent: wr_entry};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      fifo_q  <= '0;
    end else if (wr_valid && !wr_match && wr_alloc) begin
      valid_q[ws][wr_way] <= 1'b1;
      fifo_q[ws]          <= (fifo_q[ws] == WW'(WAYS - 1)) ? '0 : fifo_q[ws] + 1'b1;
    end
  end
endmodule
