// aggression_control -- counter arithmetic and aggression decisions for one
// training-table entry.
//
// Combinational. Given an entry and the events a training access produced for
// it, it returns the updated entry and the decisions that follow from it:
//   * ReuseConf and SampleRate move by +-1 (saturating 0..15).
//   * PatternConf is two biased counters: BasePatternConf counts +1 / -2
//     (saturates high only if more than 2/3 of sampled prefetches are
//     useful); HighPatternConf counts +1 / -5 (more than 5/6).
//     Increments are applied before decrements, each step saturating.
//   * Lookahead becomes 2 when HighPatternConf reaches 15 and returns to 1
//     only when BasePatternConf falls below its initial value 8.
//   * Metadata is stored and prefetches issued only if ReuseConf > 8 and
//     BasePatternConf > 8; the degree is MAX_DEGREE (4) if HighPatternConf is
//     above 8, otherwise 1.
// All thresholds and step sizes are the published ones. Applying several
// events of one access in a fixed order is this design's choice. The
// entry's other fields (valid, tag, addresses, timestamp) pass through
// unchanged; the caller updates those.
module aggression_control
  import triangel_pkg::*;
#(
  parameter int unsigned MAX_DEGREE = 4
) (
  input  tt_entry_t   in_entry,
  input  logic        reuse_inc,
  input  logic        reuse_dec,
  input  logic [1:0]  pat_inc,    // number of PatternConf increments
  input  logic [1:0]  pat_dec,    // number of PatternConf decrements
  input  logic        srate_inc,
  input  logic        srate_dec,
  output tt_entry_t   out_entry,
  output logic        enable,     // store metadata and prefetch
  output logic [2:0]  degree      // prefetches per trigger
);
  always_comb begin
    cnt_t base, high;
    out_entry = in_entry;
    if (reuse_inc) out_entry.reuse = sat_inc(out_entry.reuse);
    if (reuse_dec) out_entry.reuse = sat_sub(out_entry.reuse, 4'd1);
    if (srate_inc) out_entry.srate = sat_inc(out_entry.srate);
    if (srate_dec) out_entry.srate = sat_sub(out_entry.srate, 4'd1);
    base = in_entry.base;
    high = in_entry.high;
    for (int i = 0; i < 2; i++) begin
      if (i < int'(pat_inc)) begin
        base = sat_inc(base);
        high = sat_inc(high);
      end
    end
    for (int i = 0; i < 2; i++) begin
      if (i < int'(pat_dec)) begin
        base = sat_sub(base, 4'd2);
        high = sat_sub(high, 4'd5);
      end
    end
    out_entry.base = base;
    out_entry.high = high;
    if (high == CNT_MAX)      out_entry.look = 1'b1;
    else if (base < CNT_INIT) out_entry.look = 1'b0;
    enable = (out_entry.reuse > CNT_INIT) && (out_entry.base > CNT_INIT);
    degree = (out_entry.high > CNT_INIT) ? 3'(MAX_DEGREE) : 3'd1;
  end
endmodule
