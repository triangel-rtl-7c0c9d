// history_sampler -- Triangel's History Sampler.
//
// A small 2-way set-associative store of sampled (x, y) pairs from the
// training stream, each with the PC's training-table index, the PC's local
// timestamp at sampling time and an Accessed bit. Because only a fraction of
// accesses is sampled, it sees much further into the past than its size
// suggests, and so can judge (a) whether a PC's pattern repeats within the
// Markov table's capacity (ReuseConf) and (b) whether x is followed by the
// same y again (PatternConf).
//
// One operation per cycle with req_valid high. The key is the current PC's
// LastAddr[0] (set = bits [7:0], tag = bits [30:8]) together with the PC's
// Train-Idx. Outcomes, valid in the same cycle, follow the published
// pseudocode:
//   hit (Access A): local reuse distance cur_ts - A.ts below MAX_SIZE raises
//     ReuseConf, else an unaccessed A lowers it; A.Accessed := 1; if
//     A.Target equals the current address PatternConf rises, otherwise the
//     old target is offered to the Second-Chance Sampler (scs_cand_*), which
//     the caller inserts only if the L2 does not hold it; A.Target := current.
//   miss: with probability ENTRIES / MAX_SIZE * 2^(SampleRate-8) (compared
//     against rand_val) a victim V is replaced. If V is older than MAX_SIZE
//     on its own PC's clock (victim_tt_ts, read by the caller from the
//     training table at victim_tidx) an unaccessed V lowers that PC's
//     ReuseConf and the current PC's SampleRate rises; a younger unaccessed
//     V lowers the current PC's SampleRate.
// The state is written on the clock edge. Victim choice (invalid way first,
// else a random way) and "no replacement on a hit" are this design's choices.
module history_sampler
  import triangel_pkg::*;
#(
  parameter int unsigned ENTRIES  = 512,
  parameter int unsigned WAYS     = 2,
  parameter int unsigned MAX_SIZE = 196608
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  input  line_addr_t key_addr,      // Training[PC].LastAddr[0]
  input  tt_idx_t    key_tidx,      // &Training[PC]
  input  line_addr_t cur_addr,      // CurrentAddress
  input  ts_t        cur_ts,        // Training[PC].Timestamp
  input  cnt_t       sample_rate,   // Training[PC].SampleRate
  input  logic [31:0] rand_val,
  output tt_idx_t    victim_tidx,   // V.Train-Idx, to read its timestamp
  input  ts_t        victim_tt_ts,  // Training[V.Train-Idx].Timestamp
  output logic       hit,
  output logic       reuse_inc,
  output logic       reuse_dec,
  output logic       pat_inc,
  output logic       scs_cand_valid,
  output line_addr_t scs_cand_addr,
  output tt_idx_t    scs_cand_tidx,
  output logic       replace,
  output logic       victim_reuse_dec,
  output logic       srate_inc,
  output logic       srate_dec
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  // Insertion threshold at SampleRate = 8: 2^32 * ENTRIES / MAX_SIZE.
  localparam logic [63:0] THRESH_BASE = (64'd1 << 32) * 64'(ENTRIES) / 64'(MAX_SIZE);

  hs_entry_t mem [SETS][WAYS];
  logic [SETS-1:0][WAYS-1:0] valid_q;

  logic [SW-1:0]       set_idx;
  logic [HS_TAG_W-1:0] key_tag;
  logic [WW-1:0]       hit_way, vic_way;
  hs_entry_t           a_ent, v_ent;
  logic [63:0]         thresh;
  logic                sample;

  assign set_idx = key_addr[SW-1:0];
  assign key_tag = HS_TAG_W'(key_addr >> SW);

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && valid_q[set_idx][w] && mem[set_idx][w].tag == key_tag &&
          mem[set_idx][w].tidx == key_tidx) begin
        hit     = 1'b1;
        hit_way = WW'(w);
      end
    end
    // victim: first invalid way, else a random one
    vic_way = WW'(rand_val[31:31-WW+1] % WAYS);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid_q[set_idx][w]) vic_way = WW'(w);
    a_ent = mem[set_idx][hit_way];
    a_ent.valid = valid_q[set_idx][hit_way];
    v_ent = mem[set_idx][vic_way];
    v_ent.valid = valid_q[set_idx][vic_way];
  end

  assign victim_tidx = v_ent.tidx;

  always_comb begin
    if (sample_rate >= CNT_INIT) thresh = THRESH_BASE << (sample_rate - CNT_INIT);
    else                         thresh = THRESH_BASE >> (CNT_INIT - sample_rate);
    sample = {32'd0, rand_val} < thresh;
  end

  always_comb begin
    reuse_inc        = 1'b0;
    reuse_dec        = 1'b0;
    pat_inc          = 1'b0;
    scs_cand_valid   = 1'b0;
    scs_cand_addr    = a_ent.target;
    scs_cand_tidx    = a_ent.tidx;
    replace          = 1'b0;
    victim_reuse_dec = 1'b0;
    srate_inc        = 1'b0;
    srate_dec        = 1'b0;
    if (req_valid) begin
      if (hit) begin
        if ((cur_ts - a_ent.ts) < TS_W'(MAX_SIZE)) reuse_inc = 1'b1;
        else if (!a_ent.accessed)                  reuse_dec = 1'b1;
        if (a_ent.target == cur_addr) pat_inc = 1'b1;
        else                          scs_cand_valid = 1'b1;
      end else if (sample) begin
        replace = 1'b1;
        if (v_ent.valid) begin
          if ((victim_tt_ts - v_ent.ts) > TS_W'(MAX_SIZE)) begin
            victim_reuse_dec = !v_ent.accessed;
            srate_inc        = 1'b1;
          end else if (!v_ent.accessed) begin
            srate_dec = 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (req_valid && hit) begin
      mem[set_idx][hit_way].accessed <= 1'b1;
      mem[set_idx][hit_way].target   <= cur_addr;
    end else if (replace) begin
      mem[set_idx][vic_way] <= '{valid: 1'b1, tag: key_tag, tidx: key_tidx,
                                 target: cur_addr, ts: cur_ts, accessed: 1'b0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       valid_q <= '0;
    else if (replace) valid_q[set_idx][vic_way] <= 1'b1;
  end
endmodule
