// set_dueller -- Triangel's Set Dueller, which sizes the Markov partition.
//
// The L3 is shared between ordinary data and Markov metadata; each way given
// to the Markov table costs data hits. The dueller estimates, for every
// partition size m = 0..MAX_WAYS, how many hits the pair (data cache of
// CACHE_WAYS-m ways, Markov table of m ways) would have had, and picks the
// best at the end of every window.
//
// It samples SAMPLED_SETS (64) of the L3's SETS sets and keeps, per sampled
// set, CACHE_WAYS (16) data-line tags and MAX_WAYS (8) Markov tags, all 10-bit
// hashes, each list in LRU order (position 0 = most recent). Both models are
// full size and independent of the real partition.
//   * cache_valid: a training access (L2 miss / prefetch hit). A hit at LRU
//     position p would also hit in a data cache of p+1 ways or more, so
//     Hits[m] += 1 for m = 0 .. min(MAX_WAYS, CACHE_WAYS-1-p).
//   * mk_valid: a Markov lookup. Only 1 in DENSITY of these is modelled
//     (line-address bits [30:11] mod DENSITY == 0) to match the 12-entries-
//     per-line density; a hit at position p would hit with p+1 or more Markov
//     ways, so Hits[m] += DENSITY/BIAS for m = p+1 .. MAX_WAYS.
// After WINDOW training accesses `ways` takes the index of the largest
// counter (the smaller m on a tie), the counters clear and window_end pulses.
//
// Published: 64 sets, 16+8 tags of 10 bits, LRU model, hit rules, 9 32-bit
// counters, 1/12 Markov sampling weighted 12/B with B = 2, 500000 window.
// This design's choices: which sets are sampled (every SETS/SAMPLED_SETS-th
// set, offset SAMPLE_KEY), the 1/12 selection rule, the tag hash, counting
// the window in training accesses, tie-breaking and INIT_WAYS.
module set_dueller
  import triangel_pkg::*;
#(
  parameter int unsigned SETS         = 2048,
  parameter int unsigned SAMPLED_SETS = 64,
  parameter int unsigned CACHE_WAYS   = 16,
  parameter int unsigned MAX_WAYS     = 8,
  parameter int unsigned WINDOW       = 500000,
  parameter int unsigned DENSITY      = 12,
  parameter int unsigned BIAS         = 2,
  parameter int unsigned SAMPLE_KEY   = 21,
  parameter int unsigned INIT_WAYS    = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cache_valid,
  input  line_addr_t cache_addr,
  input  logic       mk_valid,
  input  line_addr_t mk_addr,
  output logic [3:0] ways,
  output logic       window_end,
  output logic [MAX_WAYS:0][31:0] hits
);
  localparam int unsigned STRIDE = SETS / SAMPLED_SETS;
  localparam int unsigned SW     = $clog2(SETS);
  localparam int unsigned QW     = (SAMPLED_SETS > 1) ? $clog2(SAMPLED_SETS) : 1;
  localparam logic [31:0] MK_WEIGHT = 32'(DENSITY / BIAS);

  typedef logic [TAG_W:0] vtag_t;   // {valid, tag}

  vtag_t ctag [SAMPLED_SETS][CACHE_WAYS];
  vtag_t mtag [SAMPLED_SETS][MAX_WAYS];
  logic [31:0] win_cnt;

  function automatic logic is_sampled(input line_addr_t a);
    return (STRIDE <= 1) || (32'(a[SW-1:0]) % STRIDE == SAMPLE_KEY);
  endfunction

  function automatic logic [QW-1:0] sample_idx(input line_addr_t a);
    return QW'(32'(a[SW-1:0]) / STRIDE);
  endfunction

  function automatic logic [31:0] sat_add(input logic [31:0] a, input logic [31:0] b);
    logic [32:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[32] ? 32'hFFFF_FFFF : s[31:0];
  endfunction

  logic [QW-1:0]  cq, mq;
  logic           c_samp, m_samp, c_hit, m_hit;
  int unsigned    c_pos, m_pos;
  logic [MAX_WAYS:0][31:0] inc;
  logic [3:0]     best;

  always_comb begin
    cq     = sample_idx(cache_addr);
    mq     = sample_idx(mk_addr);
    c_samp = cache_valid && is_sampled(cache_addr);
    m_samp = mk_valid && is_sampled(mk_addr) && (32'(mk_addr[30:11]) % DENSITY == 0);
    c_hit = 1'b0; c_pos = CACHE_WAYS - 1;
    for (int i = 0; i < CACHE_WAYS; i++)
      if (!c_hit && ctag[cq][i] == {1'b1, mk_tag(cache_addr)}) begin c_hit = 1'b1; c_pos = i; end
    m_hit = 1'b0; m_pos = MAX_WAYS - 1;
    for (int i = 0; i < MAX_WAYS; i++)
      if (!m_hit && mtag[mq][i] == {1'b1, mk_tag(mk_addr)}) begin m_hit = 1'b1; m_pos = i; end
    inc = '0;
    for (int m = 0; m <= MAX_WAYS; m++) begin
      if (c_samp && c_hit && (m + c_pos <= CACHE_WAYS - 1)) inc[m] = inc[m] + 32'd1;
      if (m_samp && m_hit && (m >= m_pos + 1))           inc[m] = inc[m] + MK_WEIGHT;
    end
    best = '0;
    for (int m = 1; m <= MAX_WAYS; m++)
      if (hits[m] > hits[best]) best = 4'(m);
  end

  // LRU stacks: move the accessed tag to position 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SAMPLED_SETS; s++) begin
        for (int i = 0; i < CACHE_WAYS; i++) ctag[s][i] <= '0;
        for (int i = 0; i < MAX_WAYS; i++)   mtag[s][i] <= '0;
      end
    end else begin
      if (c_samp) begin
        for (int i = 1; i < CACHE_WAYS; i++)
          if (i <= int'(c_pos)) ctag[cq][i] <= ctag[cq][i-1];
        ctag[cq][0] <= {1'b1, mk_tag(cache_addr)};
      end
      if (m_samp) begin
        for (int i = 1; i < MAX_WAYS; i++)
          if (i <= int'(m_pos)) mtag[mq][i] <= mtag[mq][i-1];
        mtag[mq][0] <= {1'b1, mk_tag(mk_addr)};
      end
    end
  end

  // hit counters and window
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hits       <= '0;
      win_cnt    <= '0;
      ways       <= 4'(INIT_WAYS);
      window_end <= 1'b0;
    end else begin
      window_end <= 1'b0;
      if (cache_valid && win_cnt == 32'(WINDOW - 1)) begin
        ways       <= best;
        hits       <= '0;
        win_cnt    <= '0;
        window_end <= 1'b1;
      end else begin
        if (cache_valid) win_cnt <= win_cnt + 32'd1;
        for (int m = 0; m <= MAX_WAYS; m++) hits[m] <= sat_add(hits[m], inc[m]);
      end
    end
  end
endmodule
