// markov_partition -- the Markov table, held in the ways of the L3 cache
// that are reserved for prefetch metadata.
//
// Each reserved 64-byte line holds ENTRIES_PER_LINE (12) compressed entries
// of {Tag# 10b, Target 31b, Conf 1b} = 42 bits. An entry for lookup address x
// lives in L3 set x[10:0], in the line (way) Tag#(x) % Partition_Ways of that
// set, so one access reads exactly one line, searched 12-way by Tag#. The
// target is stored whole; the prefetch address is Target << 6.
//
// Operations (one at a time, req/ready handshake, response after LATENCY
// cycles -- 20 cycles of L3 access plus 5 of metadata handling):
//   MK_LOOKUP x      -> resp_hit, resp_entry (the stored target).
//   MK_UPDATE x, y   -> if x is present: same target sets Conf; a different
//                       target replaces it when Conf is 0, otherwise clears
//                       Conf. If x is absent a new entry (Conf 0) is placed
//                       by SRRIP. resp_entry returns the entry as written.
// Replacement is SRRIP with a 2-bit RRPV per entry (insert 2, hit 0). The
// valid and RRPV bits and the per-set indexing policy (the way count the set
// was last arranged for) are kept in arrays beside the data; in a real L3
// they occupy otherwise unused line tag bits.
//
// Resizing: `ways` (0..MAX_WAYS) comes from the Set Dueller. When an access
// finds its set arranged for a different way count, the set is first
// rearranged, one entry per cycle: lines that were not Markov lines before
// are cleared, and every entry not in line Tag# % ways is moved there (or
// dropped when the partition shrinks to 0). With 0 ways, lookups miss and
// updates are dropped. After reset an internal sweep clears all sets
// (SETS cycles, req_ready low) and arranges them for INIT_WAYS.
//
// Published: entry format, 12 per line, set/sub-set indexing, confidence
// rule, SRRIP, lazy per-set rearrangement, 25-cycle latency, 8 of 16 ways.
// This design's choices: clearing Conf on a mismatch, the order and cost of
// rearrangement, serving the access after it, INIT_WAYS, a 4-bit policy field.
module markov_partition
  import triangel_pkg::*;
#(
  parameter int unsigned SETS             = 2048,
  parameter int unsigned MAX_WAYS         = 8,
  parameter int unsigned ENTRIES_PER_LINE = 12,
  parameter int unsigned LATENCY          = 25,
  parameter int unsigned INIT_WAYS        = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] ways,          // current partition size, 0..MAX_WAYS
  input  logic       req_valid,
  output logic       req_ready,
  input  mk_op_e     req_op,
  input  line_addr_t req_addr,      // lookup address x
  input  line_addr_t req_target,    // target y (updates)
  output logic       resp_valid,
  output logic       resp_hit,
  output mk_entry_t  resp_entry,
  output logic       rearrange      // pulse: a set is being rearranged
);
  localparam int unsigned EPL = ENTRIES_PER_LINE;
  localparam int unsigned SW  = $clog2(SETS);
  localparam int unsigned LW  = $clog2(MAX_WAYS);
  localparam int unsigned EW  = $clog2(EPL);

  typedef struct packed {
    logic [EPL-1:0]            v;
    logic [EPL-1:0][1:0]       r;
    mk_entry_t [EPL-1:0]       e;
  } line_t;

  typedef struct packed {
    logic [MAX_WAYS-1:0][EPL-1:0]      v;
    logic [MAX_WAYS-1:0][EPL-1:0][1:0] r;
  } set_meta_t;

  // storage: the reserved L3 ways, their tag-side bits, per-set policy
  logic [EPL*MK_ENTRY_W-1:0] data [SETS*MAX_WAYS];
  set_meta_t                 meta [SETS];
  logic [3:0]                pol  [SETS];

  // SRRIP insertion into a line
  function automatic line_t line_insert(input line_t l, input mk_entry_t e);
    line_t o;
    logic  found;
    logic [1:0] maxr;
    int unsigned slot;
    o     = l;
    found = 1'b0;
    slot  = 0;
    for (int i = 0; i < EPL; i++)
      if (!found && !l.v[i]) begin found = 1'b1; slot = i; end
    if (!found) begin
      maxr = '0;
      for (int i = 0; i < EPL; i++) if (l.r[i] > maxr) maxr = l.r[i];
      for (int i = 0; i < EPL; i++) o.r[i] = l.r[i] + (2'd3 - maxr);
      for (int i = EPL - 1; i >= 0; i--) if (o.r[i] == 2'd3) slot = i;
    end
    o.v[slot] = 1'b1;
    o.r[slot] = 2'd2;
    o.e[slot] = e;
    return o;
  endfunction

  function automatic logic [LW-1:0] sub_of(input logic [TAG_W-1:0] t, input logic [3:0] n);
    return (n == 0) ? '0 : LW'(t % TAG_W'(n));
  endfunction

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_CLR, S_REARR, S_ACCESS, S_WAIT} state_e;
  state_e state;

  logic [SW-1:0]  init_cnt;
  mk_op_e         op_q;
  line_addr_t     addr_q, target_q;
  logic [3:0]     n_q;            // way count for this operation
  logic [SW-1:0]  set_q;
  logic [LW-1:0]  rl;             // rearrangement line
  logic [EW-1:0]  rs;             // rearrangement slot
  logic [7:0]     wait_cnt;
  logic           hit_q;
  mk_entry_t      ent_q;

  assign req_ready = (state == S_IDLE);
  assign rearrange = (state == S_CLR);

  // ---------------------------------------------------------- datapath
  set_meta_t  m_cur;
  line_t      src_l, dst_l, acc_l, new_l;
  logic [LW-1:0] dst, acc_sub;
  mk_entry_t  src_e;
  logic       acc_hit;
  mk_entry_t  acc_e;
  int unsigned acc_slot;

  // write-port controls
  logic                 d_we;
  logic [SW+LW-1:0]     d_wa;
  logic [EPL*MK_ENTRY_W-1:0] d_wd;
  logic                 m_we;
  set_meta_t            m_wd;

  function automatic line_t get_line(input set_meta_t m, input logic [LW-1:0] w,
                                     input logic [EPL*MK_ENTRY_W-1:0] d);
    line_t l;
    l.v = m.v[w];
    l.r = m.r[w];
    l.e = d;
    return l;
  endfunction

  always_comb begin
    m_cur   = meta[set_q];
    src_l   = get_line(m_cur, rl, data[{set_q, rl}]);
    src_e   = src_l.e[rs];
    dst     = sub_of(src_e.tag, n_q);
    acc_sub = sub_of(mk_tag(addr_q), n_q);
    acc_l   = get_line(m_cur, acc_sub, data[{set_q, acc_sub}]);
    dst_l   = '0;
    new_l   = acc_l;
    d_we = 1'b0; d_wa = '0; d_wd = '0;
    m_we = 1'b0; m_wd = m_cur;
    acc_hit  = 1'b0;
    acc_slot = 0;
    acc_e    = '0;
    for (int i = 0; i < EPL; i++)
      if (!acc_hit && acc_l.v[i] && acc_l.e[i].tag == mk_tag(addr_q)) begin
        acc_hit = 1'b1; acc_slot = i;
      end
    case (state)
      S_CLR: begin
        m_we = 1'b1;
        for (int w = 0; w < MAX_WAYS; w++)
          if (w >= int'(pol[set_q])) m_wd.v[w] = '0;
      end
      S_REARR: begin
        if (src_l.v[rs] && (n_q == 0 || {1'b0, rl} >= n_q || dst != rl)) begin
          m_we = 1'b1;
          m_wd.v[rl][rs] = 1'b0;
          if (n_q != 0) begin
            dst_l = get_line(m_wd, dst, data[{set_q, dst}]);
            dst_l = line_insert(dst_l, src_e);
            m_wd.v[dst] = dst_l.v;
            m_wd.r[dst] = dst_l.r;
            d_we = 1'b1;
            d_wa = {set_q, dst};
            d_wd = dst_l.e;
          end
        end
      end
      S_ACCESS: begin
        if (n_q != 0) begin
          if (op_q == MK_LOOKUP) begin
            if (acc_hit) begin
              acc_e = acc_l.e[acc_slot];
              new_l.r[acc_slot] = 2'd0;
              m_we = 1'b1;
            end
          end else begin
            if (acc_hit) begin
              acc_e = acc_l.e[acc_slot];
              if (acc_e.target == target_q) acc_e.conf = 1'b1;
              else if (!acc_e.conf)         acc_e.target = target_q;
              else                          acc_e.conf = 1'b0;
              new_l.e[acc_slot] = acc_e;
              new_l.r[acc_slot] = 2'd0;
            end else begin
              acc_e = '{tag: mk_tag(addr_q), target: target_q, conf: 1'b0};
              new_l = line_insert(acc_l, acc_e);
            end
            m_we = 1'b1;
            d_we = 1'b1;
            d_wa = {set_q, acc_sub};
            d_wd = new_l.e;
          end
          m_wd.v[acc_sub] = new_l.v;
          m_wd.r[acc_sub] = new_l.r;
        end
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------- memories
  always_ff @(posedge clk) begin
    if (d_we) data[d_wa] <= d_wd;
    if (state == S_INIT) begin
      meta[init_cnt] <= '0;
      pol[init_cnt]  <= 4'(INIT_WAYS);
    end else begin
      if (m_we) meta[set_q] <= m_wd;
      if (state == S_REARR && rl == LW'(MAX_WAYS - 1) && rs == EW'(EPL - 1))
        pol[set_q] <= n_q;
    end
  end

  // ---------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_cnt <= '0;
      op_q     <= MK_LOOKUP;
      addr_q   <= '0;
      target_q <= '0;
      n_q      <= '0;
      set_q    <= '0;
      rl       <= '0;
      rs       <= '0;
      wait_cnt <= '0;
      hit_q    <= 1'b0;
      ent_q    <= '0;
    end else begin
      case (state)
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == SW'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          op_q     <= req_op;
          addr_q   <= req_addr;
          target_q <= req_target;
          n_q      <= (ways > 4'(MAX_WAYS)) ? 4'(MAX_WAYS) : ways;
          set_q    <= req_addr[SW-1:0];
          rl       <= '0;
          rs       <= '0;
          if (pol[req_addr[SW-1:0]] != ((ways > 4'(MAX_WAYS)) ? 4'(MAX_WAYS) : ways))
            state <= S_CLR;
          else
            state <= S_ACCESS;
        end
        S_CLR: state <= S_REARR;
        S_REARR: begin
          if (rs == EW'(EPL - 1)) begin
            rs <= '0;
            if (rl == LW'(MAX_WAYS - 1)) state <= S_ACCESS;
            else                         rl <= rl + 1'b1;
          end else begin
            rs <= rs + 1'b1;
          end
        end
        S_ACCESS: begin
          hit_q    <= (n_q != 0) && acc_hit;
          ent_q    <= acc_e;
          wait_cnt <= 8'(LATENCY - 1);
          state    <= S_WAIT;
        end
        S_WAIT: begin
          if (wait_cnt == 0) state <= S_IDLE;
          else               wait_cnt <= wait_cnt - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign resp_valid = (state == S_WAIT) && (wait_cnt == 0);
  assign resp_hit   = hit_q;
  assign resp_entry = ent_q;

  // elaboration-time parameter checks
  if (LATENCY < 2 || LATENCY > 256) begin : g_bad_latency
    $error("markov_partition: LATENCY must be 2..256");
  end
  if (MAX_WAYS > 8 || (1 << LW) != MAX_WAYS) begin : g_bad_ways
    $error("markov_partition: MAX_WAYS must be a power of two up to 8");
  end
endmodule
