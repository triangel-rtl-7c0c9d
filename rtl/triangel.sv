// triangel -- top level of the Triangel temporal prefetcher.
//
// Triangel sits beside a private L2 cache. Every L2 miss or first hit on a
// prefetched line (a "training access": PC + physical address) trains a
// per-PC history and a Markov table of (x -> y) successor pairs kept in a
// partition of the L3; the same access looks its own address up in that table
// and prefetches the recorded successors. Unlike earlier on-chip temporal
// prefetchers it first *measures*, per PC and by random sampling, whether the
// PC's pattern repeats soon enough to fit in the table (ReuseConf) and
// whether a recorded successor really follows (PatternConf), and only stores
// metadata and prefetches for PCs that pass. Confident PCs switch to
// lookahead 2 (store x -> z for x, y, z) and degree 4 (chained lookups).
//
// Blocks: training_table, history_sampler, second_chance_sampler,
// aggression_control (counter rules), metadata_reuse_buffer (chained-lookup
// and update filter), markov_partition (the table in the L3 ways),
// set_dueller (partition size), lcg32 (random source).
//
// One training access at a time, in this order (a design choice; the
// published design gives the rules but not a schedule):
//   1 read the PC's entry; a new PC is allocated and nothing else happens;
//   2 History Sampler access/replace on LastAddr[0] (1 cycle);
//   3 if the sampler's old target mismatches, probe the L2 for it (request on
//     l2_probe_*, answer on l2_probe_hit in the next cycle) and, if absent,
//     insert it in the Second-Chance Sampler;
//   4 Second-Chance check of the current address;
//   5 write the entry back: counters, LastAddr shift, timestamp + 1;
//   6 apply counter penalties to other PCs named by a sampler victim;
//   7 if the PC is confident: Markov update (LastAddr[1] or LastAddr[0] ->
//     current), skipped when the Reuse Buffer shows it would change nothing;
//   8 if confident: up to `degree` chained lookups, each served by the Reuse
//     Buffer or by the L3 (25 cycles), each issuing a prefetch on pf_*
//     (valid/ready; back-pressure stalls the engine). While the partition
//     has 0 ways the Reuse Buffer's copies are not used (the table they
//     mirror is gone), so no prefetches are issued.
// train_ready is high only between accesses. Addresses on the ports are
// 37-bit physical byte addresses; the low 6 bits are ignored on input and
// zero on output. markov_ways tells the L3 how many of its ways (0..8) are
// reserved for the Markov table. `events` pulses one bit per mechanism.
//
// Lint notes: the sampler's candidate Train-Idx output is left open because a
// sampler hit already requires Train-Idx equal to the current PC's index, so
// the registered index is used instead; unused bit ranges of the table entry
// structs are fields only other blocks read. The rst_n sync/async note comes
// from the `disable iff` of the handshake assertions, which are not logic.
module triangel
  import triangel_pkg::*;
#(
  parameter int unsigned TT_ENTRIES  = 512,
  parameter int unsigned HS_ENTRIES  = 512,
  parameter int unsigned SCS_ENTRIES = 64,
  parameter int unsigned SCS_WINDOW  = 512,
  parameter int unsigned MRB_ENTRIES = 256,
  parameter int unsigned L3_SETS     = 2048,
  parameter int unsigned MAX_WAYS    = 8,
  parameter int unsigned MK_LATENCY  = 25,
  parameter int unsigned DUEL_WINDOW = 500000,
  parameter int unsigned MAX_DEGREE  = 4,
  parameter logic [31:0] SEED        = 32'd12345
) (
  input  logic               clk,
  input  logic               rst_n,
  // training accesses from the L2
  input  logic               train_valid,
  output logic               train_ready,
  input  logic [PC_W-1:0]    train_pc,
  input  logic [PADDR_W-1:0] train_addr,
  // L2 presence probe ("is the sampled target already cached?")
  output logic               l2_probe_valid,
  output logic [PADDR_W-1:0] l2_probe_addr,
  input  logic               l2_probe_hit,
  // prefetch requests to the L2
  output logic               pf_valid,
  input  logic               pf_ready,
  output logic [PADDR_W-1:0] pf_addr,
  // partition size for the L3
  output logic [3:0]         markov_ways,
  output tri_events_t        events
);
  // Markov capacity at the maximum partition: 196608 entries by default.
  localparam int unsigned MAX_SIZE = L3_SETS * MAX_WAYS * 12;

  typedef enum logic [3:0] {
    S_IDLE, S_TT, S_HS, S_PROBE, S_PROBE_RSP, S_SCS, S_TT_WR, S_SIDE_V,
    S_SIDE_S, S_MK_UPD, S_MK_UPD_WAIT, S_PF_LK, S_PF_WAIT, S_PF_ISSUE
  } state_e;
  state_e state;

  // ---------------------------------------------------------- registers
  tt_idx_t          idx_q;
  logic [TAG_W-1:0] tag_q;
  line_addr_t       cur_q;
  tt_entry_t        ent_q;
  ts_t              gtime;
  logic             f_reuse_inc, f_reuse_dec, f_srate_inc, f_srate_dec;
  logic [1:0]       f_pat_inc, f_pat_dec;
  logic             v_pend, s_pend;
  tt_idx_t          v_idx, s_idx;
  line_addr_t       cand_q, mk_key, la_q, tgt_q;
  logic             en_q;
  logic [2:0]       deg_q, k_q;

  // ---------------------------------------------------------- sub-blocks
  logic [31:0] rnd;
  lcg32 #(.SEED(SEED)) u_lcg (.clk, .rst_n, .step(1'b1), .value(rnd));

  tt_idx_t   tt_a_idx, tt_b_idx, tt_wr_idx;
  tt_entry_t tt_a, tt_b, tt_wr;
  logic      tt_we;
  training_table #(.ENTRIES(TT_ENTRIES)) u_tt (
    .clk, .rst_n, .rd_a_idx(tt_a_idx), .rd_a_entry(tt_a), .rd_b_idx(tt_b_idx),
    .rd_b_entry(tt_b), .wr_en(tt_we), .wr_idx(tt_wr_idx), .wr_entry(tt_wr));

  logic       hs_req, hs_hit, hs_reuse_inc, hs_reuse_dec, hs_pat_inc;
  logic       hs_cand, hs_replace, hs_vdec, hs_sr_inc, hs_sr_dec;
  line_addr_t hs_cand_addr;
  tt_idx_t    hs_cand_tidx;
  history_sampler #(.ENTRIES(HS_ENTRIES), .WAYS(2), .MAX_SIZE(MAX_SIZE)) u_hs (
    .clk, .rst_n, .req_valid(hs_req), .key_addr(ent_q.last0), .key_tidx(idx_q),
    .cur_addr(cur_q), .cur_ts(ent_q.ts), .sample_rate(ent_q.srate), .rand_val(rnd),
    .victim_tidx(tt_b_idx), .victim_tt_ts(tt_b.ts), .hit(hs_hit),
    .reuse_inc(hs_reuse_inc), .reuse_dec(hs_reuse_dec), .pat_inc(hs_pat_inc),
    .scs_cand_valid(hs_cand), .scs_cand_addr(hs_cand_addr), .scs_cand_tidx(hs_cand_tidx),
    .replace(hs_replace), .victim_reuse_dec(hs_vdec), .srate_inc(hs_sr_inc),
    .srate_dec(hs_sr_dec));

  logic    scs_chk, scs_timely, scs_late, scs_ins, scs_pen;
  tt_idx_t scs_pen_idx;
  second_chance_sampler #(.ENTRIES(SCS_ENTRIES), .WINDOW(SCS_WINDOW)) u_scs (
    .clk, .rst_n, .now(gtime), .chk_valid(scs_chk), .chk_addr(cur_q), .chk_tidx(idx_q),
    .chk_timely(scs_timely), .chk_late(scs_late), .ins_valid(scs_ins),
    .ins_addr(cand_q), .ins_tidx(idx_q), .ins_evict_pen(scs_pen),
    .ins_evict_tidx(scs_pen_idx));

  tt_entry_t  ac_main_out, ac_side_out;
  logic       ac_en;
  logic [2:0] ac_deg;
  aggression_control #(.MAX_DEGREE(MAX_DEGREE)) u_ac_main (
    .in_entry(ent_q), .reuse_inc(f_reuse_inc), .reuse_dec(f_reuse_dec),
    .pat_inc(f_pat_inc), .pat_dec(f_pat_dec), .srate_inc(f_srate_inc),
    .srate_dec(f_srate_dec), .out_entry(ac_main_out), .enable(ac_en), .degree(ac_deg));

  logic       side_v;
  logic       side_en_unused;
  logic [2:0] side_deg_unused;
  assign side_v = (state == S_SIDE_V);
  aggression_control #(.MAX_DEGREE(MAX_DEGREE)) u_ac_side (
    .in_entry(tt_a), .reuse_inc(1'b0), .reuse_dec(side_v),
    .pat_inc(2'd0), .pat_dec({1'b0, !side_v}), .srate_inc(1'b0), .srate_dec(1'b0),
    .out_entry(ac_side_out), .enable(side_en_unused), .degree(side_deg_unused));

  line_addr_t mrb_lk_addr, mrb_wr_addr;
  logic       mrb_hit, mrb_we, mrb_alloc;
  mk_entry_t  mrb_ent, mrb_wr_ent;
  logic       mrb_use;     // buffer hit that may be trusted: a 0-way
                           // partition holds no entries to mirror
  metadata_reuse_buffer #(.ENTRIES(MRB_ENTRIES), .WAYS(2)) u_mrb (
    .clk, .rst_n, .lk_addr(mrb_lk_addr), .lk_hit(mrb_hit), .lk_entry(mrb_ent),
    .wr_valid(mrb_we), .wr_alloc(mrb_alloc), .wr_addr(mrb_wr_addr), .wr_entry(mrb_wr_ent));

  logic       mk_req, mk_ready, mk_resp, mk_hit, mk_rearr;
  mk_op_e     mk_op;
  line_addr_t mk_addr;
  mk_entry_t  mk_ent;
  markov_partition #(.SETS(L3_SETS), .MAX_WAYS(MAX_WAYS), .ENTRIES_PER_LINE(12),
                     .LATENCY(MK_LATENCY), .INIT_WAYS(MAX_WAYS)) u_mk (
    .clk, .rst_n, .ways(markov_ways), .req_valid(mk_req), .req_ready(mk_ready),
    .req_op(mk_op), .req_addr(mk_addr), .req_target(cur_q), .resp_valid(mk_resp),
    .resp_hit(mk_hit), .resp_entry(mk_ent), .rearrange(mk_rearr));

  logic       duel_c, duel_m, duel_end;
  logic [MAX_WAYS:0][31:0] duel_hits_unused;
  set_dueller #(.SETS(L3_SETS), .SAMPLED_SETS(64), .CACHE_WAYS(16), .MAX_WAYS(MAX_WAYS),
                .WINDOW(DUEL_WINDOW), .DENSITY(12), .BIAS(2), .INIT_WAYS(MAX_WAYS)) u_duel (
    .clk, .rst_n, .cache_valid(duel_c), .cache_addr(line_of(train_addr)),
    .mk_valid(duel_m), .mk_addr(la_q), .ways(markov_ways), .window_end(duel_end),
    .hits(duel_hits_unused));

  // ---------------------------------------------------------- control
  logic accept;
  assign train_ready = (state == S_IDLE);
  assign accept      = train_valid && train_ready;
  assign duel_c      = accept;

  always_comb begin
    tt_a_idx = idx_q;
    if (state == S_SIDE_V) tt_a_idx = v_idx;
    if (state == S_SIDE_S) tt_a_idx = s_idx;
    hs_req  = (state == S_HS);
    scs_chk = (state == S_SCS);
    scs_ins = (state == S_PROBE_RSP) && !l2_probe_hit;
    l2_probe_valid = (state == S_PROBE);
    l2_probe_addr  = {cand_q, 6'b0};
    pf_valid = (state == S_PF_ISSUE);
    pf_addr  = {tgt_q, 6'b0};
    // training-table write port
    tt_we     = 1'b0;
    tt_wr_idx = idx_q;
    tt_wr     = ac_main_out;
    tt_wr.last0 = cur_q;
    tt_wr.last1 = ent_q.last0;
    tt_wr.ts    = ent_q.ts + 1'b1;
    case (state)
      S_TT: if (!tt_a.valid || tt_a.pc_tag != tag_q) begin
        tt_we = 1'b1;
        tt_wr = '{valid: 1'b1, pc_tag: tag_q, last0: cur_q, last1: '0, ts: '0,
                  reuse: CNT_INIT, base: CNT_INIT, high: CNT_INIT, srate: CNT_INIT,
                  look: 1'b0};
      end
      S_TT_WR: tt_we = 1'b1;
      S_SIDE_V, S_SIDE_S: begin
        tt_we     = tt_a.valid;
        tt_wr_idx = tt_a_idx;
        tt_wr     = ac_side_out;
      end
      default: ;
    endcase
    // Reuse Buffer and Markov partition
    mrb_lk_addr = (state == S_MK_UPD) ? mk_key : la_q;
    mrb_use     = mrb_hit && (markov_ways != 4'd0);
    mrb_we      = 1'b0;
    mrb_alloc   = 1'b0;
    mrb_wr_addr = (state == S_MK_UPD_WAIT) ? mk_key : la_q;
    mrb_wr_ent  = mk_ent;
    mk_req  = 1'b0;
    mk_op   = MK_LOOKUP;
    mk_addr = la_q;
    duel_m  = 1'b0;
    case (state)
      S_MK_UPD: if (en_q && !(mrb_use && mrb_ent.target == cur_q && mrb_ent.conf)) begin
        mk_req  = 1'b1;
        mk_op   = MK_UPDATE;
        mk_addr = mk_key;
      end
      S_MK_UPD_WAIT: mrb_we = mk_resp;
      S_PF_LK: begin
        mk_req = !mrb_use;
        duel_m = mrb_use || mk_ready;
      end
      S_PF_WAIT: begin
        mrb_we    = mk_resp && mk_hit;
        mrb_alloc = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx_q <= '0; tag_q <= '0; cur_q <= '0; ent_q <= '0; gtime <= '0;
      f_reuse_inc <= 1'b0; f_reuse_dec <= 1'b0; f_srate_inc <= 1'b0; f_srate_dec <= 1'b0;
      f_pat_inc <= '0; f_pat_dec <= '0;
      v_pend <= 1'b0; s_pend <= 1'b0; v_idx <= '0; s_idx <= '0;
      cand_q <= '0; mk_key <= '0; la_q <= '0; tgt_q <= '0;
      en_q <= 1'b0; deg_q <= 3'd1; k_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (accept) begin
          idx_q <= pc_index(train_pc);
          tag_q <= pc_tag(train_pc);
          cur_q <= line_of(train_addr);
          gtime <= gtime + 1'b1;
          state <= S_TT;
        end
        S_TT: begin
          ent_q <= tt_a;
          f_reuse_inc <= 1'b0; f_reuse_dec <= 1'b0; f_srate_inc <= 1'b0; f_srate_dec <= 1'b0;
          f_pat_inc <= '0; f_pat_dec <= '0; v_pend <= 1'b0; s_pend <= 1'b0;
          state <= (tt_a.valid && tt_a.pc_tag == tag_q) ? S_HS : S_IDLE;
        end
        S_HS: begin
          f_reuse_inc <= hs_reuse_inc;
          f_reuse_dec <= hs_reuse_dec;
          f_pat_inc   <= {1'b0, hs_pat_inc};
          f_srate_inc <= hs_sr_inc;
          f_srate_dec <= hs_sr_dec;
          v_pend      <= hs_vdec;
          v_idx       <= tt_b_idx;
          cand_q      <= hs_cand_addr;
          state       <= hs_cand ? S_PROBE : S_SCS;
        end
        S_PROBE: state <= S_PROBE_RSP;
        S_PROBE_RSP: begin
          if (scs_ins && scs_pen) begin
            s_pend <= 1'b1;
            s_idx  <= scs_pen_idx;
          end
          state <= S_SCS;
        end
        S_SCS: begin
          if (scs_timely) f_pat_inc <= f_pat_inc + 2'd1;
          if (scs_late)   f_pat_dec <= f_pat_dec + 2'd1;
          state <= S_TT_WR;
        end
        S_TT_WR: begin
          mk_key <= ac_main_out.look ? ent_q.last1 : ent_q.last0;
          en_q   <= ac_en;
          deg_q  <= ac_deg;
          state  <= v_pend ? S_SIDE_V : (s_pend ? S_SIDE_S : S_MK_UPD);
        end
        S_SIDE_V: state <= s_pend ? S_SIDE_S : S_MK_UPD;
        S_SIDE_S: state <= S_MK_UPD;
        S_MK_UPD: begin
          la_q <= cur_q;
          k_q  <= '0;
          if (!en_q)        state <= S_IDLE;
          else if (!mk_req) state <= S_PF_LK;
          else if (mk_ready) state <= S_MK_UPD_WAIT;
        end
        S_MK_UPD_WAIT: if (mk_resp) state <= S_PF_LK;
        S_PF_LK: begin
          if (mrb_use) begin
            tgt_q <= mrb_ent.target;
            state <= S_PF_ISSUE;
          end else if (mk_ready) begin
            state <= S_PF_WAIT;
          end
        end
        S_PF_WAIT: if (mk_resp) begin
          tgt_q <= mk_ent.target;
          state <= mk_hit ? S_PF_ISSUE : S_IDLE;
        end
        S_PF_ISSUE: if (pf_ready) begin
          if (k_q + 3'd1 >= deg_q) begin
            state <= S_IDLE;
          end else begin
            k_q   <= k_q + 3'd1;
            la_q  <= tgt_q;
            state <= S_PF_LK;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------- events
  always_comb begin
    events = '0;
    events.train         = accept;
    events.tt_alloc      = (state == S_TT) && tt_we;
    events.hs_hit        = hs_req && hs_hit;
    events.hs_replace    = hs_replace;
    events.l2_present    = (state == S_PROBE_RSP) && l2_probe_hit;
    events.scs_insert    = scs_ins;
    events.scs_timely    = scs_timely;
    events.scs_late      = scs_late;
    events.scs_evict_pen = scs_ins && scs_pen;
    events.gated         = (state == S_MK_UPD) && !en_q;
    events.mk_update     = (state == S_MK_UPD) && mk_req && mk_ready;
    events.mk_upd_skip   = (state == S_MK_UPD) && en_q && !mk_req;
    events.mrb_hit       = (state == S_PF_LK) && mrb_use;
    events.mk_lookup     = (state == S_PF_LK) && mk_req && mk_ready;
    events.pf_issue      = pf_valid && pf_ready;
    events.pf_stall      = pf_valid && !pf_ready;
    events.deg4          = (state == S_TT_WR) && ac_en && (ac_deg > 3'd1);
    events.look2         = (state == S_TT_WR) && ac_en && ac_main_out.look;
    events.window_end    = duel_end;
    events.rearrange     = mk_rearr;
  end

  // ---------------------------------------------------------- checks
  a_pf_hold: assert property (@(posedge clk) disable iff (!rst_n)
    pf_valid && !pf_ready |=> pf_valid && $stable(pf_addr));
  a_ways: assert property (@(posedge clk) disable iff (!rst_n)
    markov_ways <= 4'(MAX_WAYS));
endmodule
