// second_chance_sampler -- Triangel's Second-Chance Sampler (SCS).
//
// When the History Sampler finds x followed by z although it had recorded
// (x, y), a prefetch of y might still have been useful if y is touched soon
// after. The SCS holds such y's with the PC's Train-Idx and the global time
// at insertion. A later training access to y from the same PC (chk port)
// that comes within WINDOW global accesses counts as a useful prefetch
// (chk_timely: PatternConf up); one that comes later counts as useless
// (chk_late: PatternConf down). Each entry is judged once (Seen bit). An
// entry overwritten before it was seen is also useless (ins_evict_pen, with
// the owner's Train-Idx in ins_evict_tidx).
//
// ENTRIES entries, fully associative search, FIFO insertion -- the
// organisation and the FIFO order are this design's choice; sizes, fields and
// the 512 window are the published ones. Check and insert may both be used in
// one cycle; outputs are combinational, state changes on the clock edge.
module second_chance_sampler
  import triangel_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned WINDOW  = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ts_t        now,           // global training-access count
  // check port
  input  logic       chk_valid,
  input  line_addr_t chk_addr,
  input  tt_idx_t    chk_tidx,
  output logic       chk_timely,
  output logic       chk_late,
  // insert port
  input  logic       ins_valid,
  input  line_addr_t ins_addr,
  input  tt_idx_t    ins_tidx,
  output logic       ins_evict_pen,
  output tt_idx_t    ins_evict_tidx
);
  localparam int unsigned IW = $clog2(ENTRIES);

  scs_entry_t mem [ENTRIES];
  logic [ENTRIES-1:0] valid_q, seen_q;
  logic [IW-1:0]      wptr;
  logic               chk_hit;
  logic [IW-1:0]      chk_idx;

  always_comb begin
    chk_hit = 1'b0;
    chk_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (!chk_hit && valid_q[i] && !seen_q[i] && mem[i].addr == chk_addr &&
          mem[i].tidx == chk_tidx) begin
        chk_hit = 1'b1;
        chk_idx = IW'(i);
      end
    end
    chk_timely = chk_valid && chk_hit && ((now - mem[chk_idx].ts) <= TS_W'(WINDOW));
    chk_late   = chk_valid && chk_hit && ((now - mem[chk_idx].ts) >  TS_W'(WINDOW));
    ins_evict_pen  = ins_valid && valid_q[wptr] && !seen_q[wptr];
    ins_evict_tidx = mem[wptr].tidx;
  end

  always_ff @(posedge clk) begin
    if (ins_valid)
      mem[wptr] <= '{valid: 1'b1, addr: ins_addr, tidx: ins_tidx, ts: now, seen: 1'b0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      seen_q  <= '0;
      wptr    <= '0;
    end else begin
      if (chk_valid && chk_hit) seen_q[chk_idx] <= 1'b1;
      if (ins_valid) begin
        valid_q[wptr] <= 1'b1;
        seen_q[wptr]  <= 1'b0;
        wptr          <= (wptr == IW'(ENTRIES - 1)) ? '0 : wptr + 1'b1;
      end
    end
  end
endmodule
