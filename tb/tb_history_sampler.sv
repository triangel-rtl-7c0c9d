// tb_history_sampler -- directed scenarios for the Access and Replace paths
// of the History Sampler, with expected outcomes worked out by hand from the
// sampling rules, and the sampling threshold checked at its boundary.
//
// How: single operations are presented with req_valid for one cycle; the
// combinational outcome flags (hit, ReuseConf/PatternConf/SampleRate
// requests, second-chance candidate, replacement) are captured 1 time unit
// later and compared with values derived by hand; state is written on the
// clock edge. rand_val is driven directly, so sampling is deterministic:
// values just below and at the threshold 2^32*512/196608*2^(SampleRate-8)
// must and must not sample. The rules checked are the published
// pseudocode; the set/tag split, the victim choice and the random-input
// port are this design's and are checked as built. Watchdog included.
module tb_history_sampler;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req;
  line_addr_t key, cur, cand;
  tt_idx_t tidx, vtidx, ctidx;
  ts_t cts, vts;
  cnt_t sr;
  logic [31:0] rnd;
  logic hit, ri, rd, pi, cv, rep, vrd, si, sd;
  int checks = 0, failures = 0;
  line_addr_t cand_seen;
  tt_idx_t    ctidx_seen;
  localparam longint unsigned THR = (64'd1 << 32) * 512 / 196608;

  history_sampler #(.ENTRIES(512), .WAYS(2), .MAX_SIZE(196608)) dut (
    .clk, .rst_n, .req_valid(req), .key_addr(key), .key_tidx(tidx), .cur_addr(cur),
    .cur_ts(cts), .sample_rate(sr), .rand_val(rnd), .victim_tidx(vtidx),
    .victim_tt_ts(vts), .hit, .reuse_inc(ri), .reuse_dec(rd), .pat_inc(pi),
    .scs_cand_valid(cv), .scs_cand_addr(cand), .scs_cand_tidx(ctidx), .replace(rep),
    .victim_reuse_dec(vrd), .srate_inc(si), .srate_dec(sd));
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected {hit, ri, rd, pi, cv, rep, vrd, si, sd}
  task automatic op(input line_addr_t k, input tt_idx_t t, input line_addr_t c,
                    input ts_t ts, input cnt_t s, input logic [31:0] r, input ts_t vt,
                    input logic [8:0] exp, input string what);
    @(negedge clk);
    req = 1'b1; key = k; tidx = t; cur = c; cts = ts; sr = s; rnd = r; vts = vt;
    #1;
    cand_seen = cand; ctidx_seen = ctidx;
    checks++;
    if ({hit, ri, rd, pi, cv, rep, vrd, si, sd} != exp) begin
      failures++;
      $display("%s: got %b expected %b", what, {hit, ri, rd, pi, cv, rep, vrd, si, sd}, exp);
    end
    @(posedge clk);
    #1 req = 1'b0;
  endtask

  initial begin
    req = 1'b0; key = '0; cur = '0; tidx = '0; cts = '0; sr = 4'd8; rnd = '0; vts = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // A: sample (x=0x100 -> y=0x200) for PC index 5; empty set, no victim effects
    op(31'h101, 9'd5, 31'h200, 32'd10, 4'd8, 32'd0, 32'd0, 9'b000001000, "first insert");
    // no sampling when the draw is above the threshold
    op(31'h302, 9'd5, 31'h200, 32'd10, 4'd8, 32'(THR), 32'd0, 9'b000000000, "threshold miss");
    op(31'h302, 9'd5, 31'h200, 32'd10, 4'd8, 32'(THR - 1), 32'd0, 9'b000001000, "threshold hit");
    op(31'h403, 9'd5, 31'h200, 32'd10, 4'd7, 32'(THR / 2), 32'd0, 9'b000000000, "rate 7 miss");
    op(31'h403, 9'd5, 31'h200, 32'd10, 4'd9, 32'(2 * THR - 1), 32'd0, 9'b000001000, "rate 9 is x2");
    // another PC index does not see PC 5's sample
    op(31'h101, 9'd6, 31'h200, 32'd10, 4'd8, 32'hFFFF_FFFF, 32'd0, 9'b000000000, "tidx mismatch");
    // repeat: x followed by y again, short distance -> ReuseConf++, PatternConf++
    op(31'h101, 9'd5, 31'h200, 32'd50, 4'd8, 32'hFFFF_FFFF, 32'd0, 9'b110100000, "repeat match");
    // x followed by z: reuse++, old target y offered to second chance
    op(31'h101, 9'd5, 31'h333, 32'd60, 4'd8, 32'hFFFF_FFFF, 32'd0, 9'b110010000, "mismatch");
    checks++; if (cand_seen != 31'h200 || ctidx_seen != 9'd5) begin failures++; $display("cand %h", cand_seen); end
    // target was updated to z
    op(31'h101, 9'd5, 31'h333, 32'd70, 4'd8, 32'hFFFF_FFFF, 32'd0, 9'b110100000, "target updated");
    // long distance on an accessed entry: no reuse change
    op(31'h101, 9'd5, 31'h333, 32'd70 + 32'd196608, 4'd8, 32'hFFFF_FFFF, 32'd0, 9'b100100000, "far accessed");
    // fresh entry accessed from far away -> ReuseConf--
    op(31'h302, 9'd5, 31'h200, 32'd10 + 32'd200000, 4'd8, 32'hFFFF_FFFF, 32'd0, 9'b101100000, "far unaccessed");
    // fill set 0x00 both ways: keys 0x000 and 0x10000 (same set, different tags)
    op(31'h000, 9'd7, 31'h1, 32'd100, 4'd8, 32'd0, 32'd0, 9'b000001000, "fill w0");
    op(31'h10100, 9'd8, 31'h2, 32'd200, 4'd8, 32'd0, 32'd0, 9'b000001000, "fill w1");
    // replace, victim young and unaccessed -> current SampleRate--
    op(31'h20000, 9'd9, 31'h3, 32'd300, 4'd8, 32'd0, 32'd150, 9'b000001001, "victim young");
    // the victim of a random draw is old and unaccessed (its PC's clock moved on)
    op(31'h30200, 9'd9, 31'h4, 32'd300, 4'd8, 32'd0, 32'd300 + 32'd196609, 9'b000001110, "victim old");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
