// tb_markov_partition -- Markov table in a reduced L3 (16 sets): update and
// lookup, the confidence rule, the 25-cycle latency, SRRIP replacement
// within a 12-entry line, and rearrangement after partition resizes.
//
// How: requests use the req_valid/req_ready handshake; the testbench counts
// cycles from acceptance to resp_valid and requires exactly 25. After the
// reset sweep, pairs are written and read back; the confidence sequence
// (same target sets Conf, a different target then only clears it, a second
// different target replaces) is walked through; 13 distinct keys in one
// line force an SRRIP eviction; the `ways` input is then changed (8 -> 3 ->
// 8 -> 0 -> 8) and entries must still be found where their new
// sub-set puts them, with the `rearrange` pulse counted. Published: entry
// format, latency, sub-set rule, confidence rule, SRRIP; clearing Conf on a
// mismatch and what survives a shrink are this design's. Watchdog included.
module tb_markov_partition;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] ways;
  logic rv, rr, pv, ph, rea;
  mk_op_e op;
  line_addr_t ra, rt;
  mk_entry_t pe;
  int checks = 0, failures = 0, rearr = 0;
  markov_partition #(.SETS(16), .MAX_WAYS(8), .ENTRIES_PER_LINE(12), .LATENCY(25),
                     .INIT_WAYS(8)) dut (.clk, .rst_n, .ways, .req_valid(rv), .req_ready(rr),
    .req_op(op), .req_addr(ra), .req_target(rt), .resp_valid(pv), .resp_hit(ph),
    .resp_entry(pe), .rearrange(rea));
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && rea) rearr++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // address with Markov tag t in set s (bits [10:4] zero, tag = bits [20:11])
  function automatic line_addr_t A(input int t, input int s);
    line_addr_t a;
    a = '0;
    a[3:0] = 4'(s);
    a[20:11] = 10'(t);
    return a;
  endfunction

  int lat;
  task automatic access(input mk_op_e o, input line_addr_t a, input line_addr_t t,
                        output logic hit, output mk_entry_t e);
    @(negedge clk);
    while (!rr) @(negedge clk);
    rv = 1'b1; op = o; ra = a; rt = t;
    @(posedge clk); #1 rv = 1'b0;
    lat = 0;
    while (!pv) begin @(posedge clk); #1 lat++; end
    hit = ph; e = pe;
    @(posedge clk);
  endtask

  initial begin
    logic h;
    mk_entry_t e;
    int nhit;
    rv = 0; op = MK_LOOKUP; ra = '0; rt = '0; ways = 4'd8;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // empty table misses; the latency is 25 cycles from acceptance
    access(MK_LOOKUP, A(3, 1), '0, h, e);
    checks++; if (h) begin failures++; $display("hit in empty table"); end
    checks++; if (lat != 25) begin failures++; $display("latency %0d", lat); end
    access(MK_UPDATE, A(3, 1), 31'h1234, h, e);
    checks++; if (h || e.conf || e.target != 31'h1234) begin failures++; $display("first update"); end
    access(MK_LOOKUP, A(3, 1), '0, h, e);
    checks++; if (!h || e.target != 31'h1234 || e.tag != 10'd3) begin failures++; $display("lookup after update"); end
    // same target sets confidence; a different one clears it; the next replaces
    access(MK_UPDATE, A(3, 1), 31'h1234, h, e);
    checks++; if (!h || !e.conf) begin failures++; $display("conf not set"); end
    access(MK_UPDATE, A(3, 1), 31'h5555, h, e);
    checks++; if (e.conf || e.target != 31'h1234) begin failures++; $display("confident target replaced"); end
    access(MK_UPDATE, A(3, 1), 31'h5555, h, e);
    checks++; if (e.target != 31'h5555) begin failures++; $display("unconfident target kept"); end
    // another set is separate
    access(MK_LOOKUP, A(3, 2), '0, h, e);
    checks++; if (h) begin failures++; $display("set aliasing"); end
    // 13 tags of one sub-set (tag % 8 == 5): one line of 12 -> exactly one lost
    for (int i = 0; i < 13; i++) access(MK_UPDATE, A(5 + 8 * i, 7), 31'(100 + i), h, e);
    nhit = 0;
    for (int i = 0; i < 13; i++) begin
      access(MK_LOOKUP, A(5 + 8 * i, 7), '0, h, e);
      if (h) begin
        nhit++;
        checks++; if (e.target != 31'(100 + i)) begin failures++; $display("wrong target"); end
      end
    end
    checks++; if (nhit != 12) begin failures++; $display("line holds %0d of 13", nhit); end
    // resize 8 -> 3 ways: entries move to tag % 3 and stay reachable
    access(MK_UPDATE, A(6, 9), 31'h66, h, e);     // tag 6: line 6 of 8, line 0 of 3
    access(MK_UPDATE, A(10, 9), 31'h1010, h, e);  // tag 10: line 2 of 8, line 1 of 3
    ways = 4'd3;
    access(MK_LOOKUP, A(6, 9), '0, h, e);
    checks++; if (!h || e.target != 31'h66) begin failures++; $display("lost entry on shrink"); end
    access(MK_LOOKUP, A(10, 9), '0, h, e);
    checks++; if (!h || e.target != 31'h1010) begin failures++; $display("lost entry 2 on shrink"); end
    checks++; if (rearr != 1) begin failures++; $display("rearrangements %0d", rearr); end
    // grow 3 -> 8: still reachable after a second rearrangement
    ways = 4'd8;
    access(MK_LOOKUP, A(6, 9), '0, h, e);
    checks++; if (!h || e.target != 31'h66) begin failures++; $display("lost entry on grow"); end
    // 0 ways: nothing stored, and the set is emptied
    ways = 4'd0;
    access(MK_UPDATE, A(20, 9), 31'h20, h, e);
    access(MK_LOOKUP, A(20, 9), '0, h, e);
    checks++; if (h) begin failures++; $display("hit with 0 ways"); end
    ways = 4'd8;
    access(MK_LOOKUP, A(6, 9), '0, h, e);
    checks++; if (h) begin failures++; $display("entry survived 0 ways"); end
    checks++; if (rearr != 4) begin failures++; $display("rearrangements %0d", rearr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
