// tb_triangel_full -- one complete operation of the prefetcher at its full
// default size (512-entry tables, 2048-set L3 with an 8-way Markov partition,
// 25-cycle Markov access, 500000-access dueller window).
//
// A single PC repeats a 40-line sequence. At full size the History Sampler
// samples about one access in 384, so the PC needs some tens of passes before
// a sampled pair repeats, which makes it confident; from then on it stores
// (x[i] -> x[i+1]) pairs (later x[i] -> x[i+2], at lookahead 2) and, on the
// next pass, prefetches along them. The test checks that prefetches appear
// and that every link of every prefetch chain steps 1 or 2 places forward in
// the sequence from the trigger, and that the partition keeps its 8 ways.
// Interface: the L2 presence probe is always answered "absent" one cycle
// later (the old target is never in the L2); pf_ready is always high. All parameters
// are the defaults. Watchdog included.
module tb_triangel_full;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tv, tr, pv, l2v, l2h;
  logic [PC_W-1:0] tpc;
  logic [PADDR_W-1:0] ta, pa, l2a;
  logic [3:0] ways;
  tri_events_t ev;
  int checks = 0, failures = 0;

  triangel dut (
    .clk, .rst_n, .train_valid(tv), .train_ready(tr), .train_pc(tpc), .train_addr(ta),
    .l2_probe_valid(l2v), .l2_probe_addr(l2a), .l2_probe_hit(l2h),
    .pf_valid(pv), .pf_ready(1'b1), .pf_addr(pa), .markov_ways(ways), .events(ev));

  always #5 clk = ~clk;
  always @(posedge clk) l2h <= 1'b0;   // L2 never holds the old target

  line_addr_t pfq[$];
  int n_update = 0;
  always @(posedge clk) if (rst_n) begin
    if (pv) pfq.push_back(line_of(pa));
    if (ev.mk_update) n_update++;
  end

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  line_addr_t sa [40];
  initial begin
    int n_pf, rep, pos;
    tv = 0; tpc = 48'h40_0100; ta = '0;
    foreach (sa[i]) sa[i] = {20'($urandom), 11'($urandom)};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    n_pf = 0;
    rep  = 0;
    while (rep < 400 && n_pf < 80) begin
      for (int i = 0; i < 40; i++) begin
        @(negedge clk);
        while (!tr) @(negedge clk);
        pfq = {};
        tv = 1'b1; ta = {sa[i], 6'b0};
        @(posedge clk); #1 tv = 1'b0;
        @(negedge clk);
        while (!tr) @(negedge clk);
        // each link of the chain is 1 (lookahead 1) or 2 (lookahead 2)
        // positions further along the sequence
        pos = i;
        foreach (pfq[k]) begin
          n_pf++;
          checks++;
          if (pfq[k] == sa[(pos + 1) % 40])      pos = (pos + 1) % 40;
          else if (pfq[k] == sa[(pos + 2) % 40]) pos = (pos + 2) % 40;
          else begin
            failures++; $display("pass %0d: at x[%0d] prefetched %h", rep, i, pfq[k]);
          end
        end
      end
      rep++;
    end
    $display("passes %0d, prefetches %0d, Markov updates %0d, ways %0d", rep, n_pf, n_update, ways);
    checks++; if (n_pf < 40) begin failures++; $display("too few prefetches"); end
    checks++; if (ways != 4'd8) begin failures++; $display("partition changed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
