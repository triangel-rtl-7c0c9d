// tb_triangel -- end-to-end test of the prefetcher in a reduced L3 (64 sets).
//
// Workload, all generated here:
//   PC A  repeats a fixed sequence of 40 lines (a clean temporal pattern);
//   PC B  touches random lines that never repeat (must be filtered out);
//   PC C  repeats 100 lines, every second pass with some neighbours swapped
//         and one line moved far back (exercises the Second-Chance Sampler);
//   PC D  repeats 200 lines; in some passes a third of them are replaced by
//         fresh lines for that pass only (the sampled successors come back
//         late), in others for good (they never come back);
//   PC E  sweeps 768 lines in a new random order each pass (data-cache
//         reuse without a temporal pattern, pulls the Set Dueller's choice).
// Checks: every prefetch targets a line that was trained before; once PC A
// is confident, each access x[i] prefetches exactly x[i+2], x[i+4], x[i+6],
// x[i+8] (lookahead 2, degree 4); PC B never gets a prefetch; and every
// mechanism strobe of the design fires at least once. A behavioural L2
// (the last 64 trained or prefetched lines) answers the presence probe and
// the prefetch port is throttled at random.
module tb_triangel;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tv, tr, pv, pr, l2v, l2h;
  logic [PC_W-1:0] tpc;
  logic [PADDR_W-1:0] ta, pa, l2a;
  logic [3:0] ways;
  tri_events_t ev;
  int checks = 0, failures = 0;

  triangel #(.L3_SETS(64), .DUEL_WINDOW(5000), .SCS_WINDOW(64), .SCS_ENTRIES(4)) dut (
    .clk, .rst_n, .train_valid(tv), .train_ready(tr), .train_pc(tpc), .train_addr(ta),
    .l2_probe_valid(l2v), .l2_probe_addr(l2a), .l2_probe_hit(l2h),
    .pf_valid(pv), .pf_ready(pr), .pf_addr(pa), .markov_ways(ways), .events(ev));

  always #5 clk = ~clk;

  // ---------------------------------------------------------- L2 model
  line_addr_t l2q[$];
  function automatic bit l2_has(line_addr_t a);
    foreach (l2q[i]) if (l2q[i] == a) return 1'b1;
    return 1'b0;
  endfunction
  function automatic void l2_fill(line_addr_t a);
    l2q.push_back(a);
    if (l2q.size() > 64) void'(l2q.pop_front());
  endfunction
  always @(posedge clk) l2h <= l2v && l2_has(line_of(l2a));

  // ---------------------------------------------------------- prefetches
  line_addr_t pfq[$];
  bit trained [line_addr_t];
  always @(posedge clk) begin
    pr <= ($urandom % 4) != 0;
    if (rst_n && pv && pr) begin
      pfq.push_back(line_of(pa));
      checks++;
      if (!trained.exists(line_of(pa))) begin
        failures++; $display("prefetch of untrained line %h", line_of(pa));
      end
    end
  end

  // ---------------------------------------------------------- event counters
  localparam int NEV = $bits(tri_events_t);
  int evc [NEV];
  always @(posedge clk) if (rst_n) for (int i = 0; i < NEV; i++) if (ev[i]) evc[i]++;

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one training access; returns the prefetches it caused
  task automatic train(input logic [PC_W-1:0] pc, input line_addr_t a, output line_addr_t got[$]);
    @(negedge clk);
    while (!tr) @(negedge clk);
    pfq = {};
    tv = 1'b1; tpc = pc; ta = {a, 6'b0};
    trained[a] = 1'b1;
    l2_fill(a);
    @(posedge clk); #1 tv = 1'b0;
    @(negedge clk);
    while (!tr) @(negedge clk);
    got = pfq;
    foreach (got[i]) l2_fill(got[i]);
  endtask

  function automatic line_addr_t rnd_line();
    return {20'($urandom), 5'b0, 6'($urandom)};
  endfunction

  localparam logic [PC_W-1:0] PC_A = 48'h40_0100, PC_B = 48'h40_0200,
                              PC_C = 48'h40_0300, PC_D = 48'h40_0400,
                              PC_E = 48'h40_0500;
  line_addr_t sa [40];
  line_addr_t sc [100];
  line_addr_t sd [200];
  line_addr_t se [768];

  initial begin
    line_addr_t got[$];
    line_addr_t cseq[$];
    int a_exact, a_checked, b_pf;
    tv = 0; tpc = '0; ta = '0;
    foreach (sa[i]) sa[i] = rnd_line();
    foreach (sc[i]) sc[i] = rnd_line();
    foreach (sd[i]) sd[i] = rnd_line();
    foreach (se[i]) se[i] = rnd_line();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    b_pf = 0;
    // phase 1: A, B and C interleaved
    for (int rep = 0; rep < 30; rep++) begin
      for (int i = 0; i < 40; i++) begin
        train(PC_A, sa[i], got);
        train(PC_B, rnd_line(), got);
        b_pf += got.size();
      end
      cseq = {};
      for (int i = 0; i < 100; i++) cseq.push_back(sc[i]);
      if (rep % 2 == 1) begin
        line_addr_t t;
        for (int k = 0; k < 10; k++) begin
          t = cseq[10*k+3]; cseq[10*k+3] = cseq[10*k+4]; cseq[10*k+4] = t;
        end
        t = cseq[20]; cseq.delete(20); cseq.push_back(t);
      end
      foreach (cseq[i]) train(PC_C, cseq[i], got);
    end
    checks++; if (b_pf != 0) begin failures++; $display("random PC prefetched %0d", b_pf); end
    // phase 1b: D repeats 200 lines, every second pass with every third line
    // replaced by a fresh one, so sampled successors return late or never
    for (int rep = 0; rep < 10; rep++)
      for (int i = 0; i < 200; i++) begin
        if (rep % 4 == 3 && i % 3 == 0) sd[i] = rnd_line();   // for good
        train(PC_D, (rep % 4 == 1 && i % 3 == 0) ? rnd_line() : sd[i], got);
      end
    // phase 2: A alone; check lookahead-2, degree-4 chains
    a_exact = 0; a_checked = 0;
    for (int rep = 0; rep < 3; rep++)
      for (int i = 0; i < 40; i++) begin
        train(PC_A, sa[i], got);
        if (rep > 0) begin
          a_checked++;
          if (got.size() == 4 && got[0] == sa[(i+2)%40] && got[1] == sa[(i+4)%40] &&
              got[2] == sa[(i+6)%40] && got[3] == sa[(i+8)%40]) a_exact++;
        end
      end
    checks++;
    if (a_exact != a_checked) begin
      failures++; $display("PC A exact chains %0d of %0d", a_exact, a_checked);
    end
    // phase 3: E sweeps until the Set Dueller closes its window
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 767; i > 0; i--) begin
        automatic int j = $urandom % (i + 1);
        automatic line_addr_t t = se[i]; se[i] = se[j]; se[j] = t;
      end
      foreach (se[i]) train(PC_E, se[i], got);
    end
    // phase 4: A again, reaching sets arranged for the old partition size
    for (int rep = 0; rep < 5; rep++)
      for (int i = 0; i < 40; i++) train(PC_A, sa[i], got);
    $display("partition ways now %0d", ways);
    for (int i = 0; i < NEV; i++) begin
      checks++;
      if (evc[i] == 0) begin failures++; $display("event bit %0d never fired", i); end
    end
    $display("events (msb first): train..rearrange");
    for (int i = NEV - 1; i >= 0; i--) $write("%0d ", evc[i]);
    $display("");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
