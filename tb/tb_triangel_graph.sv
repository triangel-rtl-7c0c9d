// tb_triangel_graph -- breadth-first graph search through the prefetcher, at
// two graph sizes: one whose per-PC access pattern fits in the Markov table
// and one far larger than it.
//
// The workload is generated here. A random graph of N vertices with 10
// out-edges each is stored as three arrays: per-vertex edge offsets (8 bytes
// each), edge targets (4 bytes each) and per-vertex parent entries (8 bytes
// each). Each search starts from a random root and, for every vertex taken
// from the queue, reads its offset entry (PC 1), then for each edge the edge
// entry (PC 2) and the neighbour's parent entry (PC 3). A behavioural L2 of
// 256 lines (FIFO) filters these reads: a miss, or the first use of a line
// brought in by a prefetch, is a training access; prefetched lines are
// placed in the L2 tagged. The prefetcher runs with a 64-set L3 (Markov
// capacity 64 x 8 x 12 = 6144 pairs) and a 20000-access dueller window.
//
//   small graph: N = 4096, parent array 512 lines. Each parent line is
//     re-read many times per search, so reuse is short, but the order of
//     neighbours differs with every search: pattern confidence must stay
//     low for most accesses, and the Set Dueller, seeing that the few
//     Markov hits are worth less than data hits, must give ways back.
//   large graph: N = 32768, parent array 4096 lines, and the per-PC
//     distance between repeats of a pair exceeds the table capacity, so
//     the PCs should barely ever be enabled.
//
// Checks: every prefetch targets a line trained before; small graph:
// prefetches below 10% of training accesses and a partition below 8 ways
// at the end; large graph: prefetches below 2% of training accesses. The
// counts of training accesses, Markov updates, prefetches and prefetch hits
// are printed.
// The expectation -- a temporal prefetcher should stay quiet on graph
// search -- is the published observation for this workload; the graph
// shape, sizes and L2 model are this testbench's own. The DUT is reset
// between the two runs. A watchdog ends the run if it hangs.
module tb_triangel_graph;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tv, tr, pv, l2v, l2h;
  logic [PC_W-1:0] tpc;
  logic [PADDR_W-1:0] ta, pa, l2a;
  logic [3:0] ways;
  tri_events_t ev;
  int checks = 0, failures = 0;

  triangel #(.L3_SETS(64), .DUEL_WINDOW(20000)) dut (
    .clk, .rst_n, .train_valid(tv), .train_ready(tr), .train_pc(tpc), .train_addr(ta),
    .l2_probe_valid(l2v), .l2_probe_addr(l2a), .l2_probe_hit(l2h),
    .pf_valid(pv), .pf_ready(1'b1), .pf_addr(pa), .markov_ways(ways), .events(ev));

  always #5 clk = ~clk;

  // ---------------------------------------------------------- L2 model
  localparam int L2_LINES = 256;
  line_addr_t l2q[$];
  bit l2_pf [line_addr_t];          // present lines; value = prefetched, unused
  function automatic void l2_fill(line_addr_t a, bit pf);
    if (l2_pf.exists(a)) return;
    l2q.push_back(a);
    l2_pf[a] = pf;
    if (l2q.size() > L2_LINES) l2_pf.delete(l2q.pop_front());
  endfunction
  always @(posedge clk) l2h <= l2v && l2_pf.exists(line_of(l2a));

  // ---------------------------------------------------------- prefetches
  line_addr_t pfq[$];
  bit trained [line_addr_t];
  int n_pf = 0, n_train = 0, n_pfhit = 0, n_upd = 0;
  always @(posedge clk) begin
    if (rst_n && pv) begin
      pfq.push_back(line_of(pa));
      n_pf++;
      if (!trained.exists(line_of(pa))) begin
        checks++; failures++; $display("prefetch of untrained line %h", line_of(pa));
      end
    end
    if (rst_n && ev.mk_update) n_upd++;
  end

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic train(input logic [PC_W-1:0] pc, input line_addr_t a);
    @(negedge clk);
    while (!tr) @(negedge clk);
    pfq = {};
    tv = 1'b1; tpc = pc; ta = {a, 6'b0};
    trained[a] = 1'b1;
    n_train++;
    @(posedge clk); #1 tv = 1'b0;
    @(negedge clk);
    while (!tr) @(negedge clk);
    foreach (pfq[i]) l2_fill(pfq[i], 1'b1);
  endtask

  // one demand read through the L2 model
  task automatic touch(input logic [PC_W-1:0] pc, input line_addr_t a);
    if (l2_pf.exists(a)) begin
      if (l2_pf[a]) begin
        l2_pf[a] = 1'b0;
        n_pfhit++;
        train(pc, a);
      end
    end else begin
      l2_fill(a, 1'b0);
      train(pc, a);
    end
  endtask

  localparam logic [PC_W-1:0] PC_OFF = 48'h41_0040, PC_EDG = 48'h41_0084,
                              PC_PAR = 48'h41_00c8;
  localparam line_addr_t OFF_BASE = 31'h0010_0000, EDG_BASE = 31'h0020_0000,
                         PAR_BASE = 31'h0040_0000;
  localparam int DEG = 10;

  task automatic run(input int n, input int searches, input int pf_pct,
                     input bit expect_shrink, input string name);
    int adj[];
    int parent[];
    int q[$];
    adj    = new[n * DEG];
    parent = new[n];
    foreach (adj[i]) adj[i] = int'($urandom % n);
    l2q = {}; l2_pf.delete(); trained.delete();
    n_pf = 0; n_train = 0; n_pfhit = 0; n_upd = 0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < searches; s++) begin
      automatic int root = int'($urandom % n);
      foreach (parent[i]) parent[i] = -1;
      parent[root] = root;
      q.push_back(root);
      while (q.size() > 0) begin
        automatic int u = q.pop_front();
        touch(PC_OFF, OFF_BASE + line_addr_t'(u / 8));
        for (int e = 0; e < DEG; e++) begin
          automatic int v = adj[u * DEG + e];
          touch(PC_EDG, EDG_BASE + line_addr_t'((u * DEG + e) / 16));
          touch(PC_PAR, PAR_BASE + line_addr_t'(v / 8));
          if (parent[v] < 0) begin
            parent[v] = u;
            q.push_back(v);
          end
        end
      end
    end
    $display("%s: %0d training accesses, %0d Markov updates, %0d prefetches, %0d used, ways %0d",
             name, n_train, n_upd, n_pf, n_pfhit, ways);
    checks++;
    if (n_pf * 100 > n_train * pf_pct) begin
      failures++; $display("%s: too many prefetches", name);
    end
    if (expect_shrink) begin
      checks++;
      if (ways == 4'd8) begin failures++; $display("%s: partition kept 8 ways", name); end
    end
  endtask

  initial begin
    tv = 1'b0; tpc = '0; ta = '0;
    run(4096, 4, 10, 1'b1, "small graph");
    run(32768, 1, 2, 1'b0, "large graph");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
