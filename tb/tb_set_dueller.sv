// tb_set_dueller -- a reduced L3 (64 sets, 2 sampled, 40-access window):
// hit positions in the cache and Markov LRU models must add to the right
// partition counters (hand-computed), and each window must pick the best.
//
// How: training accesses (cache_valid) and Markov lookups (mk_valid) are
// sent to the two sampled sets with tags chosen so their LRU positions are
// known; addresses for the Markov model are chosen so that bits [30:11]
// mod 12 == 0 (modelled) or not (ignored). The nine counters are compared
// with hand-computed sums (+1 per data hit for m with 16-m > p, +6 per
// modelled Markov hit for m > p), and at the window end `ways` must take
// the arg-max and window_end must pulse. Hit rules, weights and window
// are published; which sets are sampled and the 1-in-12 rule are this
// design's. Watchdog included.
module tb_set_dueller;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cv, mv, we;
  line_addr_t ca, ma;
  logic [3:0] ways;
  logic [8:0][31:0] hits;
  int checks = 0, failures = 0;
  set_dueller #(.SETS(64), .SAMPLED_SETS(2), .CACHE_WAYS(16), .MAX_WAYS(8), .WINDOW(40),
                .DENSITY(12), .BIAS(2), .SAMPLE_KEY(21), .INIT_WAYS(8)) dut (
    .clk, .rst_n, .cache_valid(cv), .cache_addr(ca), .mk_valid(mv), .mk_addr(ma),
    .ways, .window_end(we), .hits);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic line_addr_t L(input int set, input int t);
    line_addr_t a;
    a = '0; a[5:0] = 6'(set); a[20:11] = 10'(t);
    return a;
  endfunction
  task automatic c(input int set, input int t);
    @(negedge clk); cv = 1'b1; ca = L(set, t); @(posedge clk); #1 cv = 1'b0;
  endtask
  task automatic m(input int set, input int t);
    @(negedge clk); mv = 1'b1; ma = L(set, t); @(posedge clk); #1 mv = 1'b0;
  endtask
  int exp_h [9];
  int n_end = 0;
  always @(posedge clk) if (rst_n && we) n_end++;
  initial begin
    cv = 0; mv = 0; ca = '0; ma = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    checks++; if (ways != 4'd8) failures++;
    c(21, 1); c(21, 2); c(21, 1);                // hit at LRU position 1
    for (int t = 3; t <= 17; t++) c(21, t);      // 15 new tags
    c(21, 1);                                    // hit at LRU position 15
    c(22, 1);                                    // unsampled set
    m(21, 12); m(21, 24); m(21, 12); m(21, 24);  // two hits at position 1
    m(21, 13); m(21, 13);                        // not in the 1/12 sample
    m(53, 36); m(53, 36);                        // hit at position 0 in set 53
    exp_h = '{2, 1+6, 13+6, 13+6, 13+6, 13+6, 13+6, 13+6, 13+6};
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (hits[i] != 32'(exp_h[i])) begin failures++; $display("hits[%0d]=%0d exp %0d", i, hits[i], exp_h[i]); end
    end
    for (int i = 0; i < 19; i++) c(30, i);       // 39 accesses so far
    checks++; if (ways != 4'd8 || n_end != 0) begin failures++; $display("early window end: ways %0d ends %0d", ways, n_end); end
    c(30, 99);                                   // 40th closes the window
    repeat (2) @(negedge clk);
    checks++; if (ways != 4'd2 || n_end != 1) begin failures++; $display("ways %0d ends %0d", ways, n_end); end
    checks++; if (hits != '0) begin failures++; $display("counters not cleared"); end
    // second window: only data-cache reuse -> no Markov ways
    c(53, 5); c(53, 5);
    for (int i = 0; i < 38; i++) c(30, i);
    repeat (2) @(negedge clk);
    checks++; if (ways != 4'd0 || n_end != 2) begin failures++; $display("ways %0d ends %0d", ways, n_end); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
