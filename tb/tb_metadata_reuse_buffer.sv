// tb_metadata_reuse_buffer -- random allocating writes, refresh-only writes
// and lookups against a reference model of a 128-set, 2-way FIFO buffer
// written here with plain arrays.
//
// How: each cycle a random operation (lookup, allocating write, refresh-only
// write) is drawn over a small address pool so sets fill and evict; after
// each clock edge the lookup result (asynchronous) is compared with the
// reference, which keeps per-set FIFO pointers and stored high set bits.
// Size, 2-way FIFO and the stored extra set bits are published; the refresh
// path for L3 updates is this design's and is modelled the same way here.
// Watchdog included.
module tb_metadata_reuse_buffer;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  line_addr_t la, wa;
  logic lh, wv, walloc;
  mk_entry_t le, we;
  int checks = 0, failures = 0, hits = 0, misses = 0;
  metadata_reuse_buffer #(.ENTRIES(256), .WAYS(2)) dut (.clk, .rst_n, .lk_addr(la),
    .lk_hit(lh), .lk_entry(le), .wr_valid(wv), .wr_alloc(walloc), .wr_addr(wa), .wr_entry(we));
  always #5 clk = ~clk;

  // reference: per set two ways of {valid, set_hi, tag, entry} and a FIFO pointer
  bit        rv   [128][2];
  bit [3:0]  rhi  [128][2];
  mk_entry_t rent [128][2];
  int        rptr [128];

  function automatic int find(line_addr_t a);
    int s = int'(a[6:0]);
    for (int w = 0; w < 2; w++)
      if (rv[s][w] && rhi[s][w] == a[10:7] && rent[s][w].tag == mk_tag(a)) return w;
    return -1;
  endfunction

  // small address pool so that hits, conflicts and evictions all happen
  function automatic line_addr_t pick();
    line_addr_t a;
    a = '0;
    a[6:0]   = 7'($urandom % 4);
    a[10:7]  = 4'($urandom % 3);
    a[20:11] = 10'($urandom % 3);
    return a;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, s;
    wv = 0; walloc = 0; wa = '0; we = '0; la = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      la = pick(); #1;
      w = find(la);
      checks++;
      if (lh != (w >= 0) || (lh && le != rent[int'(la[6:0])][w])) begin
        failures++; $display("lookup %h: dut %b ref %0d", la, lh, w);
      end
      if (lh) hits++; else misses++;
      wv = 1'b1; walloc = ($urandom % 3) != 0; wa = pick();
      we = '{tag: mk_tag(wa), target: 31'($urandom), conf: 1'($urandom)};
      @(posedge clk);
      s = int'(wa[6:0]);
      w = find(wa);
      if (w >= 0) rent[s][w] = we;
      else if (walloc) begin
        w = rptr[s];
        rv[s][w] = 1'b1; rhi[s][w] = wa[10:7]; rent[s][w] = we;
        rptr[s] = (w + 1) % 2;
      end
      #1 wv = 1'b0;
    end
    checks++; if (hits < 100 || misses < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
