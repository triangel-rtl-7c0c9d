// tb_second_chance_sampler -- the worked example of the Second-Chance
// Sampler (Y inserted at T=12345 and seen at T=12349; D inserted at T=440
// and seen after T=440+512) plus FIFO eviction penalties.
//
// How: `now` (the global training count) is driven directly to reproduce
// the published worked example; insert and check operations are one-cycle
// strobes whose timely/late/eviction outputs are sampled in the same cycle.
// Filling the FIFO past 64 entries must report a penalty (with the
// inserting PC's index) for each unseen entry pushed out and none for a
// seen one. The 512 window and Seen rule are published; FIFO order and full
// associativity are this design's choice. Watchdog included.
module tb_second_chance_sampler;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  ts_t now;
  logic cv, ct, cl, iv, pen;
  line_addr_t ca, ia;
  tt_idx_t ci, ii, pidx;
  int checks = 0, failures = 0;
  second_chance_sampler #(.ENTRIES(64), .WINDOW(512)) dut (.clk, .rst_n, .now,
    .chk_valid(cv), .chk_addr(ca), .chk_tidx(ci), .chk_timely(ct), .chk_late(cl),
    .ins_valid(iv), .ins_addr(ia), .ins_tidx(ii), .ins_evict_pen(pen), .ins_evict_tidx(pidx));
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic ins(input line_addr_t a, input tt_idx_t t, input ts_t tm,
                     input logic exp_pen, input tt_idx_t exp_idx);
    @(negedge clk);
    iv = 1'b1; ia = a; ii = t; now = tm; #1;
    checks++;
    if (pen != exp_pen || (exp_pen && pidx != exp_idx)) begin
      failures++; $display("insert %h: pen %b idx %h", a, pen, pidx);
    end
    @(posedge clk); #1 iv = 1'b0;
  endtask
  task automatic chk(input line_addr_t a, input tt_idx_t t, input ts_t tm,
                     input logic et, input logic el);
    @(negedge clk);
    cv = 1'b1; ca = a; ci = t; now = tm; #1;
    checks++;
    if (ct != et || cl != el) begin
      failures++; $display("check %h @%0d: timely %b late %b", a, tm, ct, cl);
    end
    @(posedge clk); #1 cv = 1'b0;
  endtask
  initial begin
    cv = 0; iv = 0; ca = '0; ia = '0; ci = '0; ii = '0; now = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    ins(31'h0D, 9'h38, 32'd440, 1'b0, '0);
    ins(31'h0B, 9'h42, 32'd12345, 1'b0, '0);       // Y
    chk(31'h0B, 9'h38, 32'd12349, 1'b0, 1'b0);      // wrong PC
    chk(31'h0B, 9'h42, 32'd12349, 1'b1, 1'b0);      // Y seen in time
    chk(31'h0B, 9'h42, 32'd12350, 1'b0, 1'b0);      // judged only once
    chk(31'h0D, 9'h38, 32'd440 + 32'd513, 1'b0, 1'b1); // D seen too late
    ins(31'h0E, 9'h11, 32'd20000, 1'b0, '0);
    // 61 more fill the buffer; the 65th insertion overwrites entry 0 (D, seen)
    for (int i = 0; i < 61; i++) ins(31'h1000 + 31'(i), 9'h20, 32'd20001, 1'b0, '0);
    ins(31'h2000, 9'h21, 32'd20002, 1'b0, '0);      // over D: seen, no penalty
    ins(31'h2001, 9'h21, 32'd20002, 1'b0, '0);      // over Y: seen, no penalty
    ins(31'h2002, 9'h21, 32'd20002, 1'b1, 9'h11);   // over unseen 0x0E of PC 0x11
    chk(31'h0E, 9'h11, 32'd20003, 1'b0, 1'b0);      // gone
    chk(31'h1005, 9'h20, 32'd20003, 1'b1, 1'b0);    // still held
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
