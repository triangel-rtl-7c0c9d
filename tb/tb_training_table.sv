// tb_training_table -- random writes against a shadow array, read back on
// both ports; entries must be invalid after reset.
//
// How: after reset every entry read through port a and port b (different
// indices at the same time) must have valid=0. Then random entries are
// written at random indices and mirrored in a plain array; both asynchronous
// read ports are compared with the mirror on the next cycle: port b at the
// index just written, port a at a random index already written. Table size (512) and the 122-bit entry follow the
// published field list; the port arrangement is this design's. Watchdog
// included.
module tb_training_table;
  import triangel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  tt_idx_t ai, bi, wi;
  tt_entry_t ae, be, we_e;
  tt_entry_t shadow [512];
  bit        written [512];
  int checks = 0, failures = 0;
  training_table #(.ENTRIES(512)) dut (.clk, .rst_n, .rd_a_idx(ai), .rd_a_entry(ae),
    .rd_b_idx(bi), .rd_b_entry(be), .wr_en(we), .wr_idx(wi), .wr_entry(we_e));
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    ai = '0; bi = '0; wi = '0; we_e = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 512; i++) begin
      ai = tt_idx_t'(i); bi = tt_idx_t'(511 - i); #1;
      checks++; if (ae.valid || be.valid) failures++;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we   = 1'b1;
      wi   = tt_idx_t'($urandom % 512);
      we_e = 122'({$urandom, $urandom, $urandom, $urandom});
      we_e.valid = ($urandom % 8) != 0;
      shadow[wi]  = we_e;
      written[wi] = 1'b1;
      @(negedge clk);
      we = 1'b0;
      ai = tt_idx_t'($urandom % 512);
      bi = wi;
      #1;
      checks++;
      if (be != shadow[wi]) begin failures++; $display("port b mismatch at %0d", wi); end
      if (written[ai]) begin
        checks++;
        if (ae != shadow[ai]) begin failures++; $display("port a mismatch at %0d", ai); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
