// tb_lcg32 -- checks the random source against the recurrence computed here.
//
// How: the seed is overridden to 777; after reset the output must equal it.
// Then `step` is held high for 200 cycles and after each clock edge the
// output must equal the next value of x <- 1664525*x + 1013904223 (mod
// 2^32), computed in 64-bit arithmetic in the testbench. Three cycles
// without `step` must leave the value unchanged.
// Interface/timing: one clock; the state advances on the edge where step=1.
// The linear congruential generator is the published suggestion; the two
// constants and the seed are this design's choice, and are what is checked.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_lcg32;
  logic clk = 1'b0, rst_n = 1'b0, step = 1'b0;
  logic [31:0] value;
  int checks = 0, failures = 0;
  lcg32 #(.SEED(32'd777)) dut (.clk, .rst_n, .step, .value);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint unsigned x;
    x = 777;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++; if (value != 32'd777) begin failures++; $display("seed mismatch %h", value); end
    step = 1'b1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      x = (x * 1664525 + 1013904223) % (64'd1 << 32);
      checks++;
      if (value != x[31:0]) begin failures++; $display("step %0d: %h vs %h", i, value, x[31:0]); end
    end
    step = 1'b0;
    repeat (3) @(negedge clk);
    checks++; if (value != x[31:0]) begin failures++; $display("moved without step"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
