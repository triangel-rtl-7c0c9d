// lcg32 -- 32-bit linear congruential pseudo-random source.
//
// The History Sampler needs a cheap random draw to decide whether to sample a
// training access; the published design says a linear congruential generator
// is enough and that cryptographic quality is not required. This block steps
// x <- 1664525 * x + 1013904223 (mod 2^32) on every cycle in which `step` is
// high, starting from SEED after reset. The multiplier and increment are a
// common textbook pair and are this design's choice.
//
// Interface: `value` is the current state; it changes one cycle after `step`.
module lcg32 #(
  parameter logic [31:0] SEED = 32'd12345
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [31:0] value
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    value <= SEED;
    else if (step) value <= value * 32'd1664525 + 32'd1013904223;
  end
endmodule
