// 32-bit xorshift pseudo-random number generator.
//
// The solver's random numbers (noise for annealing, random choice in the
// 1-from-n encoders) come from digital PRNGs of the xorshift family (Marsaglia,
// "Xorshift RNGs", 2003), which the paper cites; its floor plan prints a 32-bit
// PRNG. The shift triple (13, 17, 5) is Marsaglia's standard 32-bit choice and
// is this design's pick. Period 2^32-1; the seed must be non-zero.
//
// Interface: rnd holds the current word. When en is high at a rising clock edge
// rnd advances one xorshift step, so a new word is available every cycle.
// Reset (active low, synchronous to clk) loads SEED.
module prng_xorshift32 #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);

  function automatic logic [31:0] xorshift(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= xorshift(rnd);
  end

  initial assert (SEED != 32'd0) else $error("prng_xorshift32: SEED must be non-zero");

endmodule
