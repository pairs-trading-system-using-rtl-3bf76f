// xorshift32: Marsaglia's 32-bit Xorshift random number generator.
//
//   x ^= x << 13;  x ^= x >> 17;  x ^= x << 5;
//
// The SBM uses it to draw the initial states of the oscillators for each run.
// The generator type (Xorshift) is the paper's; the 32-bit variant with shifts
// (13, 17, 5) is this design's choice. seed_load loads a seed (a zero seed is
// replaced by a fixed non-zero one, since zero is a fixed point); with en high
// the state advances one step per cycle. rnd is the current state.
module xorshift32 #(
  parameter logic [31:0] DEFAULT_SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        en,
  output logic [31:0] rnd
);
  function automatic logic [31:0] step(logic [31:0] x);
    logic [31:0] t;
    t = x ^ (x << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rnd <= DEFAULT_SEED;
    else if (seed_load) rnd <= (seed == '0) ? DEFAULT_SEED : seed;
    else if (en)        rnd <= step(rnd);
  end
endmodule
