// sb_init_gen: initial-state generator of the SB core.
//
// Fills a buffer with one initial momentum y0 per spin (NODES*NODES values)
// from the Xorshift generator, one value per cycle, while the core is busy
// with the current run, so that the next run can start without waiting. This
// overlap of RNG and core is the paper's; the value range is this design's
// choice: y0 is the top 32 bits of the random word shifted down so that
// |y0| < 2^(31-Y0_SHIFT) / 2^FRAC (0.5 with the defaults); initial
// positions x0 are zero.
//
// Interface: ready is high when a full set is buffered. take (one-cycle pulse,
// only when ready) hands the set to the core, which copies y0 in that cycle;
// the generator then refills, NODES*NODES cycles. stalls counts cycles in
// which take was requested with ready low (the core had to wait for the RNG).
module sb_init_gen
  import pt_pkg::*;
#(
  parameter int NODES_P  = NODES,
  parameter int Y0_SHIFT = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        take,
  output logic        ready,
  output fx_t         y0 [NODES_P*NODES_P],
  output logic [31:0] stalls
);
  localparam int NS = NODES_P * NODES_P;

  logic [31:0]          rnd;
  logic [$clog2(NS):0]  fill;
  logic                 filling;

  assign filling = (fill != NS[$clog2(NS):0]);
  assign ready   = !filling;

  xorshift32 u_rng (
    .clk, .rst_n, .seed_load, .seed,
    .en  (filling),
    .rnd
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill   <= '0;
      stalls <= '0;
      for (int k = 0; k < NS; k++) y0[k] <= '0;
    end else if (seed_load) begin
      fill <= '0;
    end else if (take && ready) begin
      fill <= '0;
    end else if (filling) begin
      y0[fill[$clog2(NS)-1:0]] <= $signed(rnd) >>> Y0_SHIFT;
      fill <= fill + 1'b1;
      if (take) stalls <= stalls + 1;
    end
  end
endmodule
