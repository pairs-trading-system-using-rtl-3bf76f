// tabu_mem: tabu list T of the SBM module.
//
// A bitmap over pairs, indexed [short][long]. A set bit forbids the SB core
// from choosing that pair again (penalty term T_ij b_0j b_i0 of the QUBO) and
// makes the verifier reject it. Two ways to change it, as in the paper:
//   - reg_en:     register one pair found by the SBM module (set one bit);
//   - refresh_en: replace the whole list by a copy of the judgment module's
//                 open list O (sent when positions are closed).
// If both come in the same cycle the refresh wins and the registered pair is
// added on top of the copy. The whole map is readable in parallel.
//
// Note on indexing: in the paper's penalty term T_{i,j} b_{0,j} b_{i,0}, node j
// follows the dummy node (short stock) and node i precedes it (long stock), so
// the paper's T_{i,j} is bit tab[j][i] here.
module tabu_mem
  import pt_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      reg_en,
  input  pair_t     reg_pair,
  input  logic      refresh_en,
  input  pair_map_t refresh_map,
  output pair_map_t tab
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tab <= '0;
    end else begin
      pair_map_t n;
      n = refresh_en ? refresh_map : tab;
      if (reg_en) n[reg_pair.short_stk][reg_pair.long_stk] = 1'b1;
      tab <= n;
    end
  end
endmodule
