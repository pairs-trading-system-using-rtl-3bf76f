// sbm_verify: verification and evaluation of an SB solution.
//
// The SB core is a heuristic and its penalty function does not exclude every
// invalid bit map (a cycle that misses the dummy node, or several disjoint
// cycles, cost no penalty), so each solution is checked before it is used.
// A solution is valid when:
//   - every node has outflow <= 1 and inflow <= 1, and outflow == inflow;
//   - no edge is used in both directions (b_ij & b_ji);
//   - the dummy node 0 has outflow 1;
//   - the cycle through node 0 holds every set bit (no split cycles).
// The cycle 0 -> s -> ... -> l -> 0 gives the pair (short s, long l) and its
// value, the sum of w over its edges (dummy edges weigh 0). The solution is
// effective when it is valid, the pair is not in the tabu list and
// value < threshold. These rules are the paper's; the sequential walk is this
// design's.
//
// Timing: start (pulse) latches the bit map; one cycle of parallel checks,
// then one cycle per edge of the walk along the cycle (reading w through the
// pt_* port of the graph memory); done pulses with the result, at most
// NODES + 2 cycles after start.
module sbm_verify
  import pt_pkg::*;
#(
  parameter int NODES_P = NODES
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  pair_map_t spins,
  input  pair_map_t tab,
  input  fx_t       threshold,
  output idx_t      pt_i,
  output idx_t      pt_j,
  input  fx_t       pt_w,
  output logic      done,
  output logic      valid,
  output logic      effective,
  output open_info_t result
);
  typedef enum logic [1:0] {V_IDLE, V_CHECK, V_WALK} vstate_t;
  vstate_t   st;
  pair_map_t b;
  idx_t      cur, first;
  logic [$clog2(NODES_P*NODES_P+1)-1:0] total, walked;
  fx_t       sum;

  // structural checks
  logic struct_ok;
  always_comb begin
    int o, n;
    struct_ok = 1'b1;
    for (int k = 0; k < NODES_P; k++) begin
      o = 0; n = 0;
      for (int l = 0; l < NODES_P; l++) begin
        o += int'(b[k][l]);
        n += int'(b[l][k]);
        if (b[k][l] && b[l][k]) struct_ok = 1'b0;
      end
      if (o > 1 || n > 1 || o != n) struct_ok = 1'b0;
      if (k == 0 && o != 1) struct_ok = 1'b0;
    end
  end

  // successor of cur on the cycle (the single set bit of row cur)
  idx_t nxt;
  always_comb begin
    nxt = '0;
    for (int l = 0; l < NODES_P; l++) if (b[cur][l]) nxt = idx_t'(l);
  end
  assign pt_i = cur;
  assign pt_j = nxt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= V_IDLE; b <= '0; cur <= '0; first <= '0; total <= '0; walked <= '0;
      sum <= '0; done <= 1'b0; valid <= 1'b0; effective <= 1'b0; result <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        V_IDLE: if (start) begin
          for (int k = 0; k < NODES_P; k++)
            for (int l = 0; l < NODES_P; l++)
              b[k][l] <= spins[k][l] && (k != l);
          st <= V_CHECK;
        end
        V_CHECK: begin
          int t;
          t = 0;
          for (int k = 0; k < NODES_P; k++)
            for (int l = 0; l < NODES_P; l++) t += int'(b[k][l]);
          total  <= $bits(total)'(t);
          cur    <= '0;
          walked <= '0;
          sum    <= '0;
          if (struct_ok) begin
            st <= V_WALK;
          end else begin
            st <= V_IDLE; done <= 1'b1; valid <= 1'b0; effective <= 1'b0; result <= '0;
          end
        end
        V_WALK: begin
          fx_t s;
          s = sum + pt_w;
          sum    <= s;
          walked <= walked + 1'b1;
          cur    <= nxt;
          if (cur == '0) first <= nxt;
          if (nxt == '0 || int'(walked) >= NODES_P) begin
            logic ok;
            idx_t sh;
            sh = (cur == '0) ? nxt : first;
            ok = (nxt == '0) && (walked + 1'b1 == total);
            st        <= V_IDLE;
            done      <= 1'b1;
            valid     <= ok;
            effective <= ok && (s < threshold) && !tab[sh][cur];
            result.pair.short_stk <= sh;
            result.pair.long_stk  <= cur;
            result.value          <= s;
            result.hops           <= idx_t'(walked - 1'b1);
          end
        end
        default: st <= V_IDLE;
      endcase
    end
  end
endmodule
