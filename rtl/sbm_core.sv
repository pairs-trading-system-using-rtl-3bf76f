// sbm_core: ballistic simulated bifurcation (bSB) engine for the path-search
// QUBO.
//
// Each directed edge (i, j) of the NODES-node market graph is one oscillator
// with position x_ij and momentum y_ij; its binary variable is b_ij = 1 when
// x_ij > 0 at the end of the run. The core integrates the bSB equations
//     y <- y + dt * ( -(a0 - a(t)) * x + F )
//     x <- x + dt * a0 * y,   with walls: |x| > 1  ->  x = sign(x), y = 0
// for NSTEP time steps, a(t) rising linearly from 0 to a0 = 1. The force F on
// x_ij is minus the gradient of H_QUBO = m_c*H_cost + m_p*H_penalty with
// respect to b_ij, evaluated at b = (1 + x) / 2. Rather than storing a dense
// 256x256 coupling matrix, the core computes that gradient from the structure
// of the QUBO (the products with zero are never formed):
//     dH/db_ij = mc*w_ij + mp*( 2(R_i - b_ij) + 2(C_j - b_ij)
//                               + 2(D_i - D_j) + 2 b_ji + tabu_ij )
// with R_i = sum_l b_il (outflow), C_j = sum_k b_kj (inflow), D = R - C, and
// the tabu term nonzero only on dummy-node edges:
//     tabu_0j = sum_k T[short j][long k] b_k0,  tabu_i0 = sum_k T[short k][long i] b_0k.
// The inputs mc and mp absorb the constants of the algorithm (c0 and the
// factor 1/2 of db/dx). bSB, NSTEP = 50 and dt = 0.65 are the paper's; the
// number format (fixed point instead of 32-bit float), the datapath
// organisation below and the initial state (x = 0, small random y from the
// RNG) are this design's choices.
//
// Datapath: NODES lanes, one graph row per cycle. A time step takes
// 1 + 2*NODES cycles: one cycle registers R, C, D and the tabu sums, NODES
// cycles update the momenta of row 0..NODES-1 (reading that row of the graph
// memory M through row_sel/row_w), NODES cycles update the positions. A run
// is 1 + NSTEP*(1 + 2*NODES) cycles after the initial state is taken (1651
// with the defaults; the paper's core takes 138 cycles per step, 6900 per run).
//
// Interface: start (pulse) begins a run; the core raises init_take until the
// initial-state generator has a set ready (init_ready) and copies y0 in that
// cycle. done pulses when the run ends; spins (the bit map b) is valid from
// then until the next start. Diagonal slots are held at b = 0.
module sbm_core
  import pt_pkg::*;
#(
  parameter int  NODES_P = NODES,
  parameter int  NSTEP   = 50,
  parameter fx_t DT      = fx_from_real(0.65)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  output logic      busy,
  output logic      done,
  input  fx_t       mc,
  input  fx_t       mp,
  // initial state
  output logic      init_take,
  input  logic      init_ready,
  input  fx_t       y0 [NODES_P*NODES_P],
  // graph memory row port
  output idx_t      row_sel,
  input  fx_t       row_w [NODES_P],
  // tabu list
  input  pair_map_t tab,
  // result
  output pair_map_t spins,
  output logic [15:0] step_cnt
);
  localparam fx_t DT_STEP = DT / NSTEP;
  localparam int  RW = $clog2(NODES_P);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_SUM, S_YPASS, S_XPASS} state_t;
  state_t st;

  fx_t x [NODES_P][NODES_P];
  fx_t y [NODES_P][NODES_P];
  fx_t R [NODES_P];
  fx_t C [NODES_P];
  fx_t D [NODES_P];
  fx_t TT0 [NODES_P];  // tabu sums for edges (0, j)
  fx_t TTI [NODES_P];  // tabu sums for edges (i, 0)
  fx_t k1;             // dt * (a0 - a(t))
  logic [RW-1:0] row;

  // b = (1 + x) / 2, diagonal forced to 0
  function automatic fx_t bval(fx_t xv);
    return (xv + FX_ONE) >>> 1;
  endfunction

  assign busy      = (st != S_IDLE);
  assign init_take = (st == S_INIT);
  assign row_sel   = idx_t'(row);

  always_comb begin
    for (int i = 0; i < NODES_P; i++)
      for (int j = 0; j < NODES_P; j++)
        spins[i][j] = (i != j) && (x[i][j] > 0);
    for (int i = NODES_P; i < NODES; i++) spins[i] = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      done     <= 1'b0;
      row      <= '0;
      step_cnt <= '0;
      k1       <= '0;
      for (int i = 0; i < NODES_P; i++) begin
        R[i] <= '0; C[i] <= '0; D[i] <= '0; TT0[i] <= '0; TTI[i] <= '0;
        for (int j = 0; j < NODES_P; j++) begin
          x[i][j] <= (i == j) ? -FX_ONE : '0;
          y[i][j] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) st <= S_INIT;

        S_INIT: if (init_ready) begin
          for (int i = 0; i < NODES_P; i++)
            for (int j = 0; j < NODES_P; j++) begin
              x[i][j] <= (i == j) ? -FX_ONE : '0;
              y[i][j] <= (i == j) ? '0 : y0[i*NODES_P + j];
            end
          k1       <= DT;
          step_cnt <= '0;
          st       <= S_SUM;
        end

        S_SUM: begin
          for (int k = 0; k < NODES_P; k++) begin
            fx_t r, c, t0, ti;
            r = '0; c = '0; t0 = '0; ti = '0;
            for (int l = 0; l < NODES_P; l++) begin
              if (l != k) begin
                r = r + bval(x[k][l]);
                c = c + bval(x[l][k]);
              end
              if (l != 0 && k != 0 && tab[k][l]) t0 = t0 + bval(x[l][0]);
              if (l != 0 && k != 0 && tab[l][k]) ti = ti + bval(x[0][l]);
            end
            R[k] <= r; C[k] <= c; D[k] <= r - c; TT0[k] <= t0; TTI[k] <= ti;
          end
          row <= '0;
          st  <= S_YPASS;
        end

        S_YPASS: begin
          for (int j = 0; j < NODES_P; j++) begin
            if (j != int'(row)) begin
              fx_t bij, bji, pg, f;
              bij = bval(x[row][j]);
              bji = bval(x[j][row]);
              pg  = ((R[row] - bij) <<< 1) + ((C[j] - bij) <<< 1)
                  + ((D[row] - D[j]) <<< 1) + (bji <<< 1);
              if (row == '0)    pg = pg + TT0[j];
              else if (j == 0)  pg = pg + TTI[row];
              f = -(fx_mul(mc, row_w[j]) + fx_mul(mp, pg));
              y[row][j] <= y[row][j] + fx_mul(DT, f) - fx_mul(k1, x[row][j]);
            end
          end
          row <= row + 1'b1;
          if (int'(row) == NODES_P - 1) st <= S_XPASS;
        end

        S_XPASS: begin
          for (int j = 0; j < NODES_P; j++) begin
            if (j != int'(row)) begin
              fx_t xn;
              xn = x[row][j] + fx_mul(DT, y[row][j]);
              if (xn > FX_ONE) begin
                x[row][j] <= FX_ONE;  y[row][j] <= '0;
              end else if (xn < -FX_ONE) begin
                x[row][j] <= -FX_ONE; y[row][j] <= '0;
              end else begin
                x[row][j] <= xn;
              end
            end
          end
          row <= row + 1'b1;
          if (int'(row) == NODES_P - 1) begin
            step_cnt <= step_cnt + 1'b1;
            k1       <= k1 - DT_STEP;
            if (int'(step_cnt) == NSTEP - 1) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              st <= S_SUM;
            end
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
