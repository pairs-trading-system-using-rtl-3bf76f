// tb_sbm_core: self-checking test of the bSB core.
//
// Drives the core with a market graph held in the test bench (row port) and a
// fixed set of initial momenta, and compares, after every run, the final spin
// map bit for bit with a reference model of the same fixed-point bSB equations
// written here as plain sequential code (Jacobi update of all momenta, then
// all positions). It also checks the run length (1 + NSTEP*(1 + 2*NODES)
// cycles after start) and the quality of the answer: on a graph with one
// strongly negative edge the spins must form the cycle 0 -> a -> b -> 0, and
// with that pair in the tabu list the core must avoid it.
module tb_sbm_core;
  import pt_pkg::*;
  localparam int NN = NODES;
  localparam int NS = NN * NN;
  localparam int NSTEP = 50;
  localparam fx_t DT = fx_from_real(0.65);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start, busy, done, init_take;
  fx_t mc, mp;
  fx_t y0 [NS];
  idx_t row_sel;
  fx_t row_w [NN];
  pair_map_t tab, spins;
  logic [15:0] step_cnt;
  fx_t W [NN][NN];

  always_comb for (int j = 0; j < NN; j++) row_w[j] = W[row_sel][j];

  sbm_core #(.NSTEP(NSTEP), .DT(DT)) dut (
    .clk, .rst_n, .start, .busy, .done, .mc, .mp, .init_take, .init_ready(1'b1),
    .y0, .row_sel, .row_w, .tab, .spins, .step_cnt
  );

  // ---------------- reference model ----------------
  function automatic fx_t m(fx_t a, fx_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return fx_t'(p >>> FRAC);
  endfunction

  function automatic pair_map_t ref_run();
    fx_t x [NN][NN], y [NN][NN];
    fx_t b [NN][NN];
    fx_t R [NN], C [NN], T0 [NN], TI [NN];
    fx_t k1, one, dstep;
    pair_map_t res;
    one = fx_t'(1 << FRAC);
    dstep = DT / NSTEP;
    for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) begin
      x[i][j] = (i == j) ? -one : 0;
      y[i][j] = (i == j) ? 0 : y0[i*NN + j];
    end
    k1 = DT;
    for (int s = 0; s < NSTEP; s++) begin
      for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++)
        b[i][j] = (i == j) ? 0 : ((x[i][j] + one) >>> 1);
      for (int k = 0; k < NN; k++) begin
        R[k] = 0; C[k] = 0; T0[k] = 0; TI[k] = 0;
        for (int l = 0; l < NN; l++) begin
          R[k] += b[k][l];
          C[k] += b[l][k];
        end
      end
      // tabu sums: T0[j] for edge (0,j) = sum_k tab[short j][long k] b[k][0]
      for (int j = 1; j < NN; j++) for (int k = 1; k < NN; k++) begin
        if (tab[j][k]) T0[j] += b[k][0];
        if (tab[k][j]) TI[j] += b[0][k];
      end
      for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) if (i != j) begin
        fx_t pg, f;
        pg = 2*(R[i] - b[i][j]) + 2*(C[j] - b[i][j]) + 2*((R[i]-C[i]) - (R[j]-C[j])) + 2*b[j][i];
        if (i == 0) pg += T0[j];
        else if (j == 0) pg += TI[i];
        f = -(m(mc, W[i][j]) + m(mp, pg));
        y[i][j] = y[i][j] + m(DT, f) - m(k1, x[i][j]);
      end
      for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) if (i != j) begin
        fx_t xn;
        xn = x[i][j] + m(DT, y[i][j]);
        if (xn > one)       begin x[i][j] = one;  y[i][j] = 0; end
        else if (xn < -one) begin x[i][j] = -one; y[i][j] = 0; end
        else x[i][j] = xn;
      end
      k1 = k1 - dstep;
    end
    res = '0;
    for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) res[i][j] = (i != j) && (x[i][j] > 0);
    return res;
  endfunction

  function automatic pair_map_t cyc(int a, int bb);
    pair_map_t r;
    r = '0; r[0][a] = 1; r[a][bb] = 1; r[bb][0] = 1;
    return r;
  endfunction

  task automatic run_and_check(string name, bit check_cycle, pair_map_t expect_map, bit check_expect);
    pair_map_t exp_s;
    int cyc_n;
    exp_s = ref_run();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc_n = 1;
    while (!done) begin @(negedge clk); cyc_n++; end
    checks++;
    if (spins !== exp_s) begin
      failures++; $display("FAIL %s: spins differ from reference model", name);
    end
    if (check_cycle) begin
      checks++;
      // start sampled, 1 cycle to take the initial state, NSTEP*(1+2*NN) cycles
      if (cyc_n != 1 + NSTEP*(1 + 2*NN) + 1) begin
        failures++; $display("FAIL %s: run took %0d cycles", name, cyc_n);
      end
    end
    if (check_expect) begin
      checks++;
      if (spins !== expect_map) begin
        failures++; $display("FAIL %s: expected the best cycle", name);
        for (int i = 0; i < NN; i++) $display("  row %0d %b", i, spins[i]);
      end
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int found, hit_tabu;
    start = 0; tab = '0;
    mc = fx_from_real(50.0); mp = fx_from_real(0.2);
    // graph: every stock-to-stock edge costs +0.01 except two opportunities
    for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++)
      W[i][j] = (i == 0 || j == 0 || i == j) ? 0 : fx_from_real(0.01);
    W[3][7] = fx_from_real(-0.01);
    W[5][2] = fx_from_real(-0.006);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // best pair (3,7): found by consecutive runs with fresh initial states
    found = 0;
    for (int r = 0; r < 6; r++) begin
      for (int k = 0; k < NS; k++) y0[k] = fx_t'($signed($urandom) >>> 12);
      run_and_check("best", r == 0, '0, 0);
      if (spins == cyc(3, 7)) found++;
    end
    checks++;
    if (found == 0) begin failures++; $display("FAIL: best cycle 0->3->7->0 never found"); end
    else $display("best cycle found in %0d of 6 runs", found);

    // with (3,7) in the tabu list the core must not return that pair
    tab[3][7] = 1;
    hit_tabu = 0;
    for (int r = 0; r < 6; r++) begin
      for (int k = 0; k < NS; k++) y0[k] = fx_t'($signed($urandom) >>> 12);
      run_and_check("tabu", 0, '0, 0);
      if (spins[0][3] && spins[7][0]) hit_tabu++;
    end
    checks++;
    if (hit_tabu != 0) begin failures++; $display("FAIL: tabu pair returned %0d times", hit_tabu); end

    // random graphs and tabu lists: bit-exact against the model
    for (int t = 0; t < 4; t++) begin
      tab = '0;
      tab[$urandom_range(1, NN-1)][$urandom_range(1, NN-1)] = 1;
      for (int i = 1; i < NN; i++) for (int j = 1; j < NN; j++)
        if (i != j) W[i][j] = fx_t'($signed($urandom) >>> 16);
      for (int k = 0; k < NS; k++) y0[k] = fx_t'($signed($urandom) >>> 12);
      run_and_check("random", 1, '0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
