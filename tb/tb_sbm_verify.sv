// tb_sbm_verify: hand-made and random spin maps (valid direct and bypass
// cycles, split cycles, cycles without the dummy node, 2-cycles, degree
// violations, tabu pairs) against a software walk of the map; checks
// validity, effectiveness, pair, value, hop count and the cycle bound.
module tb_sbm_verify;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, done, valid, effective;
  pair_map_t spins, tab;
  fx_t threshold, pt_w;
  idx_t pt_i, pt_j;
  open_info_t result;
  fx_t W [NODES][NODES];
  assign pt_w = W[pt_i][pt_j];
  sbm_verify dut (.*);
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // software reference
  task automatic model(input pair_map_t b, output bit v, output bit e, output int s, output int l, output fx_t val, output int hops);
    int out_d [NODES], in_d [NODES];
    int tot, cur, n;
    v = 1; e = 0; s = 0; l = 0; val = 0; hops = 0; tot = 0;
    for (int i = 0; i < NODES; i++) begin out_d[i] = 0; in_d[i] = 0; end
    for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++) if (i != j && b[i][j]) begin
      out_d[i]++; in_d[j]++; tot++;
      if (b[j][i]) v = 0;
    end
    for (int i = 0; i < NODES; i++) if (out_d[i] > 1 || in_d[i] > 1 || out_d[i] != in_d[i]) v = 0;
    if (out_d[0] != 1) v = 0;
    if (!v) return;
    cur = 0; n = 0;
    do begin
      int nx;
      nx = 0;
      for (int j = 0; j < NODES; j++) if (j != cur && b[cur][j]) nx = j;
      val += W[cur][nx];
      if (cur == 0) s = nx;
      if (nx == 0) l = cur;
      cur = nx; n++;
    end while (cur != 0 && n <= NODES);
    if (n != tot) begin v = 0; return; end
    hops = n - 2;
    e = (val < threshold) && !tab[s][l];
  endtask

  int n_bypass, n_direct, n_invalid, n_tabu;
  task automatic run(pair_map_t b, string name);
    bit v, e; int s, l, h; fx_t val; int cyc;
    model(b, v, e, s, l, val, h);
    spins = b;
    start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++; if (cyc > NODES + 3) begin failures++; $display("FAIL %s cycles %0d", name, cyc); end
    checks++; if (valid != v || effective != e) begin failures++; $display("FAIL %s valid %0d/%0d eff %0d/%0d", name, valid, v, effective, e); end
    if (v) begin
      checks++;
      if (result.pair.short_stk != s || result.pair.long_stk != l || result.value != val || result.hops != h) begin
        failures++; $display("FAIL %s result", name);
      end
      if (h > 1) n_bypass++; else n_direct++;
      if (tab[s][l]) n_tabu++;
    end else n_invalid++;
  endtask

  function automatic pair_map_t path(int a [$]);
    pair_map_t r;
    r = '0;
    for (int k = 0; k < a.size(); k++) r[a[k]][a[(k + 1) % a.size()]] = 1;
    return r;
  endfunction

  initial begin
    pair_map_t b;
    spins = '0; tab = '0; start = 0;
    threshold = fx_from_real(-0.003);
    for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++)
      W[i][j] = (i == 0 || j == 0 || i == j) ? 0 : fx_from_real(0.01);
    W[3][9] = fx_from_real(-0.004); W[9][7] = fx_from_real(-0.004); W[3][7] = fx_from_real(-0.002);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    n_bypass = 0; n_direct = 0; n_invalid = 0; n_tabu = 0;

    run(path('{0, 3, 7}), "direct above threshold");
    checks++; if (effective) failures++;
    run(path('{0, 3, 9, 7}), "bypass");
    checks++; if (!effective || result.hops != 2 || result.pair.short_stk != 3 || result.pair.long_stk != 7) failures++;
    run(path('{3, 9, 7}), "cycle without dummy");
    checks++; if (valid) failures++;
    run(path('{0, 3, 7}) | path('{5, 9, 2}), "split cycles");
    checks++; if (valid) failures++;
    run(path('{0, 3}), "two-cycle");
    checks++; if (valid) failures++;
    b = path('{0, 3, 9, 7}); b[3][5] = 1;
    run(b, "outflow 2");
    checks++; if (valid) failures++;
    tab[3][7] = 1;
    run(path('{0, 3, 9, 7}), "tabu");
    checks++; if (!valid || effective) failures++;
    tab = '0;
    run('0, "empty");
    checks++; if (valid) failures++;

    // random maps
    for (int t = 0; t < 300; t++) begin
      int len, nodes [$];
      for (int i = 1; i < NODES; i++) for (int j = 1; j < NODES; j++)
        if (i != j) W[i][j] = fx_t'($urandom_range(0, 20000)) - 14000;
      threshold = fx_t'($urandom_range(0, 20000)) - 15000;
      tab = '0;
      for (int k = 0; k < 10; k++) tab[$urandom_range(1, NODES-1)][$urandom_range(1, NODES-1)] = 1;
      len = $urandom_range(2, 6);
      nodes = {0};
      while (nodes.size() < len) begin
        int c; bit dupl;
        c = $urandom_range(1, NODES-1); dupl = 0;
        foreach (nodes[k]) if (nodes[k] == c) dupl = 1;
        if (!dupl) nodes.push_back(c);
      end
      b = path(nodes);
      if ($urandom_range(0, 3) == 0) b[$urandom_range(0, NODES-1)][$urandom_range(0, NODES-1)] = 1;
      run(b, "random");
    end
    $display("direct=%0d bypass=%0d invalid=%0d tabu=%0d", n_direct, n_bypass, n_invalid, n_tabu);
    checks++; if (n_direct == 0 || n_bypass == 0 || n_invalid == 0 || n_tabu == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
