// tb_sbm_module: the SBM module on its own, at full size (16-node graph,
// 50 SB steps). A price list with one mispriced pair (5,2) is offered; the
// module must build the graph, find the pair, register it in its tabu list,
// report it with the right path value, then run miss_limit more executions
// and idle. Back-pressure on the candidate output is held. An open-list
// update then refreshes the tabu list and the pair is found again. The run
// length from the price list to the candidate is checked against
// pre + core + verify.
module tb_sbm_module;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sim_we; idx_t sim_i, sim_j; fx_t sim_data, mc, mp, threshold;
  logic [7:0] miss_limit; logic seed_load; logic [31:0] seed;
  logic price_valid, price_ready, olist_valid, olist_ready, open_valid, open_ready, idle;
  price_list_t prices; pair_map_t olist, tabu; open_info_t open_info;
  logic [31:0] n_runs, n_effective, n_pre, n_refresh, n_rng_stall;
  sbm_module dut (.*);
  fx_t S [NODES][NODES];
  task automatic chk(bit c, string msg); checks++; if (!c) begin failures++; $display("FAIL %s", msg); end endtask
  initial begin
    #40000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cyc;
    fx_t w52;
    sim_we = 0; sim_i = '0; sim_j = '0; sim_data = '0; mc = fx_from_real(50.0); mp = fx_from_real(0.15);
    threshold = fx_from_real(-0.003); miss_limit = 8'd2; seed_load = 0; seed = 32'h9E37_79B9;
    price_valid = 0; prices = '0; olist_valid = 0; olist = '0; open_ready = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    seed_load = 1; @(negedge clk); seed_load = 0;
    for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++) begin
      S[i][j] = (i == 3 || i == 5 || j == 7 || j == 2) ? fx_from_real(1.0) : fx_from_real(1.0/3.0);
      sim_we = 1; sim_i = idx_t'(i); sim_j = idx_t'(j); sim_data = S[i][j]; @(negedge clk);
    end
    sim_we = 0;
    chk(idle && n_runs == 0, "idle without a graph");
    for (int k = 1; k < NODES; k++) begin
      prices.bid[k] = fx_from_real((k == 5) ? 1.0 : 0.98);
      prices.ask[k] = fx_from_real((k == 2) ? 0.994 : 1.01);
    end
    w52 = fx_mul(S[5][2], prices.ask[2] - prices.bid[5]);
    price_valid = 1;
    cyc = 0;
    while (!price_ready) begin @(negedge clk); cyc++; end
    @(negedge clk); price_valid = 0; cyc++;
    while (!open_valid) begin @(negedge clk); cyc++; end
    $display("price list to candidate: %0d cycles", cyc);
    chk(cyc >= 213 + 1652 && cyc <= 213 + 1652 + 25, "pre + core + verify latency");
    chk(open_info.pair.short_stk == 5 && open_info.pair.long_stk == 2, "pair (5,2) found");
    chk(open_info.value == w52 && open_info.hops == 1, "direct path value");
    chk(tabu[5][2], "registered in the tabu list before the judge answers");
    repeat (50) @(negedge clk);
    chk(open_valid && open_info.pair.short_stk == 5, "candidate held under back-pressure");
    open_ready = 1; @(negedge clk); open_ready = 0;
    while (!idle) @(negedge clk);
    chk(n_runs == 1 + 2 && n_effective == 1 && n_pre == 1, "one effective then miss_limit runs, one pre");
    chk(n_rng_stall == 0, "initial states ready for every run");
    // open-list update (empty O): tabu refreshed, pair found again
    olist_valid = 1; olist = '0;
    while (!olist_ready) @(negedge clk);
    @(negedge clk); olist_valid = 0;
    while (!open_valid) @(negedge clk);
    chk(n_refresh == 1 && n_pre == 1, "refresh without a new graph");
    chk(open_info.pair.short_stk == 5 && open_info.pair.long_stk == 2, "found again after refresh");
    open_ready = 1;
    while (!idle) @(negedge clk);
    chk(n_effective == 2, "two effective runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
