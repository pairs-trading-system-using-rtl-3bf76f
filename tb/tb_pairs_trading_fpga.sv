// tb_pairs_trading_fpga: end-to-end test of the FPGA datapath at its default
// sizes (15 stocks, 16-node graph, 256 spins, 50 SB steps).
//
// The host side is modelled by the test bench: it loads the similarity memory
// and the lot table, sends market feeds, watches the order stream, and sends
// close confirmations and closing orders. Market situations are built so
// that one pair is clearly mispriced: every stock bids 0.98 and asks 1.01,
// except the short candidate, which bids 1.00, and the long candidate, whose
// ask is below 1.00. The similarity table is 1 for rows of stocks 3 and 5 and
// columns of stocks 7 and 2, and 1/3 elsewhere, so every other edge weighs
// about +0.01.
//
// Sequence and what it exercises:
//   A  feeds for the (3,7) market with an unreachable threshold: price
//      coalescing, preprocessing, ineffective runs, going idle.
//   B  threshold set, one more feed, trading disabled: (3,7) is found,
//      registered in the tabu list and rejected by the judge (Event 5).
//   C  trading enabled, market moves to the (5,2) situation, the last feed
//      arrives while the SBM idles: (5,2) opens; orders "sell 5, buy 2" with
//      the lot table's counts; feed-to-order latency is checked.
//   D  host closes (5,2) and sends a closing order: the judge frees the pair,
//      sends O to the SBM, which refreshes its tabu list (dropping (3,7)) and
//      finds (5,2) again; the closing order is forwarded.
//   E  p_max = 1 and a second close/refresh with the pair still open in the
//      judge's count: the rediscovered pair is rejected for exceeding p_max.
// Each mechanism is counted; one that never happens counts as a failure.
module tb_pairs_trading_fpga;
  import pt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;

  logic feed_valid, feed_ready;  feed_t feed;
  logic order_valid, order_ready; order_t order;
  logic close_valid, close_ready; pair_t close_pair;
  logic cpu_order_valid, cpu_order_ready; order_t cpu_order;
  logic sim_we; idx_t sim_i, sim_j; fx_t sim_data;
  logic lot_we; idx_t lot_idx; logic [15:0] lot_data;
  fx_t mc, mp, threshold;
  logic [7:0] p_max, miss_limit;
  logic enable, seed_load;
  logic [31:0] seed;
  pair_map_t open_list, tabu_list;
  logic [7:0] n_open;
  logic [31:0] n_runs, n_effective, n_pre, n_refresh, n_rng_stall, n_coalesced, n_accepted, n_rejected;
  logic sbm_idle;

  pairs_trading_fpga dut (.*);

  // ---- order monitor ----
  order_t got [$];
  longint first_order_cycle;
  always @(posedge clk) if (rst_n && order_valid && order_ready) begin
    got.push_back(order);
    if (first_order_cycle < 0) first_order_cycle = cycle;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send_feed(int stk, real ask, real bid);
    feed_valid = 1;
    feed.stock = idx_t'(stk); feed.ask = fx_from_real(ask); feed.bid = fx_from_real(bid);
    @(negedge clk);
    while (!feed_ready) @(negedge clk);
    feed_valid = 0;
  endtask

  task automatic send_close(int s, int l);
    close_valid = 1; close_pair.short_stk = idx_t'(s); close_pair.long_stk = idx_t'(l);
    @(negedge clk);
    while (!close_ready) @(negedge clk);
    close_valid = 0;
  endtask

  // wait until the SBM has been idle for a while (no pending work)
  task automatic wait_idle();
    int quiet;
    quiet = 0;
    while (quiet < 20) begin
      @(negedge clk);
      if (sbm_idle && !dut.pl_valid && !dut.so_valid) quiet++; else quiet = 0;
    end
  endtask

  // market: every stock bids 0.98 / asks 1.01 except the short (bid 1.00)
  // and long (ask = long_ask) candidates
  task automatic send_market(int s, int l, real long_ask);
    for (int k = 1; k < NODES; k++)
      send_feed(k, (k == l) ? long_ask : 1.01, (k == s) ? 1.0 : 0.98);
  endtask

  initial begin
    #40000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_coalesce, m_pre, m_consecutive, m_effective, m_rej_enable, m_rej_pmax,
      m_open, m_refresh, m_idle, m_close_fwd;
  longint t_feed, lat;

  initial begin
    int runs0, pre0;
    first_order_cycle = -1;
    feed_valid = 0; feed = '0; order_ready = 1; close_valid = 0; close_pair = '0;
    cpu_order_valid = 0; cpu_order = '0; sim_we = 0; sim_i = '0; sim_j = '0; sim_data = '0;
    lot_we = 0; lot_idx = '0; lot_data = '0;
    mc = fx_from_real(50.0); mp = fx_from_real(0.15);
    threshold = fx_from_real(-100.0);
    p_max = 8'd16; enable = 0; miss_limit = 8'd3; seed_load = 0; seed = 32'h1234_5678;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // host configuration: RNG seed, similarity table and lot table
    seed_load = 1; @(negedge clk); seed_load = 0;
    for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++) begin
      sim_we = 1; sim_i = idx_t'(i); sim_j = idx_t'(j);
      sim_data = (i == 3 || i == 5 || j == 7 || j == 2) ? fx_from_real(1.0) : fx_from_real(1.0/3.0);
      @(negedge clk);
    end
    sim_we = 0;
    for (int k = 0; k < NODES; k++) begin
      lot_we = 1; lot_idx = idx_t'(k); lot_data = 16'(100 + k); @(negedge clk);
    end
    lot_we = 0;

    // ---- A: load the (3,7) market, nothing can pass the threshold ----
    send_market(3, 7, 0.99);
    wait_idle();
    m_coalesce = n_coalesced;
    m_idle++;
    check(n_effective == 0, "A: no effective solution expected");
    check(n_pre >= 2, "A: graph rebuilt for the coalesced feeds");
    // weights in M: w_37 = 1*(0.99-1.00), w_12 = (1)(1.01-0.98)
    check(dut.u_sbm.u_m.w[3][7] == fx_mul(fx_from_real(1.0), fx_from_real(0.99) - fx_from_real(1.0)),
          "A: graph weight w_37");
    check(dut.u_sbm.u_m.w[4][6] == fx_mul(fx_from_real(1.0/3.0), fx_from_real(1.01) - fx_from_real(0.98)),
          "A: graph weight w_46");

    // ---- B: threshold set, trading disabled: found, tabu, rejected ----
    threshold = fx_from_real(-0.003);
    runs0 = n_runs;
    send_feed(3, 1.01, 1.0);
    wait_idle();
    check(n_effective == 1, "B: one effective solution");
    check(tabu_list[3][7] == 1'b1, "B: (3,7) registered in the tabu list");
    check(n_rejected == 1 && n_open == 0 && open_list == '0, "B: judge rejected (trading disabled)");
    check(got.size() == 0, "B: no order issued");
    if (n_rejected == 1) m_rej_enable++;
    if (n_effective == 1) m_effective++;
    // after the effective run the SBM ran again without new feeds
    if (n_runs - runs0 >= 2) m_consecutive++;
    check(n_runs - runs0 == 1 + 3, "B: one effective run then miss_limit ineffective runs");

    // ---- C: move to the (5,2) market, trading enabled ----
    enable = 1;
    send_feed(3, 1.01, 0.98);
    send_feed(7, 1.01, 0.98);
    send_feed(5, 1.01, 1.0);
    wait_idle();
    check(got.size() == 0, "C: no order before the opportunity appears");
    pre0 = n_pre;
    t_feed = cycle;
    send_feed(2, 0.994, 0.98);
    wait_idle();
    lat = first_order_cycle - t_feed;
    $display("feed-to-order latency: %0d cycles", lat);
    // pre 213 + core 1652 + verify 6 + channel and handshake stages
    check(lat >= 1865 && lat <= 1895, "C: feed-to-order latency");
    check(n_pre == pre0 + 1, "C: one preprocessing run");
    m_pre += (n_pre > 0);
    check(got.size() == 2, "C: two orders");
    if (got.size() == 2) begin
      check(got[0].buy == 0 && got[0].stock == 5 && got[0].lots == 105 && !got[0].closing, "C: sell 105 lots of stock 5");
      check(got[1].buy == 1 && got[1].stock == 2 && got[1].lots == 102 && !got[1].closing, "C: buy 102 lots of stock 2");
    end
    check(open_list[5][2] && n_open == 1, "C: (5,2) in the open list");
    check(tabu_list[5][2] && tabu_list[3][7], "C: tabu holds (5,2) and (3,7)");
    if (n_accepted == 1) m_open++;

    // ---- D: host closes (5,2) -> O update -> tabu refresh -> reopen ----
    got.delete();
    cpu_order_valid = 1; cpu_order = '0; cpu_order.buy = 1; cpu_order.stock = idx_t'(5); cpu_order.lots = 16'd105;
    @(negedge clk); while (!cpu_order_ready) @(negedge clk);
    cpu_order_valid = 0;
    send_close(5, 2);
    wait_idle();
    check(n_refresh == 1, "D: tabu refreshed once");
    check(!tabu_list[3][7], "D: refresh dropped (3,7) from the tabu list");
    check(tabu_list[5][2] && open_list[5][2] && n_open == 1, "D: (5,2) found and opened again");
    check(got.size() == 3, "D: closing order plus two open orders");
    if (got.size() == 3) begin
      check(got[0].closing && got[0].buy && got[0].stock == 5, "D: closing order forwarded first");
      check(!got[1].buy && got[1].stock == 5 && got[2].buy && got[2].stock == 2, "D: reopen orders");
    end
    if (n_refresh >= 1) m_refresh++;
    if (got.size() >= 1 && got[0].closing) m_close_fwd++;

    // ---- E: p_max = 1: close frees O, but a second open (5,2)... rejected by p_max ----
    // keep one position open by opening it in the judge's count: set p_max to 0
    got.delete();
    p_max = 8'd0;
    send_close(5, 2);
    wait_idle();
    check(n_refresh == 2, "E: tabu refreshed again");
    check(n_rejected == 2 && n_open == 0 && got.size() == 0, "E: rediscovered pair rejected by p_max");
    if (n_rejected == 2) m_rej_pmax++;

    check(n_rng_stall == 0, "initial states always ready (RNG latency hidden)");

    $display("mechanisms: coalesce=%0d pre=%0d consecutive=%0d effective=%0d rej_enable=%0d rej_pmax=%0d open=%0d refresh=%0d idle=%0d close_fwd=%0d",
             m_coalesce, m_pre, m_consecutive, m_effective, m_rej_enable, m_rej_pmax, m_open, m_refresh, m_idle, m_close_fwd);
    check(m_coalesce > 0, "mechanism: price coalescing");
    check(m_pre > 0, "mechanism: preprocessing");
    check(m_consecutive > 0, "mechanism: consecutive execution");
    check(m_effective > 0, "mechanism: effective solution");
    check(m_rej_enable > 0, "mechanism: judge rejection (disabled)");
    check(m_rej_pmax > 0, "mechanism: judge rejection (p_max)");
    check(m_open > 0, "mechanism: open");
    check(m_refresh > 0, "mechanism: tabu refresh from O");
    check(m_idle > 0, "mechanism: idle after misses");
    check(m_close_fwd > 0, "mechanism: closing order forwarding");
    $display("runs=%0d pre=%0d cycles=%0d", n_runs, n_pre, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
