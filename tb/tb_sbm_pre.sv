// tb_sbm_pre: loads a random similarity table and price list, runs the
// preprocessing unit and compares every written weight with
// s_ij * (ask_j - bid_i) computed here; checks that all N(N-1) pairs are
// written exactly once and the run length (N(N-1) + 3 cycles to done).
module tb_sbm_pre;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sim_we, start, busy, done, m_we; idx_t sim_i, sim_j, m_i, m_j; fx_t sim_data, m_data;
  price_list_t prices;
  fx_t S [NODES][NODES];
  int written [NODES][NODES];
  sbm_pre dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && m_we) begin
    longint p;
    fx_t e;
    p = longint'(S[m_i][m_j]) * longint'(prices.ask[m_j] - prices.bid[m_i]);
    e = fx_t'(p >>> FRAC);
    written[m_i][m_j]++;
    checks++;
    if (m_data != e) begin failures++; $display("FAIL w[%0d][%0d] %0d exp %0d", m_i, m_j, m_data, e); end
  end
  initial begin
    int cyc;
    sim_we = 0; start = 0; sim_i = '0; sim_j = '0; sim_data = '0; prices = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++) begin
        S[i][j] = fx_t'($urandom_range(0, 1 << FRAC));
        sim_we = 1; sim_i = idx_t'(i); sim_j = idx_t'(j); sim_data = S[i][j]; written[i][j] = 0;
        @(negedge clk);
      end
      sim_we = 0;
      for (int k = 0; k < NODES; k++) begin
        prices.bid[k] = FX_ONE + fx_t'($urandom_range(0, 40000)) - 20000;
        prices.ask[k] = prices.bid[k] + fx_t'($urandom_range(0, 4000)) - 2000;
      end
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != N_STOCKS * (N_STOCKS - 1) + 3) begin failures++; $display("FAIL cycles %0d", cyc); end
      for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++) begin
        checks++;
        if (written[i][j] != ((i != 0 && j != 0 && i != j) ? 1 : 0)) begin failures++; $display("FAIL written %0d %0d", i, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
