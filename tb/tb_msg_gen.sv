// tb_msg_gen: each opened pair becomes "sell L_short lots of the short stock"
// then "buy L_long lots of the long stock"; closing orders are forwarded with
// the closing flag; open pairs win over closing orders; back-pressure holds.
module tb_msg_gen;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic lot_we; idx_t lot_idx; logic [15:0] lot_data;
  logic pair_valid, pair_ready, close_valid, close_ready, out_valid, out_ready;
  pair_t pair; order_t close_order, out_order;
  msg_gen dut (.*);
  order_t exp_q [$];
  logic [15:0] lots [NODES];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_order != exp_q[0]) begin failures++; $display("FAIL order %p", out_order); end
    else void'(exp_q.pop_front());
  end
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    order_t o;
    lot_we = 0; lot_idx = '0; lot_data = '0; pair_valid = 0; pair = '0; close_valid = 0; close_order = '0; out_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int k = 0; k < NODES; k++) begin
      lots[k] = 16'($urandom_range(1, 5000));
      lot_we = 1; lot_idx = idx_t'(k); lot_data = lots[k]; @(negedge clk);
    end
    lot_we = 0;
    for (int t = 0; t < 200; t++) begin
      int s, l;
      s = $urandom_range(1, NODES-1); l = $urandom_range(1, NODES-1);
      // a closing order and a pair at once: the pair goes first
      close_valid = 1; close_order = '0; close_order.buy = $urandom_range(0, 1);
      close_order.stock = idx_t'($urandom_range(1, NODES-1)); close_order.lots = 16'($urandom);
      pair_valid = 1; pair.short_stk = idx_t'(s); pair.long_stk = idx_t'(l);
      o = '0; o.buy = 0; o.stock = idx_t'(s); o.lots = lots[s]; exp_q.push_back(o);
      o = '0; o.buy = 1; o.stock = idx_t'(l); o.lots = lots[l]; exp_q.push_back(o);
      o = close_order; o.closing = 1; exp_q.push_back(o);
      while (1) begin
        out_ready = $urandom_range(0, 1);
        #1;
        if (pair_ready) begin @(negedge clk); pair_valid = 0; break; end
        @(negedge clk);
      end
      while (1) begin
        out_ready = $urandom_range(0, 1);
        #1;
        if (close_ready) begin @(negedge clk); close_valid = 0; break; end
        @(negedge clk);
      end
    end
    @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d orders missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
