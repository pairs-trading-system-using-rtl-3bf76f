// tb_judge: open candidates and close confirmations against a model of the
// open list: accept when enabled, below p_max and not a duplicate; closing a
// held pair frees it and offers the new O to the SBM once (merged).
module tb_judge;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic enable; logic [7:0] p_max, n_open;
  logic cand_valid, cand_ready, close_valid, close_ready, order_valid, order_ready, olist_valid, olist_ready;
  open_info_t cand; pair_t close_pair, order_pair; pair_map_t olist;
  logic [31:0] n_accepted, n_rejected;
  judge dut (.*);
  pair_map_t m; int cnt, acc, rej;
  pair_t sent [$];
  always @(posedge clk) if (rst_n && order_valid && order_ready) sent.push_back(order_pair);
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string msg); checks++; if (!c) begin failures++; $display("FAIL %s", msg); end endtask
  task automatic offer(int s, int l);
    bit a;
    cand = '0; cand.pair.short_stk = idx_t'(s); cand.pair.long_stk = idx_t'(l); cand_valid = 1;
    a = enable && (cnt < p_max) && !m[s][l];
    while (1) begin
      #1;
      if (cand_ready) break;
      @(negedge clk);
    end
    @(negedge clk); cand_valid = 0;
    if (a) begin m[s][l] = 1; cnt++; acc++; end else rej++;
    chk(olist == m && n_open == cnt && n_accepted == acc && n_rejected == rej, "after candidate");
  endtask
  task automatic close(int s, int l);
    bit hit;
    hit = m[s][l];
    close_valid = 1; close_pair.short_stk = idx_t'(s); close_pair.long_stk = idx_t'(l);
    @(negedge clk); close_valid = 0;
    if (hit) begin m[s][l] = 0; cnt--; end
    chk(olist == m && n_open == cnt, "after close");
    chk(olist_valid == hit || olist_valid, "update offered after a freed pair");
  endtask
  initial begin
    enable = 0; p_max = 3; cand_valid = 0; cand = '0; close_valid = 0; close_pair = '0;
    order_ready = 1; olist_ready = 0; m = '0; cnt = 0; acc = 0; rej = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    offer(1, 2);                 // disabled -> rejected
    enable = 1;
    offer(1, 2); offer(1, 2);    // second is a duplicate
    order_ready = 0;             // message generator busy: candidate waits
    fork
      offer(3, 4);
      begin repeat (5) @(negedge clk); chk(cand_valid && !cand_ready, "waiting for the message generator"); order_ready = 1; end
    join
    offer(5, 6);
    offer(7, 8);                 // p_max reached
    chk(sent.size() == 3, "three pairs passed to the message generator");
    chk(!olist_valid, "no O update before a close");
    close(9, 9);                 // not open: nothing
    chk(!olist_valid, "no update for an unknown pair");
    close(3, 4);
    close(1, 2);                 // two closes merged into one update
    chk(olist_valid && olist == m, "O update offered");
    olist_ready = 1; @(negedge clk); olist_ready = 0;
    chk(!olist_valid, "one merged update");
    offer(7, 8);                 // room again
    for (int t = 0; t < 300; t++) begin
      p_max = 8'($urandom_range(0, 6)); enable = ($urandom_range(0, 5) != 0);
      if ($urandom_range(0, 1)) offer($urandom_range(1, 4), $urandom_range(1, 4));
      else close($urandom_range(1, 4), $urandom_range(1, 4));
      if ($urandom_range(0, 1)) begin olist_ready = 1; @(negedge clk); olist_ready = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
