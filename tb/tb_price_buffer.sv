// tb_price_buffer: feeds update single entries of the price list; the list is
// offered after each update, held while the consumer is busy, and feeds that
// arrive meanwhile are merged (counted in coalesced).
module tb_price_buffer;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic feed_valid, feed_ready, list_valid, list_ready;
  feed_t feed; price_list_t list; logic [31:0] coalesced;
  fx_t ask_m [NODES], bid_m [NODES];
  price_buffer dut (.*);
  task automatic chk(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  task automatic push(int k, fx_t a, fx_t b);
    feed_valid = 1; feed.stock = idx_t'(k); feed.ask = a; feed.bid = b;
    ask_m[k] = a; bid_m[k] = b;
    @(negedge clk); feed_valid = 0;
  endtask
  function automatic bit list_ok();
    for (int k = 1; k < NODES; k++) if (list.ask[k] != ask_m[k] || list.bid[k] != bid_m[k]) return 0;
    return 1;
  endfunction
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    feed_valid = 0; feed = '0; list_ready = 0;
    for (int k = 0; k < NODES; k++) begin ask_m[k] = 0; bid_m[k] = 0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    chk(!list_valid, "nothing offered after reset");
    push(4, 32'sd1000, 32'sd900);
    chk(list_valid && list_ok(), "list offered with the new entry");
    // consumer busy: three more feeds merged
    push(7, 32'sd2000, 32'sd1900);
    push(4, 32'sd1100, 32'sd1000);
    push(9, 32'sd3000, 32'sd2900);
    chk(coalesced == 3, "three feeds merged");
    chk(list_valid && list_ok(), "newest list offered");
    list_ready = 1; @(negedge clk); list_ready = 0;
    chk(!list_valid, "list taken, nothing pending");
    // random
    for (int t = 0; t < 300; t++) begin
      push($urandom_range(1, NODES-1), fx_t'($urandom), fx_t'($urandom));
      chk(list_valid && list_ok(), "random update");
      if ($urandom_range(0, 1)) begin list_ready = 1; @(negedge clk); list_ready = 0; chk(!list_valid, "taken"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
