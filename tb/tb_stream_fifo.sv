// tb_stream_fifo: random push/pop traffic against a queue model; checks data
// order, count, full/empty flags and that a depth-4 FIFO takes 4 words.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [2:0] count;
  logic [31:0] q [$];
  stream_fifo #(.T(logic [31:0]), .DEPTH(4)) dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int pushed;
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    checks++; if (out_valid || !in_ready || count != 0) failures++;
    // fill to full
    pushed = 0;
    while (in_ready) begin
      in_valid = 1; in_data = 32'hA0 + pushed; q.push_back(in_data); pushed++;
      @(negedge clk);
    end
    in_valid = 0;
    checks++; if (pushed != 4 || count != 4) begin failures++; $display("FAIL depth %0d", pushed); end
    // random traffic
    for (int t = 0; t < 2000; t++) begin
      in_valid = $urandom_range(0, 1); in_data = $urandom; out_ready = $urandom_range(0, 1);
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin failures++; $display("FAIL data"); end
        else void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
      checks++;
      if (count != q.size()) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
