// tb_xorshift32: compares the sequence with Marsaglia's published first value
// for seed 2463534242 (723471715) and with a model of the recurrence.
module tb_xorshift32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic seed_load, en; logic [31:0] seed, rnd, m;
  xorshift32 dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    seed_load = 0; en = 0; seed = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    checks++; if (rnd == 0) failures++;
    seed_load = 1; seed = 32'd2463534242; @(negedge clk); seed_load = 0;
    en = 1; @(negedge clk); en = 0;
    checks++; if (rnd != 32'd723471715) begin failures++; $display("FAIL first value %0d", rnd); end
    m = rnd;
    for (int t = 0; t < 500; t++) begin
      en = $urandom_range(0, 1);
      if (en) begin m ^= m << 13; m ^= m >> 17; m ^= m << 5; end
      @(negedge clk);
      checks++; if (rnd != m) begin failures++; $display("FAIL step %0d", t); end
    end
    seed_load = 1; seed = 0; @(negedge clk); seed_load = 0;
    checks++; if (rnd == 0) begin failures++; $display("FAIL zero seed accepted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
