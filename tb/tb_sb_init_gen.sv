// tb_sb_init_gen: after a seed load the buffer fills in NODES*NODES cycles;
// its contents must be the Xorshift sequence shifted down by Y0_SHIFT; a take
// while ready starts a new fill, a take while filling counts a stall.
module tb_sb_init_gen;
  import pt_pkg::*;
  localparam int NS = NODES * NODES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic seed_load, take, ready; logic [31:0] seed, stalls;
  fx_t y0 [NS];
  sb_init_gen dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check_contents(inout logic [31:0] x);
    for (int k = 0; k < NS; k++) begin
      checks++;
      if (y0[k] != ($signed(x) >>> 12)) begin failures++; $display("FAIL y0[%0d]", k); end
      x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    end
  endtask
  initial begin
    int cyc;
    logic [31:0] x;
    seed_load = 0; take = 0; seed = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    seed_load = 1; seed = 32'hCAFE_F00D; @(negedge clk); seed_load = 0;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    checks++; if (cyc != NS) begin failures++; $display("FAIL fill took %0d", cyc); end
    x = 32'hCAFE_F00D;
    check_contents(x);
    take = 1; @(negedge clk); take = 0;
    checks++; if (ready) failures++;
    repeat (10) @(negedge clk);
    take = 1; repeat (5) @(negedge clk); take = 0;
    checks++; if (stalls != 5) begin failures++; $display("FAIL stalls %0d", stalls); end
    while (!ready) @(negedge clk);
    check_contents(x);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
