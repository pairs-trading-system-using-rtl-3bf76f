// tb_tabu_mem: random registrations and refreshes against a bitmap model.
module tb_tabu_mem;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic reg_en, refresh_en; pair_t reg_pair; pair_map_t refresh_map, tab, m;
  tabu_mem dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    reg_en = 0; refresh_en = 0; reg_pair = '0; refresh_map = '0; m = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    checks++; if (tab != '0) failures++;
    for (int t = 0; t < 1000; t++) begin
      reg_en = ($urandom_range(0, 2) != 0);
      refresh_en = ($urandom_range(0, 9) == 0);
      reg_pair.short_stk = idx_t'($urandom_range(1, NODES-1)); reg_pair.long_stk = idx_t'($urandom_range(1, NODES-1));
      for (int i = 0; i < NODES; i++) refresh_map[i] = 16'($urandom) & 16'($urandom);
      if (refresh_en) m = refresh_map;
      if (reg_en) m[reg_pair.short_stk][reg_pair.long_stk] = 1;
      @(negedge clk);
      checks++; if (tab != m) begin failures++; $display("FAIL at %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
