// tb_graph_mem: random writes against a model; dummy-node row/column and the
// diagonal must stay zero; row and point reads must agree with the model.
module tb_graph_mem;
  import pt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; idx_t wi, wj, row_sel, pt_i, pt_j; fx_t wdata, pt_data;
  fx_t row_data [NODES];
  fx_t m [NODES][NODES];
  graph_mem dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; wi = '0; wj = '0; wdata = '0; row_sel = '0; pt_i = '0; pt_j = '0;
    for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++) m[i][j] = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      we = 1; wi = idx_t'($urandom_range(0, NODES-1)); wj = idx_t'($urandom_range(0, NODES-1)); wdata = fx_t'($urandom);
      if (wi != 0 && wj != 0 && wi != wj) m[wi][wj] = wdata;
      @(negedge clk);
      we = 0;
      pt_i = idx_t'($urandom_range(0, NODES-1)); pt_j = idx_t'($urandom_range(0, NODES-1)); row_sel = idx_t'($urandom_range(0, NODES-1));
      #1;
      checks++; if (pt_data != m[pt_i][pt_j]) begin failures++; $display("FAIL point %0d %0d", pt_i, pt_j); end
      for (int j = 0; j < NODES; j++) begin
        checks++; if (row_data[j] != m[row_sel][j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
