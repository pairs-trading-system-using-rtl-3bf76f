// graph_mem: market graph memory M of the SBM module.
//
// Holds the edge weight w_ij of every directed edge (i, j) of the NODES-node
// market graph. Row 0 and column 0 belong to the dummy node and always read as
// zero (w_k0 = w_0k = 0), as the path-search formulation requires; writes to
// them are ignored. The preprocessing unit writes one weight per cycle; the SB
// core reads a whole row per cycle (the NODES weights of the edges leaving node
// row_sel) and the verifier reads single weights. The paper names this memory
// and says the SB computation units access it directly; the port layout is
// this design's choice.
//
// Timing: writes land at the clock edge; both reads are combinational.
module graph_mem
  import pt_pkg::*;
#(
  parameter int NODES_P = NODES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     we,
  input  idx_t     wi,
  input  idx_t     wj,
  input  fx_t      wdata,
  input  idx_t     row_sel,
  output fx_t      row_data [NODES_P],
  input  idx_t     pt_i,
  input  idx_t     pt_j,
  output fx_t      pt_data
);
  fx_t w [NODES_P][NODES_P];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NODES_P; i++)
        for (int j = 0; j < NODES_P; j++) w[i][j] <= '0;
    end else if (we && wi != '0 && wj != '0 && wi != wj) begin
      w[wi][wj] <= wdata;
    end
  end

  always_comb begin
    for (int j = 0; j < NODES_P; j++) row_data[j] = w[row_sel][j];
    pt_data = w[pt_i][pt_j];
  end
endmodule
