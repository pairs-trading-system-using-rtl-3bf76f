// sbm_pre: preprocessing unit of the SBM module.
//
// Builds the market graph from the latest price list: for every ordered pair
// of distinct stocks (i, j) it computes the edge weight
//     w_ij = s_ij * (ask_j - bid_i)
// (short stock i, long stock j) and writes it into the graph memory M. The
// similarity factors s_ij (DTW-distance based, in [0,1]) sit in a local
// memory that the host rewrites once a day before trading (sim_* port). The
// formula and the similarity memory follow the paper; the pipeline is this
// design's own.
//
// Operation: a start pulse captures the price list and walks the N(N-1) pairs
// in row order, one pair per cycle, through a 3-stage pipeline (similarity
// read and price difference, multiply, write). done pulses one cycle after the
// last weight is written: N(N-1) + 3 cycles after start (213 for N = 15; the
// paper's unit takes 216). busy is high from start to done.
module sbm_pre
  import pt_pkg::*;
#(
  parameter int NODES_P = NODES
) (
  input  logic        clk,
  input  logic        rst_n,
  // similarity memory load (host, once a day)
  input  logic        sim_we,
  input  idx_t        sim_i,
  input  idx_t        sim_j,
  input  fx_t         sim_data,
  // run control
  input  logic        start,
  input  price_list_t prices,
  output logic        busy,
  output logic        done,
  // write port into graph memory M
  output logic        m_we,
  output idx_t        m_i,
  output idx_t        m_j,
  output fx_t         m_data
);
  localparam idx_t LAST = idx_t'(NODES_P - 1);

  fx_t         sim [NODES_P][NODES_P];
  price_list_t pl;

  // stage 0: pair counter
  logic issuing;
  idx_t ci, cj;
  // stage 1: similarity and price difference
  logic v1;
  idx_t i1, j1;
  fx_t  s1, d1;
  // stage 2: product
  logic v2;
  idx_t i2, j2;
  fx_t  p2;

  always_ff @(posedge clk) begin
    if (sim_we) sim[sim_i][sim_j] <= sim_data;
  end

  // next pair after (ci, cj) in row order, skipping the diagonal
  idx_t ni, nj;
  logic last_pair;
  always_comb begin
    last_pair = (ci == LAST) && (cj == LAST - 1'b1);
    ni = ci;
    nj = cj + 1'b1;
    if (nj == ci) nj = nj + 1'b1;
    if (nj > LAST || nj == '0) begin
      ni = ci + 1'b1;
      nj = (ni == idx_t'(1)) ? idx_t'(2) : idx_t'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      ci <= '0; cj <= '0;
      v1 <= 1'b0; v2 <= 1'b0;
      i1 <= '0; j1 <= '0; s1 <= '0; d1 <= '0;
      i2 <= '0; j2 <= '0; p2 <= '0;
      pl <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        pl      <= prices;
        issuing <= 1'b1;
        busy    <= 1'b1;
        ci      <= idx_t'(1);
        cj      <= idx_t'(2);
      end else if (issuing) begin
        if (last_pair) issuing <= 1'b0;
        ci <= ni;
        cj <= nj;
      end
      // stage 1
      v1 <= issuing;
      i1 <= ci;
      j1 <= cj;
      s1 <= sim[ci][cj];
      d1 <= pl.ask[cj] - pl.bid[ci];
      // stage 2
      v2 <= v1;
      i2 <= i1;
      j2 <= j1;
      p2 <= fx_mul(s1, d1);
      // stage 3: write (m_* driven from stage-2 registers), then done
      if (busy && !issuing && !v1 && v2) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign m_we   = v2;
  assign m_i    = i2;
  assign m_j    = j2;
  assign m_data = p2;
endmodule
