// pt_pkg: sizes, number format and channel payloads shared by the pairs-trading
// datapath.
//
// The market graph has N_STOCKS stock nodes plus one dummy node (index 0), so
// NODES = 16 and the SB machine has NODES*NODES = 256 spin slots, of which the
// 240 off-diagonal ones are the edge variables b_ij of the path-search QUBO
// (the 16 diagonal slots are held at zero). These sizes follow the paper's
// main configuration (15-stock universe, 16 nodes, 240 directed edges, 256
// spins). Stock k (1..15) is node k.
//
// Numbers are 32-bit signed fixed point with FRAC fraction bits (Q12.20). The
// paper's machine computes in 32-bit floating point; fixed point is this
// design's own choice. Prices are normalised by the day's base price, so they
// sit near 1.0.
package pt_pkg;

  localparam int N_STOCKS = 15;
  localparam int NODES    = N_STOCKS + 1;
  localparam int IDXW     = $clog2(NODES);
  localparam int FRAC     = 20;

  typedef logic signed [31:0] fx_t;
  typedef logic [IDXW-1:0]    idx_t;

  localparam fx_t FX_ONE = fx_t'(1) <<< FRAC;

  // Fixed-point multiply, truncating toward minus infinity.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC);
  endfunction

  // Real (test benches / parameter defaults) to fixed point, rounded.
  function automatic fx_t fx_from_real(real r);
    return fx_t'($rtoi(r * real'(1 << FRAC) + ((r < 0.0) ? -0.5 : 0.5)));
  endfunction

  // One market feed record: best ask and bid of one stock, normalised.
  typedef struct packed {
    idx_t stock;   // 1..N_STOCKS
    fx_t  ask;
    fx_t  bid;
  } feed_t;

  // The whole price list P, indexed by node (entry 0 unused).
  typedef struct packed {
    fx_t [NODES-1:0] ask;
    fx_t [NODES-1:0] bid;
  } price_list_t;

  // A pair position: short (sell) stock and long (buy) stock.
  typedef struct packed {
    idx_t short_stk;
    idx_t long_stk;
  } pair_t;

  // Open candidate reported by the SBM module to the judgment module.
  typedef struct packed {
    pair_t pair;
    fx_t   value;   // weight sum of the cyclic path found
    idx_t  hops;    // stock-to-stock edges on the path: 1 = direct, >1 = bypass
  } open_info_t;

  // Pair bitmap indexed [short][long]: used for the open list O and tabu list T.
  typedef logic [NODES-1:0][NODES-1:0] pair_map_t;

  // Order record handed to the transmitter.
  typedef struct packed {
    logic        buy;     // 1 = buy (long), 0 = sell (short)
    idx_t        stock;
    logic [15:0] lots;
    logic        closing; // 1 = closing order forwarded from the CPU
  } order_t;

endpackage
