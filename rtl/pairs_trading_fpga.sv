// pairs_trading_fpga: FPGA part of the pairs-trading system, from the decoded
// market feed to the order records.
//
// Data flow (each arrow a streaming channel with a FIFO, each box running on
// its own):
//   feed -> price_buffer (P) -> sbm_module (pre, M, T, core, verify)
//        -> judge (O) -> msg_gen -> orders
//   host close info -> judge;  judge O updates -> sbm_module (tabu refresh)
//   host closing orders -> msg_gen
// The receiver, transmitter, Ethernet PHY and PCIe interface of the real
// system are vendor/board IP and are not part of this RTL; their sides appear
// here as plain valid/ready ports: feed_* (decoded market feed from the
// receiver), order_* (to the transmitter), close_* and cpu_order_* and the
// configuration inputs (from the host through PCIe).
//
// Configuration (host): similarity memory s_ij (sim_*), lot table (lot_*),
// QUBO weights mc/mp, open threshold, p_max, trading enable, RNG seed, and the
// number of consecutive ineffective SB executions before the SBM idles.
module pairs_trading_fpga
  import pt_pkg::*;
#(
  parameter int  NSTEP      = 50,
  parameter fx_t DT         = fx_from_real(0.65),
  parameter int  FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // market feed from the receiver
  input  logic        feed_valid,
  output logic        feed_ready,
  input  feed_t       feed,
  // orders to the transmitter
  output logic        order_valid,
  input  logic        order_ready,
  output order_t      order,
  // host: close confirmation and closing orders
  input  logic        close_valid,
  output logic        close_ready,
  input  pair_t       close_pair,
  input  logic        cpu_order_valid,
  output logic        cpu_order_ready,
  input  order_t      cpu_order,
  // host: configuration
  input  logic        sim_we,
  input  idx_t        sim_i,
  input  idx_t        sim_j,
  input  fx_t         sim_data,
  input  logic        lot_we,
  input  idx_t        lot_idx,
  input  logic [15:0] lot_data,
  input  fx_t         mc,
  input  fx_t         mp,
  input  fx_t         threshold,
  input  logic [7:0]  p_max,
  input  logic        enable,
  input  logic [7:0]  miss_limit,
  input  logic        seed_load,
  input  logic [31:0] seed,
  // status
  output pair_map_t   open_list,
  output pair_map_t   tabu_list,
  output logic [7:0]  n_open,
  output logic [31:0] n_runs,
  output logic [31:0] n_effective,
  output logic [31:0] n_pre,
  output logic [31:0] n_refresh,
  output logic [31:0] n_rng_stall,
  output logic [31:0] n_coalesced,
  output logic [31:0] n_accepted,
  output logic [31:0] n_rejected,
  output logic        sbm_idle
);
  // RX -> price buffer
  logic  f_valid, f_ready;  feed_t f_data;
  stream_fifo #(.T(feed_t), .DEPTH(FIFO_DEPTH)) u_feed_fifo (
    .clk, .rst_n, .in_valid(feed_valid), .in_ready(feed_ready), .in_data(feed),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count()
  );

  logic pl_valid, pl_ready;  price_list_t pl;
  price_buffer u_p (
    .clk, .rst_n, .feed_valid(f_valid), .feed_ready(f_ready), .feed(f_data),
    .list_valid(pl_valid), .list_ready(pl_ready), .list(pl), .coalesced(n_coalesced)
  );

  // judge -> SBM open-list updates
  logic jo_valid, jo_ready, so_valid, so_ready;  pair_map_t jo_map, so_map;
  stream_fifo #(.T(pair_map_t), .DEPTH(2)) u_olist_fifo (
    .clk, .rst_n, .in_valid(jo_valid), .in_ready(jo_ready), .in_data(jo_map),
    .out_valid(so_valid), .out_ready(so_ready), .out_data(so_map), .count()
  );

  // SBM module
  logic sc_valid, sc_ready;  open_info_t sc_info;
  sbm_module #(.NSTEP(NSTEP), .DT(DT)) u_sbm (
    .clk, .rst_n, .sim_we, .sim_i, .sim_j, .sim_data, .mc, .mp, .threshold,
    .miss_limit, .seed_load, .seed,
    .price_valid(pl_valid), .price_ready(pl_ready), .prices(pl),
    .olist_valid(so_valid), .olist_ready(so_ready), .olist(so_map),
    .open_valid(sc_valid), .open_ready(sc_ready), .open_info(sc_info),
    .tabu(tabu_list), .n_runs, .n_effective, .n_pre, .n_refresh, .n_rng_stall,
    .idle(sbm_idle)
  );

  // SBM -> judge open candidates
  logic jc_valid, jc_ready;  open_info_t jc_info;
  stream_fifo #(.T(open_info_t), .DEPTH(FIFO_DEPTH)) u_cand_fifo (
    .clk, .rst_n, .in_valid(sc_valid), .in_ready(sc_ready), .in_data(sc_info),
    .out_valid(jc_valid), .out_ready(jc_ready), .out_data(jc_info), .count()
  );

  // host -> judge close info
  logic hc_valid, hc_ready;  pair_t hc_pair;
  stream_fifo #(.T(pair_t), .DEPTH(FIFO_DEPTH)) u_close_fifo (
    .clk, .rst_n, .in_valid(close_valid), .in_ready(close_ready), .in_data(close_pair),
    .out_valid(hc_valid), .out_ready(hc_ready), .out_data(hc_pair), .count()
  );

  logic jp_valid, jp_ready;  pair_t jp_pair;
  judge u_judge (
    .clk, .rst_n, .enable, .p_max,
    .cand_valid(jc_valid), .cand_ready(jc_ready), .cand(jc_info),
    .close_valid(hc_valid), .close_ready(hc_ready), .close_pair(hc_pair),
    .order_valid(jp_valid), .order_ready(jp_ready), .order_pair(jp_pair),
    .olist_valid(jo_valid), .olist_ready(jo_ready), .olist(jo_map),
    .n_open, .n_accepted, .n_rejected
  );
  assign open_list = jo_map;

  // judge -> message generator
  logic mp_valid, mp_ready;  pair_t mp_pair;
  stream_fifo #(.T(pair_t), .DEPTH(FIFO_DEPTH)) u_pair_fifo (
    .clk, .rst_n, .in_valid(jp_valid), .in_ready(jp_ready), .in_data(jp_pair),
    .out_valid(mp_valid), .out_ready(mp_ready), .out_data(mp_pair), .count()
  );

  // host -> message generator closing orders
  logic mc_valid, mc_ready;  order_t mc_order;
  stream_fifo #(.T(order_t), .DEPTH(FIFO_DEPTH)) u_cpu_fifo (
    .clk, .rst_n, .in_valid(cpu_order_valid), .in_ready(cpu_order_ready), .in_data(cpu_order),
    .out_valid(mc_valid), .out_ready(mc_ready), .out_data(mc_order), .count()
  );

  logic mo_valid, mo_ready;  order_t mo_order;
  msg_gen u_msg (
    .clk, .rst_n, .lot_we, .lot_idx, .lot_data,
    .pair_valid(mp_valid), .pair_ready(mp_ready), .pair(mp_pair),
    .close_valid(mc_valid), .close_ready(mc_ready), .close_order(mc_order),
    .out_valid(mo_valid), .out_ready(mo_ready), .out_order(mo_order)
  );

  // message generator -> TX
  stream_fifo #(.T(order_t), .DEPTH(FIFO_DEPTH)) u_order_fifo (
    .clk, .rst_n, .in_valid(mo_valid), .in_ready(mo_ready), .in_data(mo_order),
    .out_valid(order_valid), .out_ready(order_ready), .out_data(order), .count()
  );
endmodule
