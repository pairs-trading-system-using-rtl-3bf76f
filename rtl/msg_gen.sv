// msg_gen: message generator, between the judgment module and the transmitter.
//
// For each opened pair (short s, long l) it emits two orders: sell L_s lots
// of stock s, then buy L_l lots of stock l. The lot counts
// L_k = round(A_trans / (S_k^min * p_k^b)) make the amount of every order about
// the same; they are computed by the host each day and written into the lot
// table (lot_* port). It also forwards the closing orders of the host's
// position management. Open orders have priority over closing orders.
//
// The two-order expansion, the lot rule and the forwarding of closing orders
// follow the paper; the order record format and the priority are this
// design's own (the paper does not give the packet format, which the
// transmitter defines).
//
// Timing: the sell order of a pair is offered in the cycle the pair arrives;
// the buy order follows in the cycle after the sell order is taken.
module msg_gen
  import pt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        lot_we,
  input  idx_t        lot_idx,
  input  logic [15:0] lot_data,
  // opened pairs
  input  logic        pair_valid,
  output logic        pair_ready,
  input  pair_t       pair,
  // closing orders from the host
  input  logic        close_valid,
  output logic        close_ready,
  input  order_t      close_order,
  // orders to the transmitter
  output logic        out_valid,
  input  logic        out_ready,
  output order_t      out_order
);
  logic [15:0] lots [NODES];
  logic        second;   // sell sent, buy pending

  always_ff @(posedge clk) begin
    if (lot_we) lots[lot_idx] <= lot_data;
  end

  always_comb begin
    out_order   = '0;
    pair_ready  = 1'b0;
    close_ready = 1'b0;
    out_valid   = 1'b0;
    if (pair_valid) begin
      out_valid       = 1'b1;
      out_order.buy   = second;
      out_order.stock = second ? pair.long_stk : pair.short_stk;
      out_order.lots  = lots[out_order.stock];
      pair_ready      = second && out_ready;
    end else if (close_valid) begin
      out_valid         = 1'b1;
      out_order         = close_order;
      out_order.closing = 1'b1;
      close_ready       = out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) second <= 1'b0;
    else if (pair_valid && out_ready) second <= !second;
  end
endmodule
