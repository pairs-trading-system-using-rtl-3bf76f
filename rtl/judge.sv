// judge: judgment module with the open list O.
//
// Takes the open candidates found by the SBM module and makes the final open
// decision: a candidate is opened when trading is enabled (host control
// signal), fewer than p_max pair positions are open, and the pair is not
// already open (no duplicate positions). An opened pair is registered in O
// before its orders are issued, and is passed to the message generator. A
// rejected candidate is dropped (the SBM module has already put it in its tabu
// list; that is harmless, see below).
//
// Close information from the host (a pair whose closing is confirmed) clears
// the pair from O. Whenever the number of positions falls, the current O is
// offered to the SBM module on the olist_* channel, which makes it refresh its
// tabu list from O. Updates that pile up while the channel is busy are merged:
// the newest O is sent once.
//
// The decision rule and the O/T protocol follow the paper; the handshakes and
// the merge policy are this design's choices. An accepted candidate leaves in
// the cycle the message generator takes it; a rejected one is consumed at
// once.
module judge
  import pt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [7:0]  p_max,
  // open candidates from the SBM module
  input  logic        cand_valid,
  output logic        cand_ready,
  input  open_info_t  cand,
  // close information from the host
  input  logic        close_valid,
  output logic        close_ready,
  input  pair_t       close_pair,
  // opened pairs to the message generator
  output logic        order_valid,
  input  logic        order_ready,
  output pair_t       order_pair,
  // open-list updates to the SBM module
  output logic        olist_valid,
  input  logic        olist_ready,
  output pair_map_t   olist,
  // status
  output logic [7:0]  n_open,
  output logic [31:0] n_accepted,
  output logic [31:0] n_rejected
);
  pair_map_t o;
  logic      olist_pending;
  logic      accept, dup, do_open, do_close, close_hit;

  assign dup        = o[cand.pair.short_stk][cand.pair.long_stk];
  assign accept     = enable && (n_open < p_max) && !dup;
  assign cand_ready = accept ? order_ready : 1'b1;
  assign do_open    = cand_valid && accept && order_ready;
  assign order_valid = cand_valid && accept;
  assign order_pair  = cand.pair;

  assign close_ready = 1'b1;
  assign do_close    = close_valid;
  assign close_hit   = close_valid && o[close_pair.short_stk][close_pair.long_stk];

  assign olist_valid = olist_pending;
  assign olist       = o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o <= '0; n_open <= '0; olist_pending <= 1'b0; n_accepted <= '0; n_rejected <= '0;
    end else begin
      pair_map_t n;
      n = o;
      if (do_open)  n[cand.pair.short_stk][cand.pair.long_stk] = 1'b1;
      if (do_close) n[close_pair.short_stk][close_pair.long_stk] = 1'b0;
      o <= n;
      n_open <= n_open + 8'(do_open) - 8'(close_hit);
      if (do_open) n_accepted <= n_accepted + 1;
      if (cand_valid && !accept) n_rejected <= n_rejected + 1;
      if (olist_valid && olist_ready) olist_pending <= 1'b0;
      if (close_hit) olist_pending <= 1'b1;
    end
  end
endmodule
