// price_buffer: price list P of the N tradable stocks (best ask and best bid).
//
// Each market feed record (one stock's new ask and bid, from the receiver)
// overwrites that stock's entry. The whole list is then offered to the SBM
// module on the list_* channel. If the SBM has not taken the previous list yet,
// further feeds only update P and are folded into the one list that is sent
// next (the SBM always works on the newest prices); coalesced counts how many
// feeds were folded this way. The paper gives this block's function and the
// list contents (2N values); the coalescing policy is this design's choice.
//
// Timing: a feed accepted at edge k is part of a list offered from cycle k+1.
// The feed input is always ready.
module price_buffer
  import pt_pkg::*;
#(
  parameter int NODES_P = NODES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        feed_valid,
  output logic        feed_ready,
  input  feed_t       feed,
  output logic        list_valid,
  input  logic        list_ready,
  output price_list_t list,
  output logic [31:0] coalesced
);
  price_list_t p;
  logic        pending;

  assign feed_ready = 1'b1;
  assign list_valid = pending;
  assign list       = p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p         <= '0;
      pending   <= 1'b0;
      coalesced <= '0;
    end else begin
      if (list_valid && list_ready) pending <= 1'b0;
      if (feed_valid && int'(feed.stock) != 0 && int'(feed.stock) < NODES_P) begin
        p.ask[feed.stock] <= feed.ask;
        p.bid[feed.stock] <= feed.bid;
        pending           <= 1'b1;
        if (pending && !list_ready) coalesced <= coalesced + 1;
      end
    end
  end
endmodule
