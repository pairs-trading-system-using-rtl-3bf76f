// stream_fifo: FIFO buffer of one directed streaming channel.
//
// Every module of the datapath runs on its own and talks to its neighbours
// only through such channels, as in the paper's system, where each link between
// modules is a stream with a FIFO. The FIFO depth and the valid/ready handshake
// are this design's choice (the paper gives neither).
//
// Interface: write side in_valid/in_ready/in_data, read side
// out_valid/out_ready/out_data. A beat moves when valid and ready are both high
// at a rising clock edge. out_data is the head entry (registered storage,
// combinational read); a word written into an empty FIFO is visible on the next
// cycle. Full throughput: one beat in and one beat out per cycle.
module stream_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T               mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic           do_wr, do_rd;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  // Handshake rule: a producer keeps valid high and the data stable until the
  // beat is taken.
  property p_stable_until_taken;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_stable_until_taken);

endmodule
