// ring_fifo: circular-buffer FIFO between the weight memory and the engines.
//
// DEPTH entries (a power of two) of WIDTH bits in a ring, addressed by read
// and write pointers one bit wider than the index; the extra wrap bit tells a
// full ring (pointers equal except the wrap bit) from an empty one (equal).
// push writes in_data when not full; pop drops the head when not empty;
// out_data always shows the head (first-word fall-through), valid when !empty.
// Both may happen in one cycle. The ring-based FIFO is named in the published
// design; its depth, width and handshake are this design's choices.
module ring_fifo #(
  parameter int unsigned WIDTH = 44,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] in_data,
  input  logic             pop,
  output logic [WIDTH-1:0] out_data,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  assign empty    = (wptr == rptr);
  assign full     = (wptr[AW-1:0] == rptr[AW-1:0]) && (wptr[AW] != rptr[AW]);
  assign count    = wptr - rptr;
  assign out_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push && !full) wptr <= wptr + 1'b1;
      if (pop && !empty) rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
