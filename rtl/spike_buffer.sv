// spike_buffer: bit-addressed store of the input spikes of one timestep.
//
// The encoder (or the host) writes one spike per cycle through the write
// port; the sequencer reads one spike per cycle through a registered read
// port (data valid the cycle after the address); the host reads through a
// second, combinational port. DEPTH bits, 1024 by default to hold a 28 x 28
// image with room to spare. The buffer between encoder and engine array is
// from the published block diagram; depth and port timing are this design's.
module spike_buffer #(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic          wdata,
  input  logic [AW-1:0] raddr,
  output logic          rdata,
  input  logic [AW-1:0] host_raddr,
  output logic          host_rdata
);

  logic mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  assign host_rdata = mem[host_raddr];

endmodule
