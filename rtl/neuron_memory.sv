// neuron_memory: output spikes of every neuron for the latest timestep.
//
// One row per membrane-word index v (VMEM_DEPTH rows); a row holds the lane
// spikes of all N_NCE engines, engine e in bits [4e +: 4]. When the array
// fires word v, the sequencer writes the spikes of all engines into row v in
// the same cycle, so a row always holds the newest timestep's spikes. The
// host reads four bits (the lanes of one engine and word) combinationally.
// Named in the published diagram; its organisation is this design's choice.
module neuron_memory #(
  parameter int unsigned N_NCE      = 64,
  parameter int unsigned VMEM_DEPTH = 24,
  localparam int unsigned VA_W = $clog2(VMEM_DEPTH),
  localparam int unsigned EW   = (N_NCE > 1) ? $clog2(N_NCE) : 1
) (
  input  logic               clk,
  input  logic               we,
  input  logic [VA_W-1:0]    waddr,
  input  logic [4*N_NCE-1:0] wdata,
  input  logic [VA_W-1:0]    host_word,
  input  logic [EW-1:0]      host_nce,
  output logic [3:0]         host_rdata
);

  logic [4*N_NCE-1:0] mem [VMEM_DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign host_rdata = mem[host_word][4*host_nce +: 4];

endmodule
