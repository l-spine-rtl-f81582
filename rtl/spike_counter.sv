// spike_counter: output spike counts and the winning output neuron.
//
// N_COUNT saturating counters of CNT_W bits count the spikes of the output
// neurons over all timesteps of an inference. Output neuron k is lane k % L
// of membrane word 0 of engine k / L, L being the lanes per word at the
// current precision (4, 2 or 1), i.e. the first N_COUNT neurons in engine
// order. Counting happens when fire_valid is high for word 0. clear zeroes
// all counters. winner is the index of the largest count (lowest index on a
// tie), combinational from the counters. The spike counter is named in the
// published diagram; the neuron mapping and argmax are this design's.
module spike_counter
  import lspine_pkg::*;
#(
  parameter int unsigned N_NCE   = 64,
  parameter int unsigned N_COUNT = 16,
  parameter int unsigned CNT_W   = 8,
  parameter int unsigned VA_W    = 5,
  localparam int unsigned KW     = $clog2(N_COUNT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  prec_e                pc,
  input  logic                 fire_valid,
  input  logic [VA_W-1:0]      fire_word,
  input  logic [MAX_LANES-1:0] spikes [N_NCE],
  output logic [CNT_W-1:0]     count  [N_COUNT],
  output logic [KW-1:0]        winner
);

  logic [N_COUNT-1:0] hit;

  // Spike of output neuron k in this fire cycle.
  always_comb begin
    for (int k = 0; k < N_COUNT; k++) begin
      unique case (pc)
        PC_INT2: hit[k] = (k / 4 < N_NCE) ? spikes[k / 4][k % 4] : 1'b0;
        PC_INT4: hit[k] = (k / 2 < N_NCE) ? spikes[k / 2][k % 2] : 1'b0;
        default: hit[k] = (k < N_NCE)     ? spikes[k][0]         : 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_COUNT; k++) count[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < N_COUNT; k++) count[k] <= '0;
    end else if (fire_valid && fire_word == '0) begin
      for (int k = 0; k < N_COUNT; k++)
        if (hit[k] && count[k] != '1) count[k] <= count[k] + 1'b1;
    end
  end

  always_comb begin
    winner = '0;
    for (int k = 1; k < N_COUNT; k++)
      if (count[k] > count[winner]) winner = KW'(k);
  end

endmodule
