// synaptic_core: global synaptic weight memory and its loader.
//
// The host writes 32-bit weight words (four packed 8-bit filter words each)
// into DEPTH words of memory. A start pulse copies words 0..n_words-1 into the
// ring FIFO, one per cycle while the FIFO is not full; each entry is tagged
// with its destination: word k goes to engine k / GROUPS, filter group
// k % GROUPS (GROUPS = filter scratchpad depth / 4), so engine e's filter
// scratchpad is words e*GROUPS .. e*GROUPS+GROUPS-1. The tags are kept as two
// counters, not computed by division. FIFO entry = {engine, group, data}.
// done pulses one cycle after the last push. The host can read the memory
// back through a combinational port. Loading the engines once per layer and
// reusing the weights over every timestep follows the published dataflow;
// the block's insides and memory depth are this design's.
module synaptic_core #(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned GROUPS = 56,
  parameter int unsigned SEL_W  = 6,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned GW    = $clog2(GROUPS),
  localparam int unsigned EW    = SEL_W + GW + 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  logic [31:0]   host_wdata,
  output logic [31:0]   host_rdata,
  input  logic          start,
  input  logic [AW:0]   n_words,
  output logic          fifo_push,
  output logic [EW-1:0] fifo_data,
  input  logic          fifo_full,
  output logic          busy,
  output logic          done
);

  logic [31:0]      mem [DEPTH];
  logic [AW:0]      k;
  logic [SEL_W-1:0] eng;
  logic [GW-1:0]    grp;

  always_ff @(posedge clk) begin
    if (host_we) mem[host_addr] <= host_wdata;
  end
  assign host_rdata = mem[host_addr];

  assign fifo_push = busy && !fifo_full;
  assign fifo_data = {eng, grp, mem[k[AW-1:0]]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k    <= '0;
      eng  <= '0;
      grp  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          k    <= '0;
          eng  <= '0;
          grp  <= '0;
          busy <= (n_words != 0);
          done <= (n_words == 0);
        end
      end else if (!fifo_full) begin
        k <= k + 1'b1;
        if (32'(grp) == GROUPS - 1) begin
          grp <= '0;
          eng <= eng + 1'b1;
        end else begin
          grp <= grp + 1'b1;
        end
        if (k == n_words - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
