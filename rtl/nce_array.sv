// nce_array: the 2D array of neuron compute engines.
//
// ROWS x COLS nce instances share one layer configuration (precision,
// threshold, leak) and receive the same operation, scratchpad addresses and
// input spike every cycle, so all engines work in lock-step on different
// neurons. Engine (r,c) has index r*COLS+c; its filter scratchpad is written
// when filt_we is set and filt_sel equals that index. Within each column the
// engines are chained: engine (r,c) sees the psum_out of (r-1,c) as its
// psum_in (row 0 sees 0), so with use_psum a column can pass a partial sum one
// row down per cycle. Outputs of every engine are brought out as arrays,
// indexed by engine number. Timing is that of nce: one operation per cycle,
// results one cycle later.
//
// The grid itself is from the published block diagram; its size (8 x 8 by
// default), the broadcast control and the use of the neighbour links as a
// vertical psum chain are this design's choices.
module nce_array
  import lspine_pkg::*;
#(
  parameter int unsigned ROWS        = 8,
  parameter int unsigned COLS        = 8,
  parameter int unsigned IFMAP_DEPTH = 12,
  parameter int unsigned FILT_DEPTH  = 224,
  parameter int unsigned VMEM_DEPTH  = 24,
  parameter int unsigned STAGES      = 3,
  localparam int unsigned N     = ROWS * COLS,
  localparam int unsigned SEL_W = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned FG_AW = $clog2(FILT_DEPTH / 4),
  localparam int unsigned FA_W  = $clog2(FILT_DEPTH),
  localparam int unsigned VA_W  = $clog2(VMEM_DEPTH),
  localparam int unsigned IA_W  = $clog2(IFMAP_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  prec_e                pc,
  input  logic [WORD_W-1:0]    vth,
  input  logic [WORD_W-1:0]    vleak,
  input  logic                 leak_mode,
  input  logic [STAGES-1:0]    leak_shift,
  input  logic                 leak_sticky,
  input  logic                 spike_in,
  input  logic                 spike_shift,
  input  logic                 filt_we,
  input  logic [SEL_W-1:0]     filt_sel,
  input  logic [FG_AW-1:0]     filt_waddr,
  input  logic [4*WORD_W-1:0]  filt_wdata,
  input  nce_op_e              op,
  input  logic [VA_W-1:0]      vaddr,
  input  logic [FA_W-1:0]      faddr,
  input  logic [IA_W-1:0]      iaddr,
  input  logic                 use_psum,
  output logic [WORD_W-1:0]    psum_out  [N],
  output logic [MAX_LANES-1:0] spike_out [N],
  output logic                 out_valid
);

  logic [N-1:0] valid_v;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned IDX = r * COLS + c;
      logic [WORD_W-1:0] psum_up;
      if (r == 0) begin : g_top
        assign psum_up = '0;
      end else begin : g_below
        assign psum_up = psum_out[IDX - COLS];
      end
      nce #(
        .IFMAP_DEPTH(IFMAP_DEPTH),
        .FILT_DEPTH (FILT_DEPTH),
        .VMEM_DEPTH (VMEM_DEPTH),
        .STAGES     (STAGES)
      ) u_nce (
        .clk        (clk),
        .rst_n      (rst_n),
        .pc         (pc),
        .vth        (vth),
        .vleak      (vleak),
        .leak_mode  (leak_mode),
        .leak_shift (leak_shift),
        .leak_sticky(leak_sticky),
        .spike_in   (spike_in),
        .spike_shift(spike_shift),
        .filt_we    (filt_we && (32'(filt_sel) == IDX)),
        .filt_waddr (filt_waddr),
        .filt_wdata (filt_wdata),
        .op         (op),
        .vaddr      (vaddr),
        .faddr      (faddr),
        .iaddr      (iaddr),
        .use_psum   (use_psum),
        .psum_in    (psum_up),
        .psum_out   (psum_out[IDX]),
        .spike_out  (spike_out[IDX]),
        .out_valid  (valid_v[IDX])
      );
    end
  end

  // All engines run the same operation, so their valid flags agree.
  assign out_valid = valid_v[0];

endmodule
