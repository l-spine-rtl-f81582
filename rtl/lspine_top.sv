// lspine_top: the L-SPINE spiking-neural-network accelerator.
//
// A host (a RISC-V controller in the published system, outside this RTL)
// drives everything through the word bus of data_interface:
//   1. it writes the layer configuration into map_record, the packed weights
//      into the synaptic_core memory and the input image into the encoder's
//      pixel memory;
//   2. a weight-load command makes synaptic_core stream the weights through
//      ring_fifo into the filter scratchpads of the nce_array engines, one
//      32-bit word (four filter words) per cycle;
//   3. a run command starts leak_fsm, which for every timestep has
//      spike_encoder turn pixels into spikes in spike_buffer, feeds them to
//      the array, integrates, then leaks and fires every membrane word;
//   4. fired spikes go to neuron_memory (latest timestep) and spike_counter
//      (totals and winner), which the host reads back.
// Status word (address 0x011): [7:0] timestep, [8] run busy, [9] load busy,
// [10] run done, [11] configuration refused, [12] load done; done flags clear
// when the matching command is issued. irq_done pulses at the end of a run.
// The array's vertical psum chain is not used by this sequencer (use_psum is
// 0); it remains available in nce_array. Block set and roles follow the
// published system diagram; the bus, address map and sequencing are this
// design's choices.
module lspine_top
  import lspine_pkg::*;
#(
  parameter int unsigned ROWS        = 8,
  parameter int unsigned COLS        = 8,
  parameter int unsigned IFMAP_DEPTH = 12,
  parameter int unsigned FILT_DEPTH  = 224,
  parameter int unsigned VMEM_DEPTH  = 24,
  parameter int unsigned N_COUNT     = 16,
  parameter int unsigned FIFO_DEPTH  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_we,
  input  logic        host_re,
  input  logic [15:0] host_addr,
  input  logic [31:0] host_wdata,
  output logic [31:0] host_rdata,
  output logic        host_rvalid,
  output logic        irq_done
);

  localparam int unsigned N      = ROWS * COLS;
  localparam int unsigned SEL_W  = 6;
  localparam int unsigned GROUPS = FILT_DEPTH / 4;
  localparam int unsigned GW     = $clog2(GROUPS);
  localparam int unsigned FA_W   = $clog2(FILT_DEPTH);
  localparam int unsigned VA_W   = $clog2(VMEM_DEPTH);
  localparam int unsigned IA_W   = $clog2(IFMAP_DEPTH);
  localparam int unsigned KW     = $clog2(N_COUNT);
  localparam int unsigned FW     = SEL_W + GW + 32;

  // ---- host bus decode
  logic        rec_we, run_start, load_start, wm_we, pix_we, di_sb_we;
  logic [2:0]  rec_addr;
  logic [31:0] rec_rdata, wm_rdata, status;
  logic [11:0] wm_addr;
  logic [9:0]  pix_addr, di_sb_addr;
  logic        sb_host_rdata;
  logic [4:0]  nm_word;
  logic [5:0]  nm_nce;
  logic [3:0]  nm_rdata;
  logic [KW-1:0] cnt_idx, winner;
  logic [7:0]  cnt_rdata;

  data_interface #(.WM_AW(12), .PIX_AW(10), .SB_AW(10), .KW(KW), .CNT_W(8)) u_di (
    .clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .rec_we, .rec_addr, .rec_rdata, .run_start, .load_start, .status,
    .wm_we, .wm_addr, .wm_rdata, .pix_we, .pix_addr,
    .sb_we(di_sb_we), .sb_addr(di_sb_addr), .sb_rdata(sb_host_rdata),
    .nm_word, .nm_nce, .nm_rdata, .cnt_idx, .cnt_rdata, .winner
  );

  // ---- layer configuration
  layer_cfg_t cfg;
  map_record u_rec (
    .clk, .rst_n, .we(rec_we), .addr(rec_addr), .wdata(host_wdata), .rdata(rec_rdata), .cfg
  );

  // ---- weights: memory -> ring FIFO -> filter scratchpads
  logic          fifo_push, fifo_full, fifo_empty, syn_busy, syn_done;
  logic [FW-1:0] fifo_in, fifo_out;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;

  synaptic_core #(.DEPTH(4096), .GROUPS(GROUPS), .SEL_W(SEL_W)) u_syn (
    .clk, .rst_n, .host_we(wm_we), .host_addr(wm_addr), .host_wdata, .host_rdata(wm_rdata),
    .start(load_start), .n_words(cfg.n_load_words), .fifo_push, .fifo_data(fifo_in),
    .fifo_full, .busy(syn_busy), .done(syn_done)
  );

  ring_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(fifo_push), .in_data(fifo_in), .pop(!fifo_empty),
    .out_data(fifo_out), .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  // ---- spikes: encoder -> spike buffer
  logic       enc_start, enc_done, enc_busy, enc_we, enc_spike;
  logic [9:0] enc_addr, sb_raddr;
  logic       sb_rdata;

  spike_encoder #(.NPIX(1024)) u_enc (
    .clk, .rst_n, .pix_we, .pix_waddr(pix_addr), .pix_wdata(host_wdata[7:0]),
    .start(enc_start), .n_pix(cfg.n_inputs), .sb_we(enc_we), .sb_waddr(enc_addr),
    .sb_wdata(enc_spike), .busy(enc_busy), .done(enc_done)
  );

  spike_buffer #(.DEPTH(1024)) u_sb (
    .clk,
    .we        (enc_we || di_sb_we),
    .waddr     (enc_we ? enc_addr : di_sb_addr),
    .wdata     (enc_we ? enc_spike : host_wdata[0]),
    .raddr     (sb_raddr),
    .rdata     (sb_rdata),
    .host_raddr(di_sb_addr),
    .host_rdata(sb_host_rdata)
  );

  // ---- sequencer
  logic            spike_shift, fire_valid, counter_clear, run_busy, run_done, cfg_err;
  nce_op_e         op;
  logic [VA_W-1:0] vaddr, fire_word;
  logic [FA_W-1:0] faddr;
  logic [IA_W-1:0] iaddr;
  logic [7:0]      timestamp;

  leak_fsm #(
    .IFMAP_DEPTH(IFMAP_DEPTH), .FILT_DEPTH(FILT_DEPTH), .VMEM_DEPTH(VMEM_DEPTH), .SB_AW(10)
  ) u_fsm (
    .clk, .rst_n, .start(run_start), .cfg, .enc_start, .enc_done, .sb_raddr, .spike_shift,
    .op, .vaddr, .faddr, .iaddr, .fire_valid, .fire_word, .counter_clear, .timestamp,
    .busy(run_busy), .done(run_done), .cfg_err
  );

  // ---- neuron array
  logic [WORD_W-1:0]    psum  [N];
  logic [MAX_LANES-1:0] spikes [N];
  logic                 arr_valid;

  nce_array #(
    .ROWS(ROWS), .COLS(COLS), .IFMAP_DEPTH(IFMAP_DEPTH), .FILT_DEPTH(FILT_DEPTH),
    .VMEM_DEPTH(VMEM_DEPTH), .STAGES(3)
  ) u_arr (
    .clk, .rst_n, .pc(cfg.pc), .vth(cfg.vth), .vleak(cfg.vleak), .leak_mode(cfg.leak_mode),
    .leak_shift(cfg.leak_shift), .leak_sticky(cfg.leak_sticky),
    .spike_in(sb_rdata), .spike_shift,
    .filt_we(!fifo_empty), .filt_sel(fifo_out[FW-1 -: SEL_W]),
    .filt_waddr(fifo_out[32 +: GW]), .filt_wdata(fifo_out[31:0]),
    .op, .vaddr, .faddr, .iaddr, .use_psum(1'b0),
    .psum_out(psum), .spike_out(spikes), .out_valid(arr_valid)
  );

  // ---- spike outputs
  logic [4*N-1:0] spike_flat;
  always_comb
    for (int e = 0; e < N; e++) spike_flat[4*e +: 4] = spikes[e];

  neuron_memory #(.N_NCE(N), .VMEM_DEPTH(VMEM_DEPTH)) u_nm (
    .clk, .we(fire_valid), .waddr(fire_word), .wdata(spike_flat),
    .host_word(VA_W'(nm_word)), .host_nce(nm_nce), .host_rdata(nm_rdata)
  );

  logic [7:0] counts [N_COUNT];
  spike_counter #(.N_NCE(N), .N_COUNT(N_COUNT), .CNT_W(8), .VA_W(VA_W)) u_cnt (
    .clk, .rst_n, .clear(counter_clear), .pc(cfg.pc), .fire_valid, .fire_word,
    .spikes, .count(counts), .winner
  );
  assign cnt_rdata = counts[cnt_idx];

  // ---- status
  logic run_done_q, load_done_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_done_q  <= 1'b0;
      load_done_q <= 1'b0;
    end else begin
      if (run_start)     run_done_q <= 1'b0;
      else if (run_done) run_done_q <= 1'b1;
      if (load_start)    load_done_q <= 1'b0;
      else if (syn_done) load_done_q <= 1'b1;
    end
  end

  assign status = {19'd0, load_done_q, cfg_err, run_done_q,
                   syn_busy || !fifo_empty, run_busy, timestamp};
  assign irq_done = run_done;

endmodule
