// map_record: layer configuration registers ("map record").
//
// Eight host-writable registers hold how the current layer is mapped onto the
// engines; they are read back combinationally and presented as one
// layer_cfg_t struct. Register map (word addresses, low bits of the data):
//   0 pc[1:0]          1 n_inputs[10:0]     2 n_vwords[4:0]   3 timesteps[7:0]
//   4 vth[7:0]         5 vleak[7:0]
//   6 {leak_sticky, leak_mode, leak_shift[2:0]}               7 n_load_words[12:0]
// Reset values: INT8, one input, one word, one timestep, zero threshold and
// leak. The block is named in the published diagram; its contents are this
// design's choice (the 8-bit threshold register is from the published PE).
module map_record
  import lspine_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [2:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output layer_cfg_t  cfg
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '{pc: PC_INT8, n_inputs: 11'd1, n_vwords: 5'd1, timesteps: 8'd1, default: '0};
    end else if (we) begin
      unique case (addr)
        3'd0: cfg.pc           <= prec_e'(wdata[1:0]);
        3'd1: cfg.n_inputs     <= wdata[10:0];
        3'd2: cfg.n_vwords     <= wdata[4:0];
        3'd3: cfg.timesteps    <= wdata[7:0];
        3'd4: cfg.vth          <= wdata[7:0];
        3'd5: cfg.vleak        <= wdata[7:0];
        3'd6: {cfg.leak_sticky, cfg.leak_mode, cfg.leak_shift} <= wdata[4:0];
        default: cfg.n_load_words <= wdata[12:0];
      endcase
    end
  end

  always_comb begin
    unique case (addr)
      3'd0: rdata = 32'(cfg.pc);
      3'd1: rdata = 32'(cfg.n_inputs);
      3'd2: rdata = 32'(cfg.n_vwords);
      3'd3: rdata = 32'(cfg.timesteps);
      3'd4: rdata = 32'(cfg.vth);
      3'd5: rdata = 32'(cfg.vleak);
      3'd6: rdata = 32'({cfg.leak_sticky, cfg.leak_mode, cfg.leak_shift});
      default: rdata = 32'(cfg.n_load_words);
    endcase
  end

endmodule
