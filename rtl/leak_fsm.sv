// leak_fsm: timestep sequencer of the neuron array ("leak FSM").
//
// On start it checks that the layer fits (n_inputs * n_vwords filter words
// and n_vwords membrane words per engine), clears the spike counter and
// issues CLEAR for every membrane word. Then, for each of cfg.timesteps
// timesteps:
//   1. ENC:   pulses enc_start and waits for the encoder's done.
//   2. LOAD:  reads the next chunk of up to IFMAP_DEPTH spikes from the spike
//             buffer (registered read, one per cycle) and shifts them into
//             every engine's IFmap scratchpad: len+1 cycles.
//   3. INTEG: for every membrane word v and every input j of the chunk,
//             INTEGRATE with filter address v*n_inputs + chunk_base + j and
//             IFmap index len-1-j: n_vwords*len cycles. 2 and 3 repeat per
//             chunk until all inputs are used.
//   4. FIRE:  FIRE (leak, threshold, reset) for every word: n_vwords cycles.
//             fire_valid/fire_word mark the cycle in which the array's
//             spike outputs for word fire_word are valid.
// timestamp is the current timestep. done pulses once at the end (also after
// a refused configuration, with cfg_err set). A timestep with I inputs in
// C chunks takes (encoder: I+2) + sum(len+1) + n_vwords*I + n_vwords cycles.
// The paper names a leak FSM that drives the neuron dynamics; the order of
// phases and all timing here are this design's.
module leak_fsm
  import lspine_pkg::*;
#(
  parameter int unsigned IFMAP_DEPTH = 12,
  parameter int unsigned FILT_DEPTH  = 224,
  parameter int unsigned VMEM_DEPTH  = 24,
  parameter int unsigned SB_AW       = 10,
  localparam int unsigned FA_W = $clog2(FILT_DEPTH),
  localparam int unsigned VA_W = $clog2(VMEM_DEPTH),
  localparam int unsigned IA_W = $clog2(IFMAP_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             enc_start,
  input  logic             enc_done,
  output logic [SB_AW-1:0] sb_raddr,
  output logic             spike_shift,
  output nce_op_e          op,
  output logic [VA_W-1:0]  vaddr,
  output logic [FA_W-1:0]  faddr,
  output logic [IA_W-1:0]  iaddr,
  output logic             fire_valid,
  output logic [VA_W-1:0]  fire_word,
  output logic             counter_clear,
  output logic [7:0]       timestamp,
  output logic             busy,
  output logic             done,
  output logic             cfg_err
);

  typedef enum logic [2:0] {
    S_IDLE, S_CLEAR, S_ENC, S_ENC_WAIT, S_LOAD, S_INTEG, S_FIRE, S_DONE
  } state_e;

  state_e      state;
  logic [4:0]  v;
  logic [IA_W-1:0] j, k, len;
  logic [10:0] cb, vbase;
  logic [7:0]  t;

  // Chunk length for the chunk starting at base b.
  function automatic logic [IA_W-1:0] chunk_len(logic [10:0] ni, logic [10:0] b);
    return (ni - b > 11'(IFMAP_DEPTH)) ? IA_W'(IFMAP_DEPTH) : IA_W'(ni - b);
  endfunction

  logic fits;
  assign fits = (cfg.n_vwords != 0) && (32'(cfg.n_vwords) <= VMEM_DEPTH) &&
                (cfg.n_inputs != 0) && (32'(cfg.n_inputs) <= (1 << SB_AW)) &&
                (cfg.timesteps != 0) &&
                (32'(cfg.n_inputs) * 32'(cfg.n_vwords) <= FILT_DEPTH);

  logic [10:0] faddr_full;
  assign faddr_full = vbase + cb + 11'(j);

  always_comb begin
    op        = NCE_NOP;
    vaddr     = VA_W'(v);
    faddr     = FA_W'(faddr_full);
    iaddr     = len - 1'b1 - j;
    enc_start = (state == S_ENC);
    sb_raddr  = SB_AW'(cb + 11'(k));
    unique case (state)
      S_CLEAR: op = NCE_CLEAR;
      S_INTEG: op = NCE_INTEGRATE;
      S_FIRE:  op = NCE_FIRE;
      default: ;
    endcase
  end

  assign busy      = (state != S_IDLE);
  assign timestamp = t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      v             <= '0;
      j             <= '0;
      k             <= '0;
      len           <= '0;
      cb            <= '0;
      vbase         <= '0;
      t             <= '0;
      spike_shift   <= 1'b0;
      fire_valid    <= 1'b0;
      fire_word     <= '0;
      counter_clear <= 1'b0;
      done          <= 1'b0;
      cfg_err       <= 1'b0;
    end else begin
      spike_shift   <= (state == S_LOAD) && (k < len);
      fire_valid    <= (state == S_FIRE);
      fire_word     <= VA_W'(v);
      counter_clear <= 1'b0;
      done          <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          t       <= '0;
          v       <= '0;
          cfg_err <= !fits;
          if (fits) begin
            counter_clear <= 1'b1;
            state         <= S_CLEAR;
          end else begin
            done <= 1'b1;
          end
        end
        S_CLEAR: begin
          if (v == cfg.n_vwords - 1'b1) begin
            v     <= '0;
            state <= S_ENC;
          end else begin
            v <= v + 1'b1;
          end
        end
        S_ENC: state <= S_ENC_WAIT;
        S_ENC_WAIT: if (enc_done) begin
          cb    <= '0;
          k     <= '0;
          len   <= chunk_len(cfg.n_inputs, 11'd0);
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (k == len) begin
            v     <= '0;
            j     <= '0;
            vbase <= '0;
            state <= S_INTEG;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_INTEG: begin
          if (j == len - 1'b1) begin
            j     <= '0;
            vbase <= vbase + cfg.n_inputs;
            if (v == cfg.n_vwords - 1'b1) begin
              v <= '0;
              if (cb + 11'(len) < cfg.n_inputs) begin
                cb    <= cb + 11'(len);
                len   <= chunk_len(cfg.n_inputs, cb + 11'(len));
                k     <= '0;
                state <= S_LOAD;
              end else begin
                state <= S_FIRE;
              end
            end else begin
              v <= v + 1'b1;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        S_FIRE: begin
          if (v == cfg.n_vwords - 1'b1) begin
            v <= '0;
            t <= t + 1'b1;
            state <= (t + 1'b1 == cfg.timesteps) ? S_DONE : S_ENC;
          end else begin
            v <= v + 1'b1;
          end
        end
        default: begin  // S_DONE
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

endmodule
