// nce: neuron compute engine (one processing element of the 2D array).
//
// Holds three local scratchpads: IFmap (IFMAP_DEPTH x 1 bit) with the input
// spikes of the current chunk, Filt (FILT_DEPTH x 8 bit) with the synaptic
// weights and Vmem (VMEM_DEPTH x 8 bit) with membrane potentials. Every 8-bit
// Filt and Vmem word is packed by the precision control pc: four INT2, two
// INT4 or one INT8 neuron per word, so one operation updates up to four
// neurons at once. All arithmetic goes through one simd_fa_adder and the leak
// shift through one simd_shifter; there is no multiplier.
//
// Operations (op, one per cycle, result registered):
//   INTEGRATE  V[vaddr] <- sat(V[vaddr] + x), x = Filt[faddr] if IFmap[iaddr]
//              is 1 else 0 (the spike gates the weight); with use_psum the
//              partial sum psum_in is added instead of the gated weight.
//   FIRE       u = sat(V - leak), leak = Vleak (leak_mode 0) or
//              V >>> leak_shift (leak_mode 1); each lane whose u >= Vth
//              spikes and is reset to 0, others keep u. spike_out gets the
//              lane spikes (lane l in bit l).
//   CLEAR      V[vaddr] <- 0.
// psum_out is the word written by the last operation; out_valid marks it.
// spike_shift pushes spike_in into IFmap bit 0 and moves bit k to bit k+1, so
// after n pushes the first input pushed sits at index n-1.
// filt_we writes four consecutive Filt words: word 4*filt_waddr+k gets byte k
// of filt_wdata.
//
// From the published PE: the three scratchpad sizes, the weight-or-zero
// select by the spike, the input-psum select, the -Vleak and Vth registers,
// the comparator and the reset of fired neurons to 0, and shift-based leak.
// This design's choices: signed lanes with saturation, >= as firing test,
// the opcode set, the 32-bit four-word filter write and an 8-bit psum port.
module nce
  import lspine_pkg::*;
#(
  parameter int unsigned IFMAP_DEPTH = 12,
  parameter int unsigned FILT_DEPTH  = 224,
  parameter int unsigned VMEM_DEPTH  = 24,
  parameter int unsigned STAGES      = 3,
  localparam int unsigned FG_AW = $clog2(FILT_DEPTH / 4),
  localparam int unsigned FA_W  = $clog2(FILT_DEPTH),
  localparam int unsigned VA_W  = $clog2(VMEM_DEPTH),
  localparam int unsigned IA_W  = $clog2(IFMAP_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // layer configuration
  input  prec_e                pc,
  input  logic [WORD_W-1:0]    vth,
  input  logic [WORD_W-1:0]    vleak,
  input  logic                 leak_mode,
  input  logic [STAGES-1:0]    leak_shift,
  input  logic                 leak_sticky,
  // IFmap spad load
  input  logic                 spike_in,
  input  logic                 spike_shift,
  // Filt spad load
  input  logic                 filt_we,
  input  logic [FG_AW-1:0]     filt_waddr,
  input  logic [4*WORD_W-1:0]  filt_wdata,
  // operation
  input  nce_op_e              op,
  input  logic [VA_W-1:0]      vaddr,
  input  logic [FA_W-1:0]      faddr,
  input  logic [IA_W-1:0]      iaddr,
  input  logic                 use_psum,
  input  logic [WORD_W-1:0]    psum_in,
  // results
  output logic [WORD_W-1:0]    psum_out,
  output logic [MAX_LANES-1:0] spike_out,
  output logic                 out_valid
);

  logic [IFMAP_DEPTH-1:0] ifmap;
  logic [WORD_W-1:0]      filt [FILT_DEPTH];
  logic [WORD_W-1:0]      vmem [VMEM_DEPTH];

  logic [WORD_W-1:0]    v_cur, w_gated, operand, v_shift, leak_term, add_b, u, v_fire;
  logic [MAX_LANES-1:0] fire_l;
  logic [MAX_LANES-1:0] shift_sticky;  // sticky flags are not needed here
  logic [EXT_W-1:0]     sum_ext;       // unclipped lane sums are not needed here
  logic                 is_fire;

  assign v_cur   = vmem[vaddr];
  assign w_gated = ifmap[iaddr] ? filt[faddr] : '0;
  assign operand = use_psum ? psum_in : w_gated;
  assign is_fire = (op == NCE_FIRE);

  simd_shifter #(.STAGES(STAGES)) u_leak_shift (
    .x          (v_cur),
    .pc         (pc),
    .rs         (leak_shift),
    .fs_en      (1'b1),
    .sticky_ctrl(leak_sticky),
    .y          (v_shift),
    .sticky     (shift_sticky)
  );

  assign leak_term = leak_mode ? v_shift : vleak;
  assign add_b     = is_fire ? leak_term : operand;

  simd_fa_adder u_add (
    .a      (v_cur),
    .b      (add_b),
    .pc     (pc),
    .sub    (is_fire),
    .sum_ext(sum_ext),
    .sum_sat(u)
  );

  // Per-lane threshold compare and reset of fired lanes.
  always_comb begin
    fire_l = '0;
    v_fire = u;
    unique case (pc)
      PC_INT2: for (int l = 0; l < 4; l++) begin
        fire_l[l] = $signed(u[l*2 +: 2]) >= $signed(vth[l*2 +: 2]);
        if (fire_l[l]) v_fire[l*2 +: 2] = '0;
      end
      PC_INT4: for (int l = 0; l < 2; l++) begin
        fire_l[l] = $signed(u[l*4 +: 4]) >= $signed(vth[l*4 +: 4]);
        if (fire_l[l]) v_fire[l*4 +: 4] = '0;
      end
      default: begin
        fire_l[0] = $signed(u) >= $signed(vth);
        if (fire_l[0]) v_fire = '0;
      end
    endcase
  end

  // IFmap spad: spike shift register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           ifmap <= '0;
    else if (spike_shift) ifmap <= {ifmap[IFMAP_DEPTH-2:0], spike_in};
  end

  // Filt spad: four words per write.
  always_ff @(posedge clk) begin
    if (filt_we)
      for (int k = 0; k < 4; k++) filt[4*filt_waddr + k] <= filt_wdata[k*WORD_W +: WORD_W];
  end

  // Vmem spad write-back.
  always_ff @(posedge clk) begin
    unique case (op)
      NCE_INTEGRATE: vmem[vaddr] <= u;
      NCE_FIRE:      vmem[vaddr] <= v_fire;
      NCE_CLEAR:     vmem[vaddr] <= '0;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum_out  <= '0;
      spike_out <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= (op != NCE_NOP);
      unique case (op)
        NCE_INTEGRATE: begin psum_out <= u;      spike_out <= '0;     end
        NCE_FIRE:      begin psum_out <= v_fire; spike_out <= fire_l; end
        NCE_CLEAR:     begin psum_out <= '0;     spike_out <= '0;     end
        default: ;
      endcase
    end
  end

  // Scratchpad addresses must stay inside the scratchpads.
  a_vaddr: assert property (@(posedge clk) disable iff (!rst_n)
                            op != NCE_NOP |-> 32'(vaddr) < VMEM_DEPTH);
  a_faddr: assert property (@(posedge clk) disable iff (!rst_n)
                            op == NCE_INTEGRATE |-> 32'(faddr) < FILT_DEPTH && 32'(iaddr) < IFMAP_DEPTH);

endmodule
