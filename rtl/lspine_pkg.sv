// lspine_pkg: types and constants shared by the L-SPINE neuron compute engine.
//
// The datapath works on an 8-bit packed word. Precision control (PC) splits that
// word into SIMD lanes: PC=0 gives four 2-bit lanes, PC=1 two 4-bit lanes and
// PC=2 one 8-bit lane. The PC numbering follows the published datapath drawing;
// the helper functions below give lane width and lane count for a PC value.
// Inside the adder each lane carries one extra (extension) bit, so the widest
// layout, four lanes of 2+1 bits, needs a 12-bit full-adder chain.
package lspine_pkg;

  localparam int unsigned WORD_W  = 8;   // packed data word
  localparam int unsigned EXT_W   = 12;  // adder chain: 4 lanes x (2+1) bits
  localparam int unsigned MAX_LANES = 4; // lanes per word at INT2

  typedef enum logic [1:0] {
    PC_INT2 = 2'd0,
    PC_INT4 = 2'd1,
    PC_INT8 = 2'd2
  } prec_e;

  // Operation issued to every neuron compute engine in one cycle.
  typedef enum logic [1:0] {
    NCE_NOP       = 2'd0,
    NCE_INTEGRATE = 2'd1,
    NCE_FIRE      = 2'd2,
    NCE_CLEAR     = 2'd3
  } nce_op_e;

  // Layer configuration held by the map record and read by the sequencer and
  // the array.
  typedef struct packed {
    prec_e       pc;           // precision control
    logic [10:0] n_inputs;     // input spikes per timestep
    logic [4:0]  n_vwords;     // membrane words used in every engine
    logic [7:0]  timesteps;    // timesteps per inference
    logic [7:0]  vth;          // threshold, packed per lane
    logic [7:0]  vleak;        // constant leak, packed per lane
    logic        leak_mode;    // 0: subtract vleak, 1: subtract V >>> leak_shift
    logic [2:0]  leak_shift;   // leak shift amount
    logic        leak_sticky;  // jam shifted-out bits into the leak LSB
    logic [12:0] n_load_words; // 32-bit weight words to copy into the engines
  } layer_cfg_t;

  // Lane width in bits for a precision setting (an unused code behaves as INT8).
  function automatic int unsigned lane_w(prec_e pc);
    case (pc)
      PC_INT2: return 2;
      PC_INT4: return 4;
      default: return 8;
    endcase
  endfunction

  // Number of lanes in one packed word.
  function automatic int unsigned lanes(prec_e pc);
    return WORD_W / lane_w(pc);
  endfunction

endpackage
