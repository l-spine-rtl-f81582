// simd_fa_adder: precision-reconfigurable add/subtract on a packed 8-bit word.
//
// A ripple chain of EXT_W one-bit full adders (fa_cell) is cut into SIMD lanes
// by the precision control:
//   PC=0 (INT2): four lanes of 2+1 bits  -> chain bits [11:0]
//   PC=1 (INT4): two lanes of 4+1 bits   -> chain bits [9:0]
//   PC=2 (INT8): one lane of 8+1 bits    -> chain bits [8:0]
// Each lane gets one extension bit above its W data bits; operands are two's
// complement and are sign-extended into it, so the W+1-bit lane result never
// wraps. Chain bits above the last lane are an unused (optional) region.
// Every cell has a carry-in multiplexer: at the first bit of a lane it takes
// the lane carry-in control, elsewhere the carry-out of the cell below. The
// 'sub' input (the "function" select) feeds ~b into the cells and forces the
// lane carry-in to 1, giving a - b; with sub=0 the chain computes a + b.
// sum_ext holds lane l's W+1-bit result at bits [l*(W+1) +: W+1]; sum_sat
// holds the same results clipped to the W-bit signed range, packed like a.
//
// Taken from the published datapath: the FA chain, the per-bit b/~b select,
// the per-bit carry-in select and the W+1 lane layout. Own choices: signed
// operands and saturation back to W bits. Combinational, no clock.
module simd_fa_adder
  import lspine_pkg::*;
(
  input  logic [WORD_W-1:0] a,
  input  logic [WORD_W-1:0] b,
  input  prec_e             pc,
  input  logic              sub,
  output logic [EXT_W-1:0]  sum_ext,
  output logic [WORD_W-1:0] sum_sat
);

  logic [EXT_W-1:0] a_x, b_x, lane_start;
  logic [EXT_W:0]   carry;  // carry[EXT_W] is the unused carry out of the chain

  // Place the lanes of a and b into the chain with one sign-extension bit each.
  always_comb begin
    a_x        = '0;
    b_x        = '0;
    lane_start = '0;
    unique case (pc)
      PC_INT2: for (int l = 0; l < 4; l++) begin
        a_x[l*3 +: 3]   = {a[l*2+1], a[l*2 +: 2]};
        b_x[l*3 +: 3]   = {b[l*2+1], b[l*2 +: 2]};
        lane_start[l*3] = 1'b1;
      end
      PC_INT4: for (int l = 0; l < 2; l++) begin
        a_x[l*5 +: 5]   = {a[l*4+3], a[l*4 +: 4]};
        b_x[l*5 +: 5]   = {b[l*4+3], b[l*4 +: 4]};
        lane_start[l*5] = 1'b1;
      end
      default: begin
        a_x[8:0]      = {a[7], a};
        b_x[8:0]      = {b[7], b};
        lane_start[0] = 1'b1;
      end
    endcase
  end

  assign carry[0] = sub;

  for (genvar p = 0; p < EXT_W; p++) begin : g_chain
    logic cin_p, cout_p;
    // carry-in multiplexer: lane carry-in control at a lane boundary
    assign cin_p = lane_start[p] ? sub : carry[p];
    fa_cell u_fa (
      .a   (a_x[p]),
      .b   (b_x[p] ^ sub),     // function select: b or ~b
      .cin (cin_p),
      .sum (sum_ext[p]),
      .cout(cout_p)
    );
    assign carry[p+1] = cout_p;
  end

  // Clip each W+1-bit lane result to W bits.
  always_comb begin
    sum_sat = '0;
    unique case (pc)
      PC_INT2: for (int l = 0; l < 4; l++) begin
        logic [2:0] r;
        r = sum_ext[l*3 +: 3];
        if (r[2] != r[1]) sum_sat[l*2 +: 2] = r[2] ? 2'b10 : 2'b01;
        else              sum_sat[l*2 +: 2] = r[1:0];
      end
      PC_INT4: for (int l = 0; l < 2; l++) begin
        logic [4:0] r;
        r = sum_ext[l*5 +: 5];
        if (r[4] != r[3]) sum_sat[l*4 +: 4] = r[4] ? 4'b1000 : 4'b0111;
        else              sum_sat[l*4 +: 4] = r[3:0];
      end
      default: begin
        logic [8:0] r;
        r = sum_ext[8:0];
        if (r[8] != r[7]) sum_sat = r[8] ? 8'h80 : 8'h7f;
        else              sum_sat = r[7:0];
      end
    endcase
  end

endmodule
