// simd_shifter: lane-segmented arithmetic right shifter for the packed word.
//
// The 8-bit word is handled as four 2-bit columns. STAGES logarithmic stages
// shift right by 1, 2, 4, ... when the matching bit of the shift amount rs is
// set. A bit that would enter a lane from above its top is replaced by the
// lane's sign bit, so a lane never receives bits from its neighbour; bits do
// cross column boundaries inside an INT4 lane (columns joined in pairs) or the
// INT8 lane (all four joined), which is what the column-joining multiplexers of
// the published datapath select with PC. Bits shifted out of the bottom of a
// lane are OR-ed into that lane's sticky flag; with sticky_ctrl set the flag is
// also OR-ed into the lane's result LSB (jamming, a cheap rounding). fs_en is
// the final-shift enable: when low the word passes unchanged and sticky is 0.
// rs above W-1 is clamped to W-1.
//
// Ports: x (packed lanes), pc, rs, fs_en, sticky_ctrl -> y, sticky (bit l is
// lane l). Combinational. The column/stage structure and the names FSr,
// sticky_ctrl and B_w^rs come from the published drawing; what sticky and FSr
// do, sign filling and clamping are this design's choices.
module simd_shifter
  import lspine_pkg::*;
#(
  parameter int unsigned STAGES = 3
) (
  input  logic [WORD_W-1:0]    x,
  input  prec_e                pc,
  input  logic [STAGES-1:0]    rs,
  input  logic                 fs_en,
  input  logic                 sticky_ctrl,
  output logic [WORD_W-1:0]    y,
  output logic [MAX_LANES-1:0] sticky
);

  // Lowest bit index of the lane that holds bit j.
  function automatic int lane_lo(prec_e p, int j);
    return j & ~(int'(lane_w(p)) - 1);
  endfunction

  // Bit that lands on position j after an arithmetic right shift by d inside
  // its lane: from above within the lane, else the lane's sign bit.
  function automatic logic src_bit(logic [WORD_W-1:0] val, prec_e p, int j, int d);
    int hi;
    hi = lane_lo(p, j) + int'(lane_w(p)) - 1;
    return (j + d <= hi) ? val[j + d] : val[hi];
  endfunction

  // Shift amount clamped to the lane width minus one.
  function automatic logic [STAGES-1:0] shift_amt(prec_e p, logic [STAGES-1:0] r);
    return (int'(r) > int'(lane_w(p)) - 1) ? STAGES'(lane_w(p) - 1) : r;
  endfunction

  logic [WORD_W-1:0]    v;
  logic [MAX_LANES-1:0] st;

  always_comb begin
    v  = x;
    st = '0;
    for (int s = 0; s < STAGES; s++) begin
      logic [WORD_W-1:0] nv;
      nv = v;
      if (shift_amt(pc, rs)[s]) begin
        for (int j = 0; j < WORD_W; j++) begin
          nv[j] = src_bit(v, pc, j, 1 << s);
          if (j - lane_lo(pc, j) < (1 << s)) st[j / lane_w(pc)] = st[j / lane_w(pc)] | v[j];
        end
      end
      v = nv;
    end
    if (sticky_ctrl) begin
      for (int l = 0; l < MAX_LANES; l++)
        if (l < int'(lanes(pc))) v[l * lane_w(pc)] = v[l * lane_w(pc)] | st[l];
    end
  end

  assign y      = fs_en ? v : x;
  assign sticky = fs_en ? st : '0;

endmodule
