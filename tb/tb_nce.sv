// tb_nce: self-checking random test of one neuron compute engine.
// A behavioural model of the scratchpads and of the lane arithmetic (signed
// lanes, saturation, shift or constant leak, threshold >= and reset to 0)
// predicts psum_out, spike_out and out_valid one cycle after every operation.
// Operations, addresses, spikes, precision and leak settings are random.
module tb_nce;
  import lspine_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prec_e       pc;
  logic [7:0]  vth, vleak, psum_in, psum_out;
  logic        leak_mode, leak_sticky, spike_in, spike_shift, filt_we, use_psum, out_valid;
  logic [2:0]  leak_shift;
  logic [5:0]  filt_waddr;
  logic [31:0] filt_wdata;
  nce_op_e     op;
  logic [4:0]  vaddr;
  logic [7:0]  faddr;
  logic [3:0]  iaddr;
  logic [3:0]  spike_out;

  nce dut (.*);

  int checks = 0, failures = 0;
  logic [7:0]  m_filt [224];
  logic [7:0]  m_vmem [24];
  logic [11:0] m_ifmap;

  function automatic int sx(int v, int w);
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  function automatic logic [7:0] lane_op(logic [7:0] a, logic [7:0] b, int p, bit s);
    int w = 2 << p;
    logic [7:0] r = '0;
    for (int l = 0; l < 8 / w; l++) begin
      int av = sx((a >> (l * w)) & ((1 << w) - 1), w);
      int bv = sx((b >> (l * w)) & ((1 << w) - 1), w);
      int q  = s ? av - bv : av + bv;
      if (q > (1 << (w - 1)) - 1) q = (1 << (w - 1)) - 1;
      if (q < -(1 << (w - 1)))    q = -(1 << (w - 1));
      r |= 8'((q & ((1 << w) - 1)) << (l * w));
    end
    return r;
  endfunction

  function automatic logic [7:0] lane_shr(logic [7:0] a, int p, int rsh, bit sc);
    int w = 2 << p;
    int amt = (rsh > w - 1) ? w - 1 : rsh;
    logic [7:0] r = '0;
    for (int l = 0; l < 8 / w; l++) begin
      int lv = sx((a >> (l * w)) & ((1 << w) - 1), w);
      int q  = lv >>> amt;
      if (sc && (((a >> (l * w)) & ((1 << amt) - 1)) != 0)) q |= 1;
      r |= 8'((q & ((1 << w) - 1)) << (l * w));
    end
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] exp_psum;
  logic [3:0] exp_spk;
  bit         exp_valid, have_exp;
  int         fires = 0, spikes_seen = 0;

  initial begin
    pc = PC_INT8; vth = 8'd20; vleak = 8'd1; leak_mode = 0; leak_sticky = 0; leak_shift = 0;
    spike_in = 0; spike_shift = 0; filt_we = 0; filt_waddr = 0; filt_wdata = 0;
    op = NCE_NOP; vaddr = 0; faddr = 0; iaddr = 0; use_psum = 0; psum_in = 0;
    m_ifmap = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill the filter scratchpad and clear the membranes
    for (int g = 0; g < 56; g++) begin
      @(negedge clk);
      filt_we = 1; filt_waddr = 6'(g); filt_wdata = $urandom;
      for (int k = 0; k < 4; k++) m_filt[4*g+k] = filt_wdata[8*k +: 8];
    end
    @(negedge clk); filt_we = 0;
    for (int v = 0; v < 24; v++) begin
      @(negedge clk); op = NCE_CLEAR; vaddr = 5'(v); m_vmem[v] = 0;
    end
    @(negedge clk); op = NCE_NOP;
    have_exp = 0;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      int r;
      @(negedge clk);
      // check the result of the previous cycle's operation
      if (have_exp) begin
        checks++;
        if (out_valid !== exp_valid || (exp_valid && (psum_out !== exp_psum || spike_out !== exp_spk))) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH cyc=%0d valid=%b/%b psum=%h/%h spk=%b/%b", cyc, out_valid, exp_valid,
                     psum_out, exp_psum, spike_out, exp_spk);
        end
      end
      if (cyc % 500 == 0) begin
        pc = prec_e'(cyc / 500 % 3);
        vth = $urandom; vleak = $urandom % 4;
        leak_mode = $urandom; leak_shift = $urandom; leak_sticky = $urandom;
      end
      // random IFmap shift
      spike_shift = ($urandom % 4 == 0);
      spike_in    = $urandom;
      r = $urandom % 100;
      op       = (r < 55) ? NCE_INTEGRATE : (r < 85) ? NCE_FIRE : (r < 90) ? NCE_CLEAR : NCE_NOP;
      vaddr    = 5'($urandom % 24);
      faddr    = 8'($urandom % 224);
      iaddr    = 4'($urandom % 12);
      use_psum = ($urandom % 5 == 0);
      psum_in  = $urandom;
      exp_valid = (op != NCE_NOP);
      exp_spk   = '0;
      case (op)
        NCE_INTEGRATE: begin
          logic [7:0] opnd;
          opnd = use_psum ? psum_in : (m_ifmap[iaddr] ? m_filt[faddr] : 8'd0);
          exp_psum = lane_op(m_vmem[vaddr], opnd, pc, 0);
          m_vmem[vaddr] = exp_psum;
        end
        NCE_FIRE: begin
          int w;
          logic [7:0] lk, u;
          w  = 2 << pc;
          lk = leak_mode ? lane_shr(m_vmem[vaddr], pc, leak_shift, leak_sticky) : vleak;
          u  = lane_op(m_vmem[vaddr], lk, pc, 1);
          for (int l = 0; l < 8 / w; l++) begin
            if (sx((u >> (l * w)) & ((1 << w) - 1), w) >= sx((vth >> (l * w)) & ((1 << w) - 1), w)) begin
              exp_spk[l] = 1;
              u &= ~8'(((1 << w) - 1) << (l * w));
            end
          end
          exp_psum = u;
          m_vmem[vaddr] = u;
          fires++;
          if (exp_spk != 0) spikes_seen++;
        end
        NCE_CLEAR: begin
          exp_psum = 0;
          m_vmem[vaddr] = 0;
        end
        default: ;
      endcase
      have_exp = 1;
      if (spike_shift) m_ifmap = {m_ifmap[10:0], spike_in};
      if (!exp_valid) begin exp_psum = psum_out; exp_spk = spike_out; end
    end
    @(negedge clk);
    // the firing path must have produced spikes and silent fires
    checks++;
    if (spikes_seen == 0 || spikes_seen == fires) begin
      failures++;
      $display("spike coverage: %0d of %0d fires spiked", spikes_seen, fires);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
