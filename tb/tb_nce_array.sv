// tb_nce_array: self-checking test of the 2D engine array (3 x 4 here).
// Each engine gets its own random filter contents through filt_sel, so a
// wrong select shows up as a wrong sum. Random INTEGRATE / FIRE / CLEAR
// operations (INT8 lanes) are checked engine by engine against a model;
// INTEGRATE with use_psum checks that engine (r,c) adds the previous output of
// engine (r-1,c) and that row 0 adds 0.
module tb_nce_array;
  import lspine_pkg::*;
  localparam int R = 3, C = 4, N = R * C;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prec_e       pc = PC_INT8;
  logic [7:0]  vth = 8'd60, vleak = 8'd3;
  logic        leak_mode = 0, leak_sticky = 0, spike_in, spike_shift, filt_we, use_psum, out_valid;
  logic [2:0]  leak_shift = 0;
  logic [3:0]  filt_sel;
  logic [5:0]  filt_waddr;
  logic [31:0] filt_wdata;
  nce_op_e     op;
  logic [4:0]  vaddr;
  logic [7:0]  faddr;
  logic [3:0]  iaddr;
  logic [7:0]  psum_out  [N];
  logic [3:0]  spike_out [N];

  nce_array #(.ROWS(R), .COLS(C)) dut (.*);

  int checks = 0, failures = 0, chain_ops = 0;
  logic [7:0]  m_filt [N][224];
  logic [7:0]  m_vmem [N][24];
  logic [7:0]  m_out  [N];
  logic [3:0]  m_spk  [N];
  logic [11:0] m_ifmap = '0;

  function automatic logic [7:0] sadd(logic [7:0] a, logic [7:0] b, bit s);
    int q = s ? $signed(a) - $signed(b) : $signed(a) + $signed(b);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return 8'(q);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spike_in = 0; spike_shift = 0; filt_we = 0; filt_sel = 0; filt_waddr = 0; filt_wdata = 0;
    op = NCE_NOP; vaddr = 0; faddr = 0; iaddr = 0; use_psum = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < N; e++)
      for (int g = 0; g < 56; g++) begin
        @(negedge clk);
        filt_we = 1; filt_sel = 4'(e); filt_waddr = 6'(g); filt_wdata = $urandom;
        for (int k = 0; k < 4; k++) m_filt[e][4*g+k] = filt_wdata[8*k +: 8];
      end
    @(negedge clk); filt_we = 0;
    // twelve spikes, all ones except input 5
    for (int i = 0; i < 12; i++) begin
      @(negedge clk); spike_shift = 1; spike_in = (i != 6); m_ifmap = {m_ifmap[10:0], spike_in};
    end
    @(negedge clk); spike_shift = 0;
    for (int v = 0; v < 24; v++) begin
      @(negedge clk); op = NCE_CLEAR; vaddr = 5'(v);
      for (int e = 0; e < N; e++) begin m_vmem[e][v] = 0; m_out[e] = 0; m_spk[e] = 0; end
    end
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int r;
      logic [7:0] prev [N];
      @(negedge clk);
      if (cyc > 0) begin
        for (int e = 0; e < N; e++) begin
          checks++;
          if (psum_out[e] !== m_out[e] || spike_out[e] !== m_spk[e]) begin
            failures++;
            if (failures < 10) $display("MISMATCH cyc=%0d e=%0d psum=%h/%h spk=%b/%b", cyc, e,
                                        psum_out[e], m_out[e], spike_out[e], m_spk[e]);
          end
        end
      end
      prev = m_out;
      r = $urandom % 100;
      op       = (r < 60) ? NCE_INTEGRATE : (r < 90) ? NCE_FIRE : NCE_CLEAR;
      vaddr    = 5'($urandom % 24);
      faddr    = 8'($urandom % 224);
      iaddr    = 4'($urandom % 12);
      use_psum = ($urandom % 3 == 0);
      for (int e = 0; e < N; e++) begin
        logic [7:0] x, u;
        m_spk[e] = 0;
        case (op)
          NCE_INTEGRATE: begin
            x = use_psum ? ((e >= C) ? prev[e - C] : 8'd0)
                         : (m_ifmap[iaddr] ? m_filt[e][faddr] : 8'd0);
            u = sadd(m_vmem[e][vaddr], x, 0);
            if (use_psum) chain_ops++;
          end
          NCE_FIRE: begin
            u = sadd(m_vmem[e][vaddr], vleak, 1);
            if ($signed(u) >= $signed(vth)) begin m_spk[e] = 1; u = 0; end
          end
          default: u = 0;
        endcase
        m_vmem[e][vaddr] = u;
        m_out[e] = u;
      end
    end
    @(negedge clk);
    checks++;
    if (out_valid !== 1'b1 || chain_ops == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
