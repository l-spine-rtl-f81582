// tb_lspine_top: end-to-end test of the accelerator at its default size
// (8 x 8 engines, 12/224/24-entry scratchpads), driven only through the host
// bus. For each of several layers it writes the configuration, random packed
// weights for all 64 engines, and random pixels; loads the weights; runs the
// inference; then reads back every neuron's spikes of the last timestep, the
// 16 spike counts and the winner, and compares them with a behavioural model
// of the whole network (same LFSR encoder, lane arithmetic with saturation,
// leak, threshold and reset). It also checks the run length in cycles and
// that a layer too large for the scratchpads is refused. It counts how often
// each mechanism occurred (each precision, both leak forms, sticky leak,
// lane saturation, spikes with reset, multi-chunk IFmap refill, refusal) and
// fails if one never did.
module tb_lspine_top;
  import lspine_pkg::*;

  logic        clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        host_we, host_re, host_rvalid, irq_done;
  logic [15:0] host_addr;
  logic [31:0] host_wdata, host_rdata;

  lspine_top dut (.*);

  localparam int NE = 64;
  int checks = 0, failures = 0;

  // model state
  logic [7:0]  m_filt [NE][224];
  logic [7:0]  m_v    [NE][24];
  logic [3:0]  m_spk  [NE][24];
  logic [7:0]  m_pix  [1024];
  int          m_cnt  [16];
  logic [15:0] m_lfsr = 16'hACE1;

  // mechanism counters
  int n_int2 = 0, n_int4 = 0, n_int8 = 0, n_leak_const = 0, n_leak_shift = 0, n_sticky = 0;
  int n_sat = 0, n_fire = 0, n_chunks = 0, n_refused = 0;

  function automatic int sx(int v, int w);
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  function automatic logic [7:0] lane_op(logic [7:0] a, logic [7:0] b, int p, bit s, ref int sat);
    int w = 2 << p;
    logic [7:0] r = '0;
    for (int l = 0; l < 8 / w; l++) begin
      int av = sx((a >> (l * w)) & ((1 << w) - 1), w);
      int bv = sx((b >> (l * w)) & ((1 << w) - 1), w);
      int q  = s ? av - bv : av + bv;
      if (q > (1 << (w - 1)) - 1) begin q = (1 << (w - 1)) - 1; sat++; end
      if (q < -(1 << (w - 1)))    begin q = -(1 << (w - 1));    sat++; end
      r |= 8'((q & ((1 << w) - 1)) << (l * w));
    end
    return r;
  endfunction

  function automatic logic [7:0] lane_shr(logic [7:0] a, int p, int rsh, bit sc);
    int w = 2 << p;
    int amt = (rsh > w - 1) ? w - 1 : rsh;
    logic [7:0] r = '0;
    for (int l = 0; l < 8 / w; l++) begin
      int q = sx((a >> (l * w)) & ((1 << w) - 1), w) >>> amt;
      if (sc && (((a >> (l * w)) & ((1 << amt) - 1)) != 0)) q |= 1;
      r |= 8'((q & ((1 << w) - 1)) << (l * w));
    end
    return r;
  endfunction

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] d);
    @(negedge clk); host_re = 1; host_addr = a;
    @(negedge clk); host_re = 0;
    d = host_rdata;
    checks++;
    if (!host_rvalid) failures++;
  endtask

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // One complete layer: configure, load weights, encode and run, compare.
  task automatic run_layer(int p, int ni, int nv, int ts, logic [7:0] vth, logic [7:0] vleak,
                           bit lmode, int lshift, bit lsticky);
    logic [31:0] d;
    int cyc, expect_cyc, chunks_sum;
    wr(16'h0000, 32'(p));
    wr(16'h0001, 32'(ni));
    wr(16'h0002, 32'(nv));
    wr(16'h0003, 32'(ts));
    wr(16'h0004, 32'(vth));
    wr(16'h0005, 32'(vleak));
    wr(16'h0006, {27'd0, lsticky, lmode, 3'(lshift)});
    wr(16'h0007, 32'(NE * 56));
    // weights: engine e, filter word f = v*ni + i
    for (int e = 0; e < NE; e++)
      for (int g = 0; g < 56; g++) begin
        logic [31:0] w;
        w = $urandom;
        for (int k = 0; k < 4; k++) m_filt[e][4*g+k] = w[8*k +: 8];
        wr(16'h1000 + 16'(e * 56 + g), w);
      end
    for (int i = 0; i < ni; i++) begin
      m_pix[i] = 8'($urandom);
      wr(16'h2000 + 16'(i), 32'(m_pix[i]));
    end
    wr(16'h0010, 32'h2);                        // load weights
    do rd(16'h0011, d); while (!d[12]);
    // run
    @(negedge clk); host_we = 1; host_addr = 16'h0010; host_wdata = 32'h1;
    @(negedge clk); host_we = 0;
    cyc = 1;
    while (!irq_done) begin @(negedge clk); cyc++; end
    // model
    foreach (m_cnt[k]) m_cnt[k] = 0;
    for (int e = 0; e < NE; e++) for (int v = 0; v < 24; v++) m_v[e][v] = 0;
    for (int t = 0; t < ts; t++) begin
      logic s [1024];
      for (int i = 0; i < ni; i++) begin
        s[i] = m_pix[i] > m_lfsr[15:8];
        m_lfsr = {m_lfsr[14:0], m_lfsr[15] ^ m_lfsr[13] ^ m_lfsr[12] ^ m_lfsr[10]};
      end
      for (int e = 0; e < NE; e++)
        for (int v = 0; v < nv; v++) begin
          logic [7:0] u, lk;
          int w, dummy;
          w = 2 << p;
          for (int i = 0; i < ni; i++)
            if (s[i]) m_v[e][v] = lane_op(m_v[e][v], m_filt[e][v*ni + i], p, 0, n_sat);
          lk = lmode ? lane_shr(m_v[e][v], p, lshift, lsticky) : vleak;
          dummy = 0;
          u = lane_op(m_v[e][v], lk, p, 1, dummy);
          m_spk[e][v] = '0;
          for (int l = 0; l < 8 / w; l++)
            if (sx((u >> (l * w)) & ((1 << w) - 1), w) >= sx((vth >> (l * w)) & ((1 << w) - 1), w)) begin
              m_spk[e][v][l] = 1'b1;
              u &= ~8'(((1 << w) - 1) << (l * w));
              n_fire++;
            end
          m_v[e][v] = u;
        end
      for (int k = 0; k < 16; k++) begin
        int L;
        L = 4 >> p;
        if (m_spk[k / L][0][k % L] && m_cnt[k] < 255) m_cnt[k]++;
      end
    end
    // compare
    for (int e = 0; e < NE; e++)
      for (int v = 0; v < nv; v++) begin
        rd(16'h4000 | 16'(e << 5) | 16'(v), d);
        chk(d[3:0] == m_spk[e][v], $sformatf("spikes e=%0d v=%0d got %b exp %b", e, v, d[3:0], m_spk[e][v]));
      end
    for (int k = 0; k < 16; k++) begin
      rd(16'h5000 | 16'(k), d);
      chk(d == 32'(m_cnt[k]), $sformatf("count %0d got %0d exp %0d", k, d, m_cnt[k]));
    end
    begin
      int mx = 0, wexp = 0;
      for (int k = 0; k < 16; k++) if (m_cnt[k] > mx) begin mx = m_cnt[k]; wexp = k; end
      rd(16'h5010, d);
      chk(d == 32'(wexp), "winner");
    end
    rd(16'h0011, d);
    chk(d[7:0] == 8'(ts) && d[10] && !d[11] && !d[8], "status after run");
    // cycles from the run command to irq_done
    chunks_sum = 0;
    for (int b = 0; b < ni; b += 12) begin chunks_sum += ((ni - b > 12) ? 12 : ni - b) + 1; n_chunks++; end
    expect_cyc = nv + ts * (1 + (ni + 1) + chunks_sum + nv * ni + nv) + 2;
    chk(cyc == expect_cyc, $sformatf("run length %0d cycles, expected %0d", cyc, expect_cyc));
    $display("layer pc=%0d inputs=%0d words=%0d timesteps=%0d: %0d cycles", p, ni, nv, ts, cyc);
    if (p == 0) n_int2++; else if (p == 1) n_int4++; else n_int8++;
    if (lmode) n_leak_shift++; else n_leak_const++;
    if (lmode && lsticky) n_sticky++;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(2, 20, 11, 4, 8'd40,  8'd2, 0, 0, 0);   // INT8, constant leak
    run_layer(1, 16, 14, 3, 8'h55,  8'h00, 1, 2, 1);  // INT4, shift leak with sticky
    run_layer(0, 30, 7,  3, 8'h55,  8'h00, 1, 1, 0);  // INT2, shift leak
    run_layer(2, 12, 18, 2, 8'd30,  8'd1, 1, 3, 0);   // INT8, one full chunk
    // refused: 40 inputs x 6 words = 240 > 224 filter words
    wr(16'h0001, 32'd40);
    wr(16'h0002, 32'd6);
    wr(16'h0010, 32'h1);
    @(negedge clk); @(negedge clk);
    rd(16'h0011, d);
    chk(d[11] && d[10], "oversized layer refused");
    if (d[11]) n_refused++;
    $display("mechanisms: int2=%0d int4=%0d int8=%0d leak_const=%0d leak_shift=%0d sticky=%0d saturations=%0d fires=%0d chunks=%0d refused=%0d",
             n_int2, n_int4, n_int8, n_leak_const, n_leak_shift, n_sticky, n_sat, n_fire, n_chunks, n_refused);
    chk(n_int2 > 0 && n_int4 > 0 && n_int8 > 0, "all precisions used");
    chk(n_leak_const > 0 && n_leak_shift > 0 && n_sticky > 0, "all leak forms used");
    chk(n_sat > 0, "lane saturation occurred");
    chk(n_fire > 0, "neurons fired");
    chk(n_chunks > 4, "IFmap refilled in several chunks");
    chk(n_refused > 0, "refusal occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
