// tb_workload_fc: the input layer of a small spiking fully connected
// classifier, at the largest size the default array holds: a 14 x 16 = 224
// pixel image, one membrane word per engine, so 64 neurons at INT8 or 256 at
// INT2. It is the slice of an MNIST-style spiking FC network that fits (a
// 28 x 28 image would need 784 inputs per neuron).
//
// Part 1 (INT8, classification): 16 synthetic classes on the 14 x 16 grid
// (classes 0-6 horizontal bands, 7-14 vertical bands, 15 the diagonal).
// Counted neuron k (engine k) gets weight +3 on the pixels of class k and -3
// elsewhere; the other 48 engines get random weights. For several test
// images (a class pattern at high intensity on a dim background) the winner
// read from the accelerator must be the class shown.
// Part 2 (INT2, 256 neurons): random weights, random image.
// In both parts every neuron's last-timestep spikes, the 16 counts, the
// winner and the run length are compared with a bit-exact model (LFSR
// encoder, saturating lane arithmetic, leak, threshold, reset).
module tb_workload_fc;
  import lspine_pkg::*;

  logic        clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        host_we, host_re, host_rvalid, irq_done;
  logic [15:0] host_addr;
  logic [31:0] host_wdata, host_rdata;

  lspine_top dut (.*);

  localparam int NE = 64;
  localparam int NI = 224;
  localparam int H  = 14;
  localparam int W  = 16;
  int checks = 0, failures = 0;

  logic [7:0]  m_filt [NE][224];
  logic [7:0]  m_v    [NE];
  logic [3:0]  m_spk  [NE];
  logic [7:0]  m_pix  [NI];
  int          m_cnt  [16];
  logic [15:0] m_lfsr = 16'hACE1;
  int          n_correct = 0, n_images = 0;

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

  // Pixel i (row i / W, column i % W) belongs to the pattern of class c.
  function automatic bit in_class(int c, int i);
    int r = i / W, col = i % W;
    if (c < 7)  return r / 2 == c;
    if (c < 15) return col / 2 == c - 7;
    return col == r || col == r + 1;
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

  task automatic config_layer(int p, int ts, logic [7:0] vth, logic [7:0] vleak);
    wr(16'h0000, 32'(p));
    wr(16'h0001, 32'(NI));
    wr(16'h0002, 32'd1);
    wr(16'h0003, 32'(ts));
    wr(16'h0004, 32'(vth));
    wr(16'h0005, 32'(vleak));
    wr(16'h0006, 32'd0);
    wr(16'h0007, 32'(NE * 56));
  endtask

  task automatic load_weights();
    logic [31:0] d;
    for (int e = 0; e < NE; e++)
      for (int g = 0; g < 56; g++)
        wr(16'h1000 + 16'(e * 56 + g),
           {m_filt[e][4*g+3], m_filt[e][4*g+2], m_filt[e][4*g+1], m_filt[e][4*g]});
    wr(16'h0010, 32'h2);
    do rd(16'h0011, d); while (!d[12]);
  endtask

  // Write the image, run, model and compare; returns the winner read back.
  task automatic run_image(int p, int ts, logic [7:0] vth, logic [7:0] vleak, output int winner);
    logic [31:0] d;
    int cyc, expect_cyc, chunks_sum, L;
    L = 4 >> p;
    for (int i = 0; i < NI; i++) wr(16'h2000 + 16'(i), 32'(m_pix[i]));
    @(negedge clk); host_we = 1; host_addr = 16'h0010; host_wdata = 32'h1;
    @(negedge clk); host_we = 0;
    cyc = 1;
    while (!irq_done) begin @(negedge clk); cyc++; end
    foreach (m_cnt[k]) m_cnt[k] = 0;
    for (int e = 0; e < NE; e++) m_v[e] = 0;
    for (int t = 0; t < ts; t++) begin
      logic s [NI];
      for (int i = 0; i < NI; i++) begin
        s[i] = m_pix[i] > m_lfsr[15:8];
        m_lfsr = {m_lfsr[14:0], m_lfsr[15] ^ m_lfsr[13] ^ m_lfsr[12] ^ m_lfsr[10]};
      end
      for (int e = 0; e < NE; e++) begin
        logic [7:0] u;
        int w;
        w = 2 << p;
        for (int i = 0; i < NI; i++)
          if (s[i]) m_v[e] = lane_op(m_v[e], m_filt[e][i], p, 0);
        u = lane_op(m_v[e], vleak, p, 1);
        m_spk[e] = '0;
        for (int l = 0; l < 8 / w; l++)
          if (sx((u >> (l * w)) & ((1 << w) - 1), w) >= sx((vth >> (l * w)) & ((1 << w) - 1), w)) begin
            m_spk[e][l] = 1'b1;
            u &= ~8'(((1 << w) - 1) << (l * w));
          end
        m_v[e] = u;
      end
      for (int k = 0; k < 16; k++)
        if (m_spk[k / L][k % L] && m_cnt[k] < 255) m_cnt[k]++;
    end
    for (int e = 0; e < NE; e++) begin
      rd(16'h4000 | 16'(e << 5), d);
      chk(d[3:0] == m_spk[e], $sformatf("spikes e=%0d got %b exp %b", e, d[3:0], m_spk[e]));
    end
    for (int k = 0; k < 16; k++) begin
      rd(16'h5000 | 16'(k), d);
      chk(d == 32'(m_cnt[k]), $sformatf("count %0d got %0d exp %0d", k, d, m_cnt[k]));
    end
    begin
      int mx = 0, wexp = 0;
      for (int k = 0; k < 16; k++) if (m_cnt[k] > mx) begin mx = m_cnt[k]; wexp = k; end
      rd(16'h5010, d);
      winner = int'(d);
      chk(winner == wexp, $sformatf("winner got %0d exp %0d", winner, wexp));
    end
    chunks_sum = 0;
    for (int b = 0; b < NI; b += 12) chunks_sum += ((NI - b > 12) ? 12 : NI - b) + 1;
    expect_cyc = 1 + ts * (1 + (NI + 1) + chunks_sum + NI + 1) + 2;
    chk(cyc == expect_cyc, $sformatf("run length %0d cycles, expected %0d", cyc, expect_cyc));
    $display("pc=%0d %0d inputs x %0d neurons, %0d timesteps: %0d cycles, winner %0d",
             p, NI, NE * L, ts, cyc, winner);
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int win;
    int shown [4] = '{2, 9, 15, 6};
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Part 1: INT8 template classifier.
    config_layer(2, 8, 8'd40, 8'd2);
    for (int e = 0; e < NE; e++)
      for (int i = 0; i < 224; i++)
        if (e < 16) m_filt[e][i] = in_class(e, i) ? 8'd3 : 8'hFD;
        else        m_filt[e][i] = 8'($urandom);
    load_weights();
    foreach (shown[n]) begin
      for (int i = 0; i < NI; i++)
        m_pix[i] = in_class(shown[n], i) ? 8'(220 + $urandom_range(0, 30)) : 8'($urandom_range(0, 20));
      run_image(2, 8, 8'd40, 8'd2, win);
      n_images++;
      if (win == shown[n]) n_correct++;
      chk(win == shown[n], $sformatf("class %0d shown, winner %0d", shown[n], win));
    end

    // Part 2: INT2, 256 neurons, random weights and image.
    config_layer(0, 4, 8'h55, 8'h00);
    for (int e = 0; e < NE; e++)
      for (int i = 0; i < 224; i++) m_filt[e][i] = 8'($urandom);
    load_weights();
    for (int i = 0; i < NI; i++) m_pix[i] = 8'($urandom);
    run_image(0, 4, 8'h55, 8'h00, win);

    $display("classified %0d of %0d images correctly", n_correct, n_images);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
