// tb_leak_fsm: runs the timestep sequencer against models of the encoder
// (done n cycles after start, like the real encoder, new random spikes each timestep) and of the
// spike buffer (registered read). A model of the IFmap shift register checks
// that every INTEGRATE reads the spike of the input its filter address
// belongs to, that each (word, input) pair is integrated exactly once per
// timestep, that every word is cleared once and fired once per timestep, and
// that the timestep length is 1 + (n+1) + sum(len+1) + words*n + words
// cycles. Several layer shapes are run, including one that must be refused.
module tb_leak_fsm;
  import lspine_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, enc_start, enc_done, spike_shift, fire_valid, counter_clear, busy, done, cfg_err;
  layer_cfg_t cfg;
  logic [9:0] sb_raddr;
  nce_op_e    op;
  logic [4:0] vaddr, fire_word;
  logic [7:0] faddr, timestamp;
  logic [3:0] iaddr;

  leak_fsm #(.IFMAP_DEPTH(12), .FILT_DEPTH(224), .VMEM_DEPTH(24), .SB_AW(10)) dut (.*);

  int checks = 0, failures = 0;
  logic sbmem [1024];
  logic sb_rdata;
  logic [11:0] ifm;
  int enc_cnt = -1;

  // encoder and spike buffer models
  always_ff @(posedge clk) begin
    sb_rdata <= sbmem[sb_raddr];
    if (spike_shift) ifm <= {ifm[10:0], sb_rdata};
    enc_done <= 1'b0;
    if (enc_start) begin
      enc_cnt <= int'(cfg.n_inputs) - 1;
      for (int i = 0; i < 1024; i++) sbmem[i] <= 1'($urandom);
    end else if (enc_cnt > 0) enc_cnt <= enc_cnt - 1;
    else if (enc_cnt == 0) begin enc_done <= 1'b1; enc_cnt <= -1; end
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0d", what, $time);
    end
  endtask

  // operation monitor: samples the issued operation every cycle
  int mon_integ [24][224], mon_fire [24], mon_clear [24], t_fire0 [$];
  int now = 0, ts_seen = 0, bad_spike = 0, dup = 0;
  bit mon_on = 0;
  always @(posedge clk) begin
    now++;
    if (mon_on) begin
      if (op == NCE_CLEAR) mon_clear[vaddr]++;
      if (op == NCE_INTEGRATE) begin
        int in_idx;
        in_idx = int'(faddr) - int'(vaddr) * int'(cfg.n_inputs);
        if (in_idx < 0 || in_idx >= int'(cfg.n_inputs)) bad_spike++;
        else begin
          if (ifm[iaddr] !== sbmem[in_idx]) bad_spike++;
          mon_integ[vaddr][in_idx]++;
        end
      end
      if (op == NCE_FIRE) begin
        mon_fire[vaddr]++;
        if (vaddr == 0) t_fire0.push_back(now);
        // all integrations of this timestep must be complete before word 0 fires
        if (vaddr == 0) begin
          for (int v = 0; v < int'(cfg.n_vwords); v++)
            for (int i = 0; i < int'(cfg.n_inputs); i++)
              if (mon_integ[v][i] != 1) dup++;
          foreach (mon_integ[v, i]) mon_integ[v][i] = 0;
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int shapes [4][3] = '{'{5, 3, 3}, '{12, 18, 2}, '{30, 7, 3}, '{100, 2, 2}};
    start = 0; cfg = '0; ifm = '0;
    foreach (sbmem[i]) sbmem[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      int ni, nv, ts, chunks_sum, period;
      ni = shapes[s][0]; nv = shapes[s][1]; ts = shapes[s][2];
      foreach (mon_clear[v]) mon_clear[v] = 0;
      foreach (mon_fire[v]) mon_fire[v] = 0;
      foreach (mon_integ[v, i]) mon_integ[v][i] = 0;
      t_fire0.delete();
      bad_spike = 0; dup = 0;
      cfg = '{pc: PC_INT8, n_inputs: 11'(ni), n_vwords: 5'(nv), timesteps: 8'(ts), default: '0};
      mon_on = 1;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      mon_on = 0;
      chunks_sum = 0;
      for (int b = 0; b < ni; b += 12) chunks_sum += ((ni - b > 12) ? 12 : ni - b) + 1;
      period = 1 + (ni + 1) + chunks_sum + nv * ni + nv;
      chk(cfg_err === 1'b0, "config accepted");
      chk(bad_spike == 0, "integrate reads the right spike");
      chk(dup == 0, "each word/input integrated once per timestep");
      for (int v = 0; v < 24; v++) begin
        chk(mon_clear[v] == (v < nv ? 1 : 0), "clear once");
        chk(mon_fire[v] == (v < nv ? ts : 0), "fire once per timestep");
      end
      chk(t_fire0.size() == ts, "timesteps");
      for (int t = 1; t < t_fire0.size(); t++)
        chk(t_fire0[t] - t_fire0[t-1] == period, $sformatf("timestep length %0d/%0d", t_fire0[t] - t_fire0[t-1], period));
      chk(timestamp == 8'(ts), "timestamp");
    end
    // a layer that does not fit the filter scratchpad (20 x 12 > 224)
    cfg = '{pc: PC_INT8, n_inputs: 11'd20, n_vwords: 5'd12, timesteps: 8'd1, default: '0};
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    #1;
    chk(done === 1'b1 && cfg_err === 1'b1 && busy === 1'b0, "refused config");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
