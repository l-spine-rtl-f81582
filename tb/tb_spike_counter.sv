// tb_spike_counter: random spike patterns for word 0 (counted) and other
// words (ignored) in all three precisions; checks every counter against a
// model of the neuron mapping (neuron k = lane k%L of engine k/L), saturation
// at 255, clear, and the argmax winner with lowest-index tie break.
module tb_spike_counter;
  import lspine_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       clear, fire_valid;
  prec_e      pc;
  logic [4:0] fire_word;
  logic [3:0] spikes [64];
  logic [7:0] count  [16];
  logic [3:0] winner;
  spike_counter #(.N_NCE(64), .N_COUNT(16), .CNT_W(8), .VA_W(5)) dut (.*);
  int checks = 0, failures = 0, m [16];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; fire_valid = 0; pc = PC_INT2; fire_word = 0;
    foreach (spikes[e]) spikes[e] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 3; p++) begin
      @(negedge clk); clear = 1; pc = prec_e'(p);
      foreach (m[k]) m[k] = 0;
      @(negedge clk); clear = 0;
      for (int it = 0; it < (p == 2 ? 800 : 150); it++) begin
        int L, mx, wexp;
        fire_valid = ($urandom % 4 != 0);
        fire_word  = ($urandom % 3 == 0) ? 5'($urandom % 24) : 5'd0;
        foreach (spikes[e]) spikes[e] = 4'($urandom);
        if (p == 2) spikes[3][0] = 1'b1;   // neuron 3 always fires: reaches saturation
        L = 4 >> p;
        if (fire_valid && fire_word == 0)
          for (int k = 0; k < 16; k++)
            if (spikes[k / L][k % L] && m[k] < 255) m[k]++;
        @(negedge clk);
        mx = 0; wexp = 0;
        for (int k = 0; k < 16; k++) if (m[k] > mx) begin mx = m[k]; wexp = k; end
        for (int k = 0; k < 16; k++) begin
          checks++;
          if (count[k] !== 8'(m[k])) failures++;
        end
        checks++;
        if (winner !== 4'(wexp)) failures++;
      end
    end
    checks++;
    if (count[3] !== 8'd255) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
