// tb_spike_encoder: loads pixels, encodes them for several timesteps and
// checks every spike against an independent LFSR model (x^16+x^14+x^13+x^11+1,
// top byte compared with the pixel), the address order, the cycle count
// (n pixels in n cycles) and the done pulse one cycle after the last pixel.
module tb_spike_encoder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        pix_we, start, sb_we, sb_wdata, busy, done;
  logic [9:0]  pix_waddr, sb_waddr;
  logic [7:0]  pix_wdata;
  logic [10:0] n_pix;
  spike_encoder #(.NPIX(1024), .SEED(16'hACE1)) dut (.*);
  int checks = 0, failures = 0;
  logic [7:0]  pix [1024];
  logic [15:0] lfsr = 16'hACE1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pix_we = 0; start = 0; pix_waddr = 0; pix_wdata = 0; n_pix = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 300; p++) begin
      @(negedge clk); pix_we = 1; pix_waddr = 10'(p);
      pix_wdata = (p == 0) ? 8'd0 : (p == 1) ? 8'd255 : 8'($urandom);
      pix[p] = pix_wdata;
    end
    @(negedge clk); pix_we = 0;
    for (int ts = 0; ts < 4; ts++) begin
      int n, cyc;
      n = 100 + ts * 60;
      @(negedge clk); start = 1; n_pix = 11'(n);
      @(negedge clk); start = 0;
      cyc = 0;
      for (int p = 0; p < n; p++) begin
        logic exp_s;
        exp_s = pix[p] > lfsr[15:8];
        checks++;
        if (!sb_we || sb_waddr !== 10'(p) || sb_wdata !== exp_s) begin
          failures++;
          if (failures < 10) $display("MISMATCH ts=%0d p=%0d we=%b addr=%0d s=%b/%b", ts, p, sb_we, sb_waddr, sb_wdata, exp_s);
        end
        lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (sb_we || !done || cyc != n) failures++;   // done one cycle after the last pixel
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
