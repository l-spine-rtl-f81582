// tb_map_record: checks the reset values, then writes random values to all
// eight registers and checks both the read-back word and the struct fields.
module tb_map_record;
  import lspine_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        we;
  logic [2:0]  addr;
  logic [31:0] wdata, rdata;
  layer_cfg_t  cfg;
  map_record dut (.*);
  int checks = 0, failures = 0;

  task automatic chk(bit cond);
    checks++;
    if (!cond) failures++;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(cfg.pc == PC_INT8 && cfg.n_inputs == 1 && cfg.n_vwords == 1 && cfg.timesteps == 1 && cfg.vth == 0);
    for (int it = 0; it < 50; it++) begin
      logic [31:0] v [8];
      for (int r = 0; r < 8; r++) begin
        v[r] = $urandom;
        if (r == 0) v[r] = $urandom % 3;
        @(negedge clk); we = 1; addr = 3'(r); wdata = v[r];
      end
      @(negedge clk); we = 0;
      for (int r = 0; r < 8; r++) begin
        int mask [8] = '{3, 'h7ff, 'h1f, 'hff, 'hff, 'hff, 'h1f, 'h1fff};
        addr = 3'(r); #1;
        chk(rdata == (v[r] & mask[r]));
      end
      chk(cfg.pc == prec_e'(v[0][1:0]) && cfg.n_inputs == v[1][10:0] && cfg.n_vwords == v[2][4:0] &&
          cfg.timesteps == v[3][7:0] && cfg.vth == v[4][7:0] && cfg.vleak == v[5][7:0] &&
          cfg.leak_shift == v[6][2:0] && cfg.leak_mode == v[6][3] && cfg.leak_sticky == v[6][4] &&
          cfg.n_load_words == v[7][12:0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
