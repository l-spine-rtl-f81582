// tb_synaptic_core: fills the weight memory, reads it back, then runs a load
// of 150 words against a FIFO-full signal that is randomly asserted, and checks
// every pushed entry's data and its destination tags (engine k/56, group
// k%56), the number of pushes and the done pulse.
module tb_synaptic_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        host_we, start, fifo_push, fifo_full, busy, done;
  logic [11:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  logic [12:0] n_words;
  logic [43:0] fifo_data;
  synaptic_core #(.DEPTH(4096), .GROUPS(56), .SEL_W(6)) dut (.*);
  int checks = 0, failures = 0, pushes = 0, stalls = 0;
  logic [31:0] model [4096];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_we = 0; start = 0; host_addr = 0; host_wdata = 0; n_words = 0; fifo_full = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 300; a++) begin
      @(negedge clk); host_we = 1; host_addr = 12'(a); host_wdata = $urandom; model[a] = host_wdata;
    end
    @(negedge clk); host_we = 0;
    for (int a = 0; a < 300; a++) begin
      host_addr = 12'(a); #1;
      checks++;
      if (host_rdata !== model[a]) failures++;
    end
    @(negedge clk); start = 1; n_words = 13'd150;
    @(negedge clk); start = 0;
    while (pushes < 150) begin
      fifo_full = ($urandom % 4 == 0);
      #1;
      if (fifo_full) begin
        stalls++;
        checks++;
        if (fifo_push) failures++;
      end else begin
        checks++;
        if (!fifo_push || fifo_data !== {6'(pushes / 56), 6'(pushes % 56), model[pushes]}) begin
          failures++;
          if (failures < 10) $display("MISMATCH k=%0d push=%b data=%h", pushes, fifo_push, fifo_data);
        end
        pushes++;
      end
      @(negedge clk);
    end
    fifo_full = 0; #1;
    checks++;
    if (!done || fifo_push || busy || stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
