// tb_neuron_memory: writes random spike rows for all 24 words, then reads
// every (word, engine) nibble back, then overwrites a few rows and re-checks.
module tb_neuron_memory;
  logic clk = 0;
  always #5 clk = ~clk;
  logic         we;
  logic [4:0]   waddr, host_word;
  logic [255:0] wdata;
  logic [5:0]   host_nce;
  logic [3:0]   host_rdata;
  neuron_memory #(.N_NCE(64), .VMEM_DEPTH(24)) dut (.*);
  int checks = 0, failures = 0;
  logic [255:0] model [24];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readback();
    for (int v = 0; v < 24; v++)
      for (int e = 0; e < 64; e++) begin
        host_word = 5'(v); host_nce = 6'(e); #1;
        checks++;
        if (host_rdata !== model[v][4*e +: 4]) failures++;
      end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; host_word = 0; host_nce = 0;
    for (int v = 0; v < 24; v++) begin
      @(negedge clk); we = 1; waddr = 5'(v);
      for (int w = 0; w < 8; w++) wdata[32*w +: 32] = $urandom;
      model[v] = wdata;
    end
    @(negedge clk); we = 0;
    readback();
    for (int i = 0; i < 5; i++) begin
      int v = $urandom % 24;
      @(negedge clk); we = 1; waddr = 5'(v);
      for (int w = 0; w < 8; w++) wdata[32*w +: 32] = $urandom;
      model[v] = wdata;
    end
    @(negedge clk); we = 0;
    readback();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
