// tb_spike_buffer: writes a random bit pattern to every address, then reads
// it back through the registered port (one-cycle latency checked) and the
// combinational host port, and checks overwrites.
module tb_spike_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic       we, wdata, rdata, host_rdata;
  logic [9:0] waddr, raddr, host_raddr;
  spike_buffer #(.DEPTH(1024)) dut (.*);
  int checks = 0, failures = 0;
  logic model [1024];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wdata = 0; waddr = 0; raddr = 0; host_raddr = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < 1024; a++) begin
        @(negedge clk); we = 1; waddr = 10'(a); wdata = $urandom; model[a] = wdata;
      end
      @(negedge clk); we = 0;
      for (int a = 0; a < 1024; a++) begin
        @(negedge clk); raddr = 10'(a); host_raddr = 10'(1023 - a);
        #1;
        checks++;
        if (host_rdata !== model[1023 - a]) failures++;
        @(posedge clk); #1;
        checks++;
        if (rdata !== model[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
