// tb_ring_fifo: random push/pop traffic against a queue model; checks data
// order, full/empty/count, that a push into a full ring is not accepted by the
// model (the testbench never pushes when full, as the assertion requires),
// and that the ring wraps many times and fills completely.
module tb_ring_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        push, pop, full, empty;
  logic [43:0] in_data, out_data;
  logic [4:0]  count;
  ring_fifo #(.WIDTH(44), .DEPTH(16)) dut (.*);
  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic [43:0] q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      int bias;
      @(negedge clk);
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == 16) || count !== 5'(q.size()) ||
          (q.size() > 0 && out_data !== q[0])) begin
        failures++;
        if (failures < 10) $display("MISMATCH cyc=%0d size=%0d count=%0d", cyc, q.size(), count);
      end
      if (full) fulls++;
      if (empty) empties++;
      bias = ((cyc / 500) % 2) ? 70 : 30;   // alternate filling and draining phases
      push = (($urandom % 100) < bias) && !full;
      pop  = (($urandom % 100) < 100 - bias) && !empty;
      in_data = {$urandom, $urandom};
      if (pop) void'(q.pop_front());
      if (push) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0 || empties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
