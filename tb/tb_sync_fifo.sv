// tb_sync_fifo: random push/pop traffic against a queue model; checks data
// order, count, empty and full, including the full and empty corners.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [15:0] din = 0, dout;
  logic empty, full;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [15:0] q [$];
  always #5 clk = ~clk;

  sync_fifo #(.W(16), .DEPTH(8)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bias;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 4000; n++) begin
      bias = (n / 500) % 2 ? 70 : 30;     // alternate filling and draining
      @(negedge clk);
      checks++;
      if (count != 4'(q.size()) || empty != (q.size() == 0) || full != (q.size() == 8)) begin
        failures++;
        if (failures < 5) $display("state mismatch: count %0d model %0d", count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) failures++;
      end
      push = ($urandom % 100) < bias && !full;
      pop  = ($urandom % 100) < (100 - bias) && !empty;
      din  = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
