// tb_xorshift32: checks the generator against an independent software model
// of xorshift32 (13, 17, 5) for 2000 consecutive words, checks that it holds
// its value when not enabled, and that it delivers one new word per clock.
module tb_xorshift32;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  xorshift32 #(.SEED(32'h12345678)) dut (.clk, .rst_n, .en, .rnd);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] m;
    m = 32'h12345678;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    en <= 1;
    for (int n = 0; n < 2000; n++) begin
      #1;
      checks++;
      if (rnd !== m) begin
        failures++;
        if (failures < 5) $display("mismatch %0d: %h vs %h", n, rnd, m);
      end
      m ^= m << 13; m ^= m >> 17; m ^= m << 5;
      @(posedge clk);
    end
    en <= 0;
    @(posedge clk); #1;
    m = rnd;
    repeat (5) @(posedge clk);
    #1; checks++;
    if (rnd !== m) failures++;
    checks++;
    if (rnd == 32'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
