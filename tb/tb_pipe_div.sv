// tb_pipe_div: streams 2000 random signed Q16.16 divisions whose quotient
// fits in 24 bits and checks the exact truncated quotient computed with
// 64-bit integers; adds overflow and divide-by-zero cases that must
// saturate. Checks latency QBITS + 2.
module tb_pipe_div;
  import mppi_pkg::*;
  localparam int NS = 2000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t num = 0, den = 1, quo;
  logic [15:0] tag_in = 0, tag_out;
  longint en [NS];
  int checks = 0, failures = 0, cyc = 0, t_in = -1, t_out = -1, n_out = 0;
  always #5 clk = ~clk;
  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  always @(posedge clk) cyc++;

  pipe_div #(.QBITS(24), .TAG_W(16)) dut (.clk, .rst_n, .in_valid, .num, .den, .tag_in, .out_valid, .quo, .tag_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && cyc > 2) begin
    if (t_out < 0) t_out = cyc;
    checks++;
    if (longint'(quo) != en[tag_out]) begin
      failures++;
      if (failures < 6) $display("case %0d: %0d expected %0d", tag_out, quo, en[tag_out]);
    end
    n_out++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      longint a, b, q, an, bn;
      b = longint'($urandom % 32'h01000000) + 1;
      a = longint'($urandom % 32'h00400000);
      if ($urandom % 2) a = -a;
      if ($urandom % 2) b = -b;
      if (n == 0) begin a = 65536; b = 0; end
      if (n == 1) begin a = 32'h40000000; b = 1; end
      if (n == 2) begin a = -32'h40000000; b = 3; end
      an = (a < 0) ? -a : a;
      bn = (b < 0) ? -b : b;
      if (bn == 0 || (an << 16) / bn >= (64'sd1 << 24)) q = 2147483647;
      else q = (an << 16) / bn;
      if ((a < 0) != (b < 0)) q = -q;
      en[n] = q;
      @(negedge clk);
      in_valid = 1; num = fx_t'(a); den = fx_t'(b); tag_in = 16'(n);
      if (t_in < 0) t_in = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != NS) failures++;
    checks++;
    if (t_out - t_in != 26 + 1) begin
      failures++;
      $display("latency %0d", t_out - t_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
