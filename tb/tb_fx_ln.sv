// tb_fx_ln: streams 2000 random nonzero words (with random leading zeros, so
// the whole range down to 2^-32 is covered) and compares ln(u/2^32) with the
// real logarithm (tolerance 2e-4). Checks latency CORDIC_ITERS + 2.
module tb_fx_ln;
  import mppi_pkg::*;
  localparam int NS = 2000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] u = 1;
  fx_t ln_o;
  logic [15:0] tag_in = 0, tag_out;
  real uu [NS];
  int checks = 0, failures = 0, cyc = 0, t_in = -1, t_out = -1, n_out = 0;
  always #5 clk = ~clk;
  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  always @(posedge clk) cyc++;

  fx_ln #(.TAG_W(16)) dut (.clk, .rst_n, .in_valid, .u, .tag_in, .out_valid, .ln_o, .tag_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && cyc > 2) begin
    real ex;
    if (t_out < 0) t_out = cyc;
    ex = $ln(uu[tag_out] / 4294967296.0);
    checks++;
    if (fabs(real'(ln_o) / 65536.0 - ex) > 2e-4) begin
      failures++;
      if (failures < 6) $display("ln(%f) = %f, expected %f", uu[tag_out], real'(ln_o) / 65536.0, ex);
    end
    n_out++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      logic [31:0] a;
      a = $urandom >> ($urandom % 32);
      if (a == 0) a = 1;
      if (n == 0) a = 32'hffffffff;
      if (n == 1) a = 32'd1;
      if (n == 2) a = 32'h80000000;
      uu[n] = real'(a);
      @(negedge clk);
      in_valid = 1; u = a; tag_in = 16'(n);
      if (t_in < 0) t_in = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != NS) failures++;
    checks++;
    if (t_out - t_in != CORDIC_ITERS + 2 + 1) begin
      failures++;
      $display("latency %0d", t_out - t_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
