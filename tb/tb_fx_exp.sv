// tb_fx_exp: streams 2000 random arguments in [-18, 0] (plus the corners 0,
// -ln2 and a positive value) and compares with the real exp; tolerance is
// 4 LSB plus 2e-4 relative. Checks latency CORDIC_ITERS + 3 (the testbench count adds one).
module tb_fx_exp;
  import mppi_pkg::*;
  localparam int NS = 2000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t z = 0, e;
  logic [15:0] tag_in = 0, tag_out;
  real zz [NS];
  int checks = 0, failures = 0, cyc = 0, t_in = -1, t_out = -1, n_out = 0;
  always #5 clk = ~clk;
  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  always @(posedge clk) cyc++;

  fx_exp #(.TAG_W(16)) dut (.clk, .rst_n, .in_valid, .z, .tag_in, .out_valid, .e, .tag_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && cyc > 2) begin
    real ex;
    if (t_out < 0) t_out = cyc;
    ex = (zz[tag_out] > 0) ? 1.0 : $exp(zz[tag_out]);
    checks++;
    if (fabs(real'(e) / 65536.0 - ex) > 4.0 / 65536.0 + 2e-4 * ex) begin
      failures++;
      if (failures < 6) $display("exp(%f) = %f, expected %f", zz[tag_out], real'(e) / 65536.0, ex);
    end
    n_out++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      fx_t a;
      a = -fx_t'($urandom % (18 * 65536));
      if (n == 0) a = 0;
      if (n == 1) a = -FX_LN2;
      if (n == 2) a = 32'sd40000;
      if (n == 3) a = -32'sd1;
      zz[n] = real'(a) / 65536.0;
      @(negedge clk);
      in_valid = 1; z = a; tag_in = 16'(n);
      if (t_in < 0) t_in = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != NS) failures++;
    checks++;
    if (t_out - t_in != CORDIC_ITERS + 3 + 1) begin
      failures++;
      $display("latency %0d", t_out - t_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
