// tb_cordic_sincos: streams 2000 random angles in [-pi, pi] back to back,
// compares sin and cos with the real-valued library functions (tolerance
// 2^-13) and checks the latency of CORDIC_ITERS + 2 clocks (counted from the cycle before the sampling edge, hence the +1).
module tb_cordic_sincos;
  import mppi_pkg::*;
  localparam int NS = 2000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t angle = 0, sin_o, cos_o;
  logic [15:0] tag_in = 0, tag_out;
  real ang [NS];
  int checks = 0, failures = 0, cyc = 0, t_first_in = -1, t_first_out = -1, n_out = 0;
  always #5 clk = ~clk;
  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  always @(posedge clk) cyc++;

  cordic_sincos #(.TAG_W(16)) dut (.clk, .rst_n, .in_valid, .angle, .tag_in, .out_valid, .sin_o, .cos_o, .tag_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && cyc > 2) begin
    real es, ec;
    if (t_first_out < 0) t_first_out = cyc;
    es = $sin(ang[tag_out]);
    ec = $cos(ang[tag_out]);
    checks += 2;
    if (fabs(real'(sin_o) / 65536.0 - es) > 1.25e-4 || fabs(real'(cos_o) / 65536.0 - ec) > 1.25e-4) begin
      failures++;
      if (failures < 6) $display("angle %f: sin %f (%f) cos %f (%f)", ang[tag_out],
                                 real'(sin_o) / 65536.0, es, real'(cos_o) / 65536.0, ec);
    end
    n_out++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      fx_t a;
      a = fx_t'(int'($urandom % 411774) - 205887);
      if (n == 0) a = FX_PI;
      if (n == 1) a = -FX_PI;
      if (n == 2) a = 0;
      ang[n] = real'(a) / 65536.0;
      @(negedge clk);
      in_valid = 1; angle = a; tag_in = 16'(n);
      if (t_first_in < 0) t_first_in = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != NS) failures++;
    checks++;
    if (t_first_out - t_first_in != SINCOS_LAT + 1) begin
      failures++;
      $display("latency %0d expected %0d", t_first_out - t_first_in, SINCOS_LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
