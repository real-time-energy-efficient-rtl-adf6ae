// tb_bicycle_step: streams 2000 random states and controls (steering beyond
// the +-1.5 rad clamp included) back to back and compares every next state
// with the double-precision bicycle model (tolerance 2e-3); checks the
// DYN_LAT latency.
module tb_bicycle_step;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int NS = 2000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  state_t s_in, s_out;
  ctrl_t u_in;
  cfg_t cfg;
  logic [15:0] tag_in = 0, tag_out;
  rstate_t exp_s [NS];
  int checks = 0, failures = 0, cyc = 0, t_in = -1, t_out = -1, n_out = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  bicycle_step #(.TAG_W(16)) dut (.clk, .rst_n, .dt(cfg.dt), .inv_wheelbase(cfg.inv_wheelbase),
    .in_valid, .s_in, .u_in, .tag_in, .out_valid, .s_out, .tag_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && cyc > 2) begin
    rstate_t g, e;
    if (t_out < 0) t_out = cyc;
    g = rs_of(s_out);
    e = exp_s[tag_out];
    checks++;
    if (fabs(g.x - e.x) > 2e-3 || fabs(g.y - e.y) > 2e-3 || fabs(wrap(g.th - e.th)) > 2e-3 || fabs(g.v - e.v) > 2e-3) begin
      failures++;
      if (failures < 6) $display("step %0d: got %f %f %f %f exp %f %f %f %f", tag_out,
        g.x, g.y, g.th, g.v, e.x, e.y, e.th, e.v);
    end
    n_out++;
  end

  initial begin
    cfg = default_cfg();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      rstate_t r;
      r.x  = real'(int'($urandom % 4000) - 2000) / 100.0;
      r.y  = real'(int'($urandom % 4000) - 2000) / 100.0;
      r.th = real'(int'($urandom % 6283) - 3141) / 1000.0;
      r.v  = real'(int'($urandom % 1000) - 200) / 100.0;
      @(negedge clk);
      s_in = st_of(r);
      u_in.steer = fx_of(real'(int'($urandom % 3400) - 1700) / 1000.0);
      u_in.accel = fx_of(real'(int'($urandom % 1000) - 500) / 100.0);
      exp_s[n] = bicycle(rs_of(s_in), r_of(u_in.steer), r_of(u_in.accel), r_of(cfg.dt), r_of(cfg.inv_wheelbase));
      in_valid = 1; tag_in = 16'(n);
      if (t_in < 0) t_in = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (80) @(posedge clk);
    checks++;
    if (n_out != NS) failures++;
    checks++;
    if (t_out - t_in != DYN_LAT + 1) begin
      failures++;
      $display("latency %0d", t_out - t_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
