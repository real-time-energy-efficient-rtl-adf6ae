// tb_desired_state: N=6 steps over M=16 waypoints laid on a curve. The
// nominal controls turn and accelerate the car; the testbench rolls the same
// controls out with the double-precision bicycle model, finds the nearest
// waypoint for every step itself and checks that xref[0..N] hold exactly
// those waypoints. Runs twice from different start states and checks the
// run time ((N+1)*(M+2) + N*(DYN_LAT+1) cycles, +-10).
module tb_desired_state;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int N = 6, M = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_t cfg;
  logic wp_we = 0;
  logic [3:0] wp_addr = 0;
  state_t wp_data, x0;
  ctrl_t u_nom [N];
  state_t xref [N+1];
  rstate_t wps [M];
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  desired_state #(.N(N), .M(M)) dut (.clk, .rst_n, .cfg, .wp_we, .wp_addr, .wp_data,
    .start, .x0, .u_nom, .busy, .done, .xref);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input rstate_t s0);
    rstate_t s;
    int t0, best, dur;
    real bd, d;
    @(negedge clk);
    x0 = st_of(s0); start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    dur = cyc - t0;
    checks++;
    if (dur < (N+1)*(M+2) + N*(DYN_LAT+1) - 10 || dur > (N+1)*(M+2) + N*(DYN_LAT+1) + 10) begin
      failures++;
      $display("run took %0d cycles", dur);
    end
    s = rs_of(x0);
    for (int t = 0; t <= N; t++) begin
      best = 0; bd = 1e30;
      for (int m = 0; m < M; m++) begin
        d = (wps[m].x - s.x) ** 2 + (wps[m].y - s.y) ** 2;
        if (d < bd) begin bd = d; best = m; end
      end
      checks++;
      if (xref[t] !== st_of(wps[best])) begin
        failures++;
        $display("t=%0d: got waypoint (%f,%f), expected #%0d (%f,%f)", t, r_of(xref[t].x), r_of(xref[t].y),
          best, wps[best].x, wps[best].y);
      end
      if (t < N) s = bicycle(s, r_of(u_nom[t].steer), r_of(u_nom[t].accel), r_of(cfg.dt), r_of(cfg.inv_wheelbase));
    end
  endtask

  initial begin
    rstate_t s0;
    cfg = default_cfg();
    cfg.dt = fx_of(0.25);
    for (int t = 0; t < N; t++) begin
      u_nom[t].steer = fx_of(0.2);
      u_nom[t].accel = fx_of(1.0);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int m = 0; m < M; m++) begin
      // points on a circle of radius 3 m, plus a small offset so no ties
      wps[m].x = 3.0 * $sin(0.3 * m) + 0.013 * m;
      wps[m].y = 3.0 - 3.0 * $cos(0.3 * m);
      wps[m].th = 0.3 * m;
      wps[m].v = 2.0;
      wps[m] = rs_of(st_of(wps[m]));
      @(negedge clk);
      wp_we = 1; wp_addr = 4'(m); wp_data = st_of(wps[m]);
    end
    @(negedge clk);
    wp_we = 0;
    s0.x = 0.1; s0.y = 0.05; s0.th = 0.0; s0.v = 1.5;
    run(s0);
    s0.x = 2.0; s0.y = 0.7; s0.th = 0.6; s0.v = 0.5;
    run(s0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
