// tb_mppi_tracking: closed-loop racecar path tracking, the kind of task the
// accelerator is meant for. The whole design (mppi_top at K=256, N=16, P=4,
// G=64, M=128, one iteration per control step) drives a behavioural
// kinematic-bicycle car around closed tracks.
//
// Tracks: NTRACK smooth closed curves r(phi) = R0 (1 + a cos(2 phi + p) +
// b sin(3 phi + q)), sampled at M waypoints with tangent heading and a
// 2 m/s speed target. The shape coefficients come from a fixed xorshift
// stream, so every run sees the same "random" tracks. Each track is driven
// from NSTART start points spread around it, each starting 0.3 m off the
// path with a 0.1 rad heading error and 1 m/s speed. The design is reset
// between runs, so every run starts from a zero control sequence.
//
// Checks per run: every control step produces exactly one actuator output;
// the mean distance from the car to the path polyline is under 0.5 m and
// the largest under 1.5 m (success); the car covers at least half the
// distance the speed target asks for. It also reports the cycles per
// control step and the equivalent time at 200 MHz. The tracks, start
// points, step count and thresholds are this testbench's own choices.
module tb_mppi_tracking;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int K = 256, N = 16, P = 4, G = 64, M = 128;
  localparam int NTRACK = 5, NSTART = 4, STEPS = 120;
  localparam real R0 = 6.0, VREF = 2.0, PI = 3.141592653589793;

  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic wp_we = 0;
  logic [$clog2(M)-1:0] wp_addr = '0;
  state_t wp_data, x0;
  logic busy, u_act_valid, ng_busy, ro_busy, ro_stall, cu_busy;
  ctrl_t u_act;
  logic [15:0] iter;
  cost_t jmin;
  fx_t wsum;
  real wx [M], wy [M];
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  mppi_top #(.K(K), .N(N), .P(P), .G(G), .M(M), .MAX_ITERS(1)) dut (
    .clk, .rst_n, .cfg, .wp_we, .wp_addr, .wp_data, .start, .x0, .busy, .u_act_valid, .u_act,
    .ng_busy, .ro_busy, .ro_stall, .cu_busy, .iter, .jmin, .wsum);

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // distance from (x, y) to the closed waypoint polyline, and the index of
  // the nearest segment
  function automatic real path_dist(real x, real y, output int seg);
    real best, d, ax, ay, bx, by, l2, u, px, py;
    best = 1e300; seg = 0;
    for (int m = 0; m < M; m++) begin
      ax = wx[m]; ay = wy[m]; bx = wx[(m + 1) % M]; by = wy[(m + 1) % M];
      l2 = (bx - ax) ** 2 + (by - ay) ** 2;
      u = ((x - ax) * (bx - ax) + (y - ay) * (by - ay)) / l2;
      if (u < 0) u = 0;
      if (u > 1) u = 1;
      px = ax + u * (bx - ax); py = ay + u * (by - ay);
      d = $sqrt((x - px) ** 2 + (y - py) ** 2);
      if (d < best) begin best = d; seg = m; end
    end
    return best;
  endfunction

  task automatic make_track(input int tr, inout logic [31:0] rng);
    real a, b, p, q, phi, r, th;
    rng = xs_next(rng); a = 0.05 + 0.10 * real'(rng % 1000) / 1000.0;
    rng = xs_next(rng); b = 0.03 + 0.07 * real'(rng % 1000) / 1000.0;
    rng = xs_next(rng); p = 2.0 * PI * real'(rng % 1000) / 1000.0;
    rng = xs_next(rng); q = 2.0 * PI * real'(rng % 1000) / 1000.0;
    $display("track %0d: a = %f, b = %f", tr, a, b);
    for (int m = 0; m < M; m++) begin
      phi = 2.0 * PI * m / M;
      r = R0 * (1.0 + a * $cos(2.0 * phi + p) + b * $sin(3.0 * phi + q));
      wx[m] = r * $cos(phi);
      wy[m] = r * $sin(phi);
    end
    for (int m = 0; m < M; m++) begin
      rstate_t s;
      th = $atan2(wy[(m + 1) % M] - wy[(m + M - 1) % M], wx[(m + 1) % M] - wx[(m + M - 1) % M]);
      s.x = wx[m]; s.y = wy[m]; s.th = wrap(th); s.v = VREF;
      @(negedge clk);
      wp_we = 1; wp_addr = $clog2(M)'(m); wp_data = st_of(s);
    end
    @(negedge clk);
    wp_we = 0;
  endtask

  initial begin
    logic [31:0] rng;
    rng = 32'h1F2E3D4C;
    cfg = default_cfg();
    for (int tr = 0; tr < NTRACK; tr++) begin
      logic [31:0] rng_track;
      rng_track = rng;
      for (int st = 0; st < NSTART; st++) begin
        rstate_t plant;
        real th, dsum, dmax, d, travelled;
        int m0, seg, acts, t0, cyc_step, steps_done;
        // reset the design, then load the track
        @(negedge clk);
        rst_n = 0;
        repeat (3) @(negedge clk);
        rst_n = 1;
        rng = rng_track;  // same track for every start point
        make_track(tr, rng);
        m0 = st * M / NSTART;
        th = $atan2(wy[(m0 + 1) % M] - wy[m0], wx[(m0 + 1) % M] - wx[m0]);
        plant.x = wx[m0] - 0.3 * $sin(th);
        plant.y = wy[m0] + 0.3 * $cos(th);
        plant.th = wrap(th + 0.1);
        plant.v = 1.0;
        dsum = 0; dmax = 0; travelled = 0; acts = 0; cyc_step = 0; steps_done = 0;
        for (int s = 0; s < STEPS; s++) begin
          @(negedge clk);
          x0 = st_of(plant); start = 1; t0 = cyc;
          @(negedge clk);
          start = 0;
          while (!u_act_valid) @(negedge clk);
          acts++;
          cyc_step = cyc - t0;
          plant = bicycle(plant, r_of(u_act.steer), r_of(u_act.accel), r_of(cfg.dt), r_of(cfg.inv_wheelbase));
          travelled += fabs(plant.v) * r_of(cfg.dt);
          d = path_dist(plant.x, plant.y, seg);
          dsum += d;
          if (d > dmax) dmax = d;
          steps_done++;
          @(negedge clk);
          if (u_act_valid) acts++;  // a second output would be an error
        end
        $display("track %0d start %0d: mean distance %f m, max %f m, travelled %f m, final speed %f m/s, %0d cycles per step (%f ms at 200 MHz)",
          tr, st, dsum / steps_done, dmax, travelled, plant.v, cyc_step, cyc_step / 200.0e3);
        checks += 4;
        if (acts != STEPS) failures++;
        if (dsum / steps_done > 0.5) failures++;
        if (dmax > 1.5) failures++;
        if (travelled < 0.5 * VREF * STEPS * r_of(cfg.dt)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
