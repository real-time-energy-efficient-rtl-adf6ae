// tb_mppi_top: end-to-end test of the whole accelerator at reduced size
// (K=256, N=8, P=2, G=64, M=64, two MPPI iterations per control step, cost
// FIFOs only 8 deep so that back-pressure occurs). Three closed-loop control
// steps against a behavioural vehicle model. After every iteration the
// updated control sequence and the minimum cost are compared with a
// double-precision MPPI iteration that uses the same noise samples (read
// from the noise memory) and the same waypoints. Counts and requires each
// mechanism: noise generation overlapping the other stages, noise buffer
// swaps, rollout stalls, cost-stage holds, cost FIFO use, iterations and
// actuator outputs with the sequence shift.
module tb_mppi_top;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int K = 256, N = 8, P = 2, M = 64, IT = 2, STEPS = 3,
                 SMOOTH_W = 4;  // the top's default smoothing window
  localparam int D = (K / P) * N;
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
  state_t wps [];
  ctrl_t noise [];
  ctrl_t nz_copy [P][2*D];
  ctrl_t u_snap [];
  state_t x_snap;
  logic rbuf_snap;
  int checks = 0, failures = 0, cyc = 0;
  int n_overlap = 0, n_stall = 0, n_hold = 0, n_iter = 0, n_act = 0, n_bufswap = 0, n_jfifo = 0;
  logic last_rbuf = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  mppi_top #(.K(256), .N(8), .P(2), .G(64), .M(64), .MAX_ITERS(2), .REC_DEPTH(64), .JDEPTH(8)) dut (
    .clk, .rst_n, .cfg, .wp_we, .wp_addr, .wp_data, .start, .x0, .busy, .u_act_valid, .u_act,
    .ng_busy, .ro_busy, .ro_stall, .cu_busy, .iter, .jmin, .wsum);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // snapshot the noise buffer contents (for the reference model)
  for (genvar p = 0; p < P; p++) begin : g_snap
    always @(posedge clk) if (rst_n && dut.ds_start)
      for (int a = 0; a < 2 * D; a++) nz_copy[p][a] = dut.u_nzmem.g_bank[p].mem[a];
  end

  // mechanism counters
  always @(posedge clk) if (rst_n && cyc > 2) begin
    if (ng_busy && (dut.u_ds.busy || ro_busy || cu_busy)) n_overlap++;
    if (ro_stall) n_stall++;
    if (dut.rbuf != last_rbuf) n_bufswap++;
    last_rbuf = dut.rbuf;
  end
  for (genvar p = 0; p < P; p++) begin : g_mon
    always @(posedge clk) if (rst_n && cyc > 2) begin
      if (!dut.g_lane[p].rf_empty && !dut.g_lane[p].rf_pop) n_hold++;
      if (dut.g_lane[p].jf_count > 0) n_jfifo++;
    end
  end

  // iteration check: reference model against the updated control sequence
  always @(posedge clk) if (rst_n && dut.ds_start) begin
    x_snap = dut.x0_q;
    rbuf_snap = dut.rbuf;
    u_snap = new[N];
    for (int t = 0; t < N; t++) u_snap[t] = dut.u_nom[t];
  end

  always @(posedge clk) if (rst_n && dut.cu_done) begin
    real us[], ua[], jm, err;
    @(negedge clk);
    noise = new[K * N];
    for (int k = 0; k < K; k++)
      for (int t = 0; t < N; t++)
        noise[k*N + t] = nz_copy[k % P][(rbuf_snap ? D : 0) + (k / P) * N + t];
    mppi_iter(cfg, x_snap, u_snap, wps, noise, K, N, us, ua, jm, SMOOTH_W);
    err = 0;
    for (int t = 0; t < N; t++) begin
      real e1, e2;
      e1 = fabs(r_of(dut.u_nom[t].steer) - us[t]);
      e2 = fabs(r_of(dut.u_nom[t].accel) - ua[t]);
      if (e1 > err) err = e1;
      if (e2 > err) err = e2;
    end
    n_iter++;
    $display("iteration %0d: Jmin %f (ref %f), u0 = (%f, %f) ref (%f, %f), max error %g", n_iter,
      real'(jmin) / 65536.0, jm, r_of(dut.u_nom[0].steer), r_of(dut.u_nom[0].accel), us[0], ua[0], err);
    checks += 2;
    // Q16.16 rollouts drift slightly from the double-precision model over
    // the horizon, hence the tolerances
    if (err > 5e-3) failures++;
    if (fabs(real'(jmin) / 65536.0 - jm) > 5e-3 * jm + 1e-2) failures++;
  end

  initial begin
    rstate_t plant;
    int t0;
    cfg = default_cfg();
    wps = new[M];
    for (int m = 0; m < M; m++) begin
      rstate_t r;
      // reference: a left-hand arc, 0.25 m between waypoints, at 2 m/s
      r.x = 8.0 * $sin(0.03125 * m); r.y = 8.0 - 8.0 * $cos(0.03125 * m);
      r.th = 0.03125 * m; r.v = 2.0;
      wps[m] = st_of(r);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int m = 0; m < M; m++) begin
      @(negedge clk);
      wp_we = 1; wp_addr = $clog2(M)'(m); wp_data = wps[m];
    end
    @(negedge clk);
    wp_we = 0;
    plant.x = 0.0; plant.y = 0.3; plant.th = 0.1; plant.v = 1.5;
    for (int s = 0; s < STEPS; s++) begin
      @(negedge clk);
      x0 = st_of(plant); start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!u_act_valid) @(negedge clk);
      n_act++;
      $display("control step %0d: %0d cycles, u = (%f, %f)", s, cyc - t0, r_of(u_act.steer), r_of(u_act.accel));
      checks++;
      if (u_act !== x_snap_u0()) failures++;
      // behavioural plant: apply the control for one step
      plant = bicycle(plant, r_of(u_act.steer), r_of(u_act.accel), r_of(cfg.dt), r_of(cfg.inv_wheelbase));
      @(negedge clk);
      // after the shift the sequence starts with the old u_1
      checks++;
      if (dut.u_nom[0] !== u_hold[1]) failures++;
    end
    $display("mechanisms: iterations %0d, control steps %0d, noise overlapping rollout/update %0d cycles, rollout stalls %0d, cost holds %0d, cost FIFO occupied %0d lane-cycles, buffer swaps %0d",
      n_iter, n_act, n_overlap, n_stall, n_hold, n_jfifo, n_bufswap);
    checks += 7;
    if (n_iter != STEPS * IT) failures++;
    if (n_act != STEPS) failures++;
    if (n_overlap == 0) failures++;
    if (n_stall == 0 && 1) failures++;
    if (n_hold == 0 && 1) failures++;
    if (n_jfifo == 0) failures++;
    if (n_bufswap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // control sequence as it was right before the actuator output
  ctrl_t u_hold [N];
  always @(posedge clk) if (!u_act_valid) for (int t = 0; t < N; t++) u_hold[t] <= dut.u_nom[t];
  function automatic ctrl_t x_snap_u0();
    return u_hold[0];
  endfunction
endmodule
