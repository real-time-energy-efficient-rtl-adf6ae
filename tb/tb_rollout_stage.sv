// tb_rollout_stage: K=128 trajectories, N=3 steps, P=2 lanes, G=64. The
// testbench models the noise memory (random contents, one-cycle read) and
// the FIFO occupancy. It computes all rollouts with the double-precision
// bicycle model and checks every streamed record: applied control exactly
// u_nom + noise, x_t and x_{t+1} within 5e-3, each (trajectory, step)
// exactly once. During the run it reports a full FIFO for 300 cycles and
// checks that the stage stalls and loses nothing. Also checks the run time
// (K*N/P + stall + latency).
module tb_rollout_stage;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int K = 128, N = 3, P = 2, G = 64, FD = 64;
  localparam int J = K / P, D = J * N, AW = $clog2(2 * D), CW = $clog2(FD) + 1;
  logic clk = 0, rst_n = 0, start = 0, rbuf = 1, busy, done, stall, out_valid;
  cfg_t cfg;
  state_t x0;
  ctrl_t u_nom [N];
  logic [AW-1:0] nz_raddr;
  ctrl_t nz_rdata [P];
  logic [CW-1:0] fifo_count [P];
  rec_t out_rec [P];
  ctrl_t nmem [P][2*D];
  rstate_t xr [K][N+1];
  int seen [K][N];
  int checks = 0, failures = 0, cyc = 0, n_stall = 0;
  logic hold = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  rollout_stage #(.K(K), .N(N), .P(P), .G(G), .FIFO_DEPTH(FD)) dut (.clk, .rst_n, .cfg, .start, .rbuf,
    .x0, .u_nom, .nz_raddr, .nz_rdata, .fifo_count, .busy, .done, .stall, .out_valid, .out_rec);

  always @(posedge clk) for (int p = 0; p < P; p++) nz_rdata[p] <= nmem[p][nz_raddr];
  always_comb for (int p = 0; p < P; p++) fifo_count[p] = hold ? CW'(FD) : '0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && cyc > 2) begin
    if (stall) n_stall++;
    if (out_valid) for (int p = 0; p < P; p++) begin
      int k, t;
      ctrl_t ev;
      rstate_t a, b;
      k = p + P * int'(out_rec[p].j);
      t = int'(out_rec[p].t);
      if (k >= K || t >= N) begin
        failures++;
      end else begin
        seen[k][t]++;
        ev.steer = u_nom[t].steer + nmem[p][D + int'(out_rec[p].j) * N + t].steer;
        ev.accel = u_nom[t].accel + nmem[p][D + int'(out_rec[p].j) * N + t].accel;
        checks++;
        if (out_rec[p].v !== ev) failures++;
        a = rs_of(out_rec[p].xt); b = rs_of(out_rec[p].xn);
        checks++;
        if (fabs(a.x - xr[k][t].x) > 5e-3 || fabs(a.y - xr[k][t].y) > 5e-3 || fabs(wrap(a.th - xr[k][t].th)) > 5e-3 ||
            fabs(b.x - xr[k][t+1].x) > 5e-3 || fabs(b.y - xr[k][t+1].y) > 5e-3 || fabs(wrap(b.th - xr[k][t+1].th)) > 5e-3 ||
            fabs(b.v - xr[k][t+1].v) > 5e-3) begin
          failures++;
          if (failures < 6) $display("k=%0d t=%0d: next (%f,%f,%f,%f) expected (%f,%f,%f,%f)", k, t,
            b.x, b.y, b.th, b.v, xr[k][t+1].x, xr[k][t+1].y, xr[k][t+1].th, xr[k][t+1].v);
        end
      end
    end
  end

  initial begin
    int t0, dur;
    cfg = default_cfg();
    cfg.dt = fx_of(0.1);
    x0.x = fx_of(1.0); x0.y = fx_of(-0.5); x0.th = fx_of(3.0); x0.v = fx_of(2.0);
    for (int t = 0; t < N; t++) begin
      u_nom[t].steer = fx_of(0.1 * t - 0.1);
      u_nom[t].accel = fx_of(0.5);
    end
    for (int p = 0; p < P; p++)
      for (int a = 0; a < 2 * D; a++) begin
        nmem[p][a].steer = fx_t'(int'($urandom % 40000) - 20000);
        nmem[p][a].accel = fx_t'(int'($urandom % 131072) - 65536);
      end
    for (int k = 0; k < K; k++) begin
      xr[k][0] = rs_of(x0);
      for (int t = 0; t < N; t++) begin
        ctrl_t w;
        seen[k][t] = 0;
        w = nmem[k % P][D + (k / P) * N + t];
        xr[k][t+1] = bicycle(xr[k][t], r_of(u_nom[t].steer + w.steer), r_of(u_nom[t].accel + w.accel),
                             r_of(cfg.dt), r_of(cfg.inv_wheelbase));
      end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    repeat (100) @(negedge clk);
    hold = 1;
    repeat (300) @(negedge clk);
    hold = 0;
    while (!done) @(negedge clk);
    dur = cyc - t0;
    $display("rollout took %0d cycles, stalled %0d", dur, n_stall);
    checks++;
    if (n_stall < 290) failures++;
    checks++;
    if (dur > K * N / P + n_stall + DYN_LAT + 10) failures++;
    for (int k = 0; k < K; k++)
      for (int t = 0; t < N; t++) begin
        checks++;
        if (seen[k][t] != 1) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
