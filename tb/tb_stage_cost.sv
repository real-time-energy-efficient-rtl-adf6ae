// tb_stage_cost: N=4, G=4, 16 trajectories streamed in the rollout order
// (groups of G, step-major) with random states, controls and references.
// The cost FIFO is modelled with depth 8 and drained slowly, so the unit
// must hold back. Checks every total cost against the double-precision
// quadratic stage + terminal cost (tolerance 1e-4 relative + 2e-3), that each
// trajectory reports exactly once, and that the cost FIFO never overflows.
module tb_stage_cost;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int N = 4, G = 4, JD = 8, NT = 16;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  state_t xref [N+1];
  logic in_empty, in_pop, j_push;
  rec_t in_rec;
  logic [3:0] j_count;
  jcost_t j_data;
  rec_t inq [$];
  jcost_t jq [$];
  real expj [NT];
  int got [NT];
  int checks = 0, failures = 0, cyc = 0, n_hold = 0, n_j = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  stage_cost #(.N(N), .G(G), .JDEPTH(JD)) dut (.clk, .rst_n, .cfg, .xref, .in_empty, .in_rec, .in_pop,
    .j_count, .j_push, .j_data);

  assign in_empty = (inq.size() == 0);
  assign in_rec   = (inq.size() == 0) ? rec_t'('0) : inq[0];
  assign j_count  = 4'(jq.size());

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample the handshake at the edge, update the models just after it
  always @(posedge clk) if (rst_n) begin
    logic pop_s, push_s;
    jcost_t jd_s;
    pop_s = in_pop; push_s = j_push; jd_s = j_data;
    if (!in_empty && !in_pop) n_hold++;
    #1;
    if (pop_s) void'(inq.pop_front());
    if (push_s) begin
      if (jq.size() >= JD) begin
        failures++;
        $display("cost FIFO overflow");
      end
      jq.push_back(jd_s);
    end
    if (jq.size() > 0 && ($urandom % 4) == 0) begin
      jcost_t c;
      c = jq.pop_front();
      n_j++;
      checks++;
      if (c.j >= NT) failures++;
      else begin
        got[c.j]++;
        if (fabs(real'(c.cost) / 65536.0 - expj[c.j]) > 1e-4 * expj[c.j] + 2e-3) begin
          failures++;
          $display("J[%0d] = %f expected %f", c.j, real'(c.cost) / 65536.0, expj[c.j]);
        end
      end
    end
  end

  initial begin
    rstate_t xs [NT][N+1];
    ctrl_t us [NT][N];
    cfg = default_cfg();
    for (int t = 0; t <= N; t++) begin
      rstate_t r;
      r.x = 0.5 * t; r.y = 0.1 * t; r.th = 0.2 * t; r.v = 1.0;
      xref[t] = st_of(r);
    end
    for (int k = 0; k < NT; k++) begin
      got[k] = 0;
      for (int t = 0; t <= N; t++) begin
        xs[k][t].x  = r_of(fx_t'(int'($urandom % 262144) - 131072)) + 0.5 * t;
        xs[k][t].y  = r_of(fx_t'(int'($urandom % 262144) - 131072));
        xs[k][t].th = r_of(fx_t'(int'($urandom % 400000) - 200000));
        xs[k][t].v  = r_of(fx_t'(int'($urandom % 262144)));
        xs[k][t] = rs_of(st_of(xs[k][t]));
      end
      expj[k] = qform(xs[k][N], rs_of(xref[N]), cfg.qf);
      for (int t = 0; t < N; t++) begin
        us[k][t].steer = fx_t'(int'($urandom % 60000) - 30000);
        us[k][t].accel = fx_t'(int'($urandom % 200000) - 100000);
        expj[k] += qform(xs[k][t], rs_of(xref[t]), cfg.q)
                 + r_of(cfg.r.steer) * r_of(us[k][t].steer) ** 2 + r_of(cfg.r.accel) * r_of(us[k][t].accel) ** 2;
      end
    end
    for (int g = 0; g < NT / G; g++)
      for (int t = 0; t < N; t++)
        for (int i = 0; i < G; i++) begin
          rec_t r;
          int k;
          k = g * G + i;
          r.j = 16'(k); r.t = 16'(t);
          r.xt = st_of(xs[k][t]); r.xn = st_of(xs[k][t+1]); r.v = us[k][t];
          inq.push_back(r);
        end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (n_j < NT) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int k = 0; k < NT; k++) begin
      checks++;
      if (got[k] != 1) failures++;
    end
    $display("held back %0d cycles", n_hold);
    checks++;
    if (n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
