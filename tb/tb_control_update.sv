// tb_control_update: K=32 trajectories, N=4 steps, P=2 lanes, rbuf=1. Costs
// arrive through two modelled FIFOs in random order and with gaps; the noise
// memory is modelled with random contents and a one-cycle read. Checks the
// minimum cost, the weight sum, and every written control against a
// double-precision evaluation of u_t plus the moving average, over the last
// SW = 2 steps, of sum_k alpha_k w_t^k (tolerance 2e-3),
// that each step is written exactly once, and that the run after the last
// cost takes about K + K*N/P cycles plus pipeline latencies. Runs twice.
module tb_control_update;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int K = 32, N = 4, P = 2, SW = 2;
  localparam int J = K / P, D = J * N, AW = $clog2(2 * D);
  logic clk = 0, rst_n = 0, start = 0, rbuf = 1;
  fx_t inv_lambda;
  logic [P-1:0] j_empty, j_pop;
  jcost_t j_data [P];
  logic nz_own, u_we, busy, done;
  logic [AW-1:0] nz_raddr;
  ctrl_t nz_rdata [P];
  ctrl_t u_nom [N];
  logic [1:0] u_wt;
  ctrl_t u_wdata;
  cost_t jmin_o;
  fx_t wsum_o;
  ctrl_t nmem [P][2*D];
  jcost_t jq [P][$];
  int wr_seen [N];
  ctrl_t wr_val [N];
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  control_update #(.K(K), .N(N), .P(P), .SMOOTH_W(SW)) dut (.clk, .rst_n, .inv_lambda, .start, .rbuf,
    .j_empty, .j_data, .j_pop, .nz_own, .nz_raddr, .nz_rdata, .u_nom, .u_we, .u_wt, .u_wdata,
    .busy, .done, .jmin_o, .wsum_o);

  always @(posedge clk) for (int p = 0; p < P; p++) nz_rdata[p] <= nmem[p][nz_raddr];
  always_comb for (int p = 0; p < P; p++) begin
    j_empty[p] = (jq[p].size() == 0);
    j_data[p]  = (jq[p].size() == 0) ? jcost_t'('0) : jq[p][0];
  end

  always @(posedge clk) if (rst_n) begin
    logic [P-1:0] pop_s;
    pop_s = j_pop;
    if (u_we) begin
      wr_seen[u_wt]++;
      wr_val[u_wt] = u_wdata;
    end
    #1;
    for (int p = 0; p < P; p++) if (pop_s[p]) void'(jq[p].pop_front());
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real spread);
    real cost [K], w [K], s, mn, ds [N], da [N];
    int t0, dur, order [K];
    for (int k = 0; k < K; k++) begin
      cost[k] = r_of(fx_t'($urandom % 32'h7fffff)) * spread;
      cost[k] = real'(longint'(cost[k] * 65536.0)) / 65536.0;
    end
    for (int t = 0; t < N; t++) begin
      wr_seen[t] = 0;
      u_nom[t].steer = fx_of(0.1 * t);
      u_nom[t].accel = fx_of(-0.2 * t);
    end
    for (int p = 0; p < P; p++)
      for (int a = 0; a < 2 * D; a++) begin
        nmem[p][a].steer = fx_t'(int'($urandom % 40000) - 20000);
        nmem[p][a].accel = fx_t'(int'($urandom % 131072) - 65536);
      end
    mn = 1e30;
    for (int k = 0; k < K; k++) if (cost[k] < mn) mn = cost[k];
    s = 0;
    for (int k = 0; k < K; k++) begin
      w[k] = $exp(-(cost[k] - mn) * r_of(inv_lambda));
      s += w[k];
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    // deliver the costs lane by lane in trickles
    for (int k = 0; k < K; k++) order[k] = k;
    for (int k = K - 1; k > 0; k--) begin
      int r, tmp;
      r = $urandom % (k + 1);
      tmp = order[k]; order[k] = order[r]; order[r] = tmp;
    end
    for (int n = 0; n < K; n++) begin
      jcost_t c;
      int k;
      k = order[n];
      c.j = 16'(k / P);
      c.cost = cost_t'(longint'(cost[k] * 65536.0));
      jq[k % P].push_back(c);
      if ($urandom % 3 == 0) @(negedge clk);
    end
    t0 = cyc;
    while (!done) @(negedge clk);
    dur = cyc - t0;
    $display("update after last cost: %0d cycles", dur);
    checks++;
    if (dur > K + K * N / P + 120) failures++;
    checks++;
    if (fabs(real'(jmin_o) / 65536.0 - mn) > 1e-4) failures++;
    checks++;
    if (fabs(r_of(wsum_o) - s) > 1e-3 * K) begin
      failures++;
      $display("weight sum %f expected %f", r_of(wsum_o), s);
    end
    for (int t = 0; t < N; t++) begin
      ds[t] = 0; da[t] = 0;
      for (int k = 0; k < K; k++) begin
        ctrl_t nz;
        nz = nmem[k % P][D + (k / P) * N + t];
        ds[t] += w[k] / s * r_of(nz.steer);
        da[t] += w[k] / s * r_of(nz.accel);
      end
    end
    for (int t = 0; t < N; t++) begin
      real es, ea;
      int c;
      // causal moving average of the last SW updates
      es = 0; ea = 0; c = 0;
      for (int i = t; i >= 0 && i > t - SW; i--) begin
        es += ds[i]; ea += da[i]; c++;
      end
      es = r_of(u_nom[t].steer) + es / c;
      ea = r_of(u_nom[t].accel) + ea / c;
      checks += 2;
      if (wr_seen[t] != 1) failures++;
      if (fabs(r_of(wr_val[t].steer) - es) > 2e-3 || fabs(r_of(wr_val[t].accel) - ea) > 2e-3) begin
        failures++;
        $display("u[%0d] = (%f, %f) expected (%f, %f)", t, r_of(wr_val[t].steer), r_of(wr_val[t].accel), es, ea);
      end
    end
  endtask

  initial begin
    inv_lambda = fx_of(0.5);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run(1.0);
    run(0.1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
