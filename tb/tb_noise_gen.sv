// tb_noise_gen: small configuration (K=16, N=4, P=2). Fills buffer 1 and then
// buffer 0 and checks: every address of the buffer is written exactly once
// per bank; each written pair equals sigma * Box-Muller of the lane's two
// xorshift sequences, reproduced independently in the testbench (tolerance
// 3e-3 * sigma scale); P pairs are written per clock; `done` comes
// K*N/P + pipeline latency cycles after start.
module tb_noise_gen;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int K = 16, N = 4, P = 2;
  localparam int D = (K / P) * N;
  localparam int AW = $clog2(2 * D);
  localparam logic [31:0] SEED = 32'h2545F491;
  logic clk = 0, rst_n = 0, start = 0, wbuf = 0, busy, done;
  fx_t sigma_steer, sigma_accel;
  logic [P-1:0] wr_en;
  logic [AW-1:0] wr_addr;
  ctrl_t wr_data [P];
  int checks = 0, failures = 0, cyc = 0;
  int seen [P][2*D];
  int n_wr_cycles = 0;
  logic [31:0] s1 [P], s2 [P];
  int nsamp [P];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  noise_gen #(.K(K), .N(N), .P(P), .SEED(SEED)) dut (.clk, .rst_n, .start, .wbuf,
    .sigma_steer, .sigma_accel, .busy, .done, .wr_en, .wr_addr, .wr_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // samples are produced in address order, so the n-th write of a lane uses
  // the n-th words of its two generators
  always @(posedge clk) if (rst_n && cyc > 2 && wr_en != '0) begin
    n_wr_cycles++;
    for (int p = 0; p < P; p++) begin
      real es, ea;
      checks++;
      if (!wr_en[p]) failures++;
      seen[p][wr_addr]++;
      box_muller(s1[p], s2[p], es, ea);
      es *= r_of(sigma_steer); ea *= r_of(sigma_accel);
      checks++;
      if (fabs(r_of(wr_data[p].steer) - es) > 3e-3 || fabs(r_of(wr_data[p].accel) - ea) > 6e-3) begin
        failures++;
        if (failures < 6) $display("lane %0d addr %0d: %f %f expected %f %f", p, wr_addr,
          r_of(wr_data[p].steer), r_of(wr_data[p].accel), es, ea);
      end
      s1[p] = xs_next(s1[p]); s2[p] = xs_next(s2[p]);
    end
  end

  task automatic fill(input logic b);
    int t0, dur;
    @(negedge clk);
    start = 1; wbuf = b; t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    dur = cyc - t0;
    $display("buffer %0d filled in %0d cycles", b, dur);
    checks++;
    if (dur > D + 100 || dur < D) failures++;
  endtask

  initial begin
    sigma_steer = fx_of(0.3); sigma_accel = fx_of(2.0);
    for (int p = 0; p < P; p++) begin
      s1[p] = SEED ^ (32'(p + 1) * 32'h9E3779B9);
      s2[p] = ~SEED ^ (32'(p + 1) * 32'h85EBCA6B);
      for (int a = 0; a < 2 * D; a++) seen[p][a] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    fill(1'b1);
    fill(1'b0);
    for (int p = 0; p < P; p++)
      for (int a = 0; a < 2 * D; a++) begin
        checks++;
        if (seen[p][a] != 1) failures++;
      end
    checks++;
    if (n_wr_cycles != 2 * D) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
