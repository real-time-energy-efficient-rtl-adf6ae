// tb_box_muller: feeds 4000 random uniform pairs, compares every output pair
// with a double-precision Box-Muller on the same inputs (tolerance 3e-3), and
// checks the sample mean (|m| < 0.08) and variance (0.9..1.1) of both
// outputs, i.e. that they are standard normal.
module tb_box_muller;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int NS = 4000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] u1 = 1, u2 = 0;
  fx_t zs, za;
  logic [15:0] tag_in = 0, tag_out;
  logic [31:0] a1 [NS], a2 [NS];
  real ss = 0, sa = 0, qs = 0, qa = 0;
  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  box_muller #(.TAG_W(16)) dut (.clk, .rst_n, .in_valid, .u1, .u2, .tag_in,
    .out_valid, .z_steer(zs), .z_accel(za), .tag_out);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && cyc > 2) begin
    real es, ea;
    box_muller(a1[tag_out], a2[tag_out], es, ea);
    checks++;
    if (fabs(r_of(zs) - es) > 3e-3 || fabs(r_of(za) - ea) > 3e-3) begin
      failures++;
      if (failures < 6) $display("pair %0d: %f %f expected %f %f", tag_out, r_of(zs), r_of(za), es, ea);
    end
    ss += r_of(zs); sa += r_of(za); qs += r_of(zs) ** 2; qa += r_of(za) ** 2;
    n_out++;
  end

  initial begin
    logic [31:0] m1, m2;
    m1 = 32'hDEADBEEF; m2 = 32'h0BADF00D;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      m1 = xs_next(m1); m2 = xs_next(m2);
      a1[n] = m1; a2[n] = m2;
      @(negedge clk);
      in_valid = 1; u1 = m1; u2 = m2; tag_in = 16'(n);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (n_out != NS) failures++;
    begin
      real ms, ma, vs, va;
      ms = ss / NS; ma = sa / NS; vs = qs / NS - ms * ms; va = qa / NS - ma * ma;
      $display("steer mean %f var %f, accel mean %f var %f", ms, vs, ma, va);
      checks += 4;
      if (fabs(ms) > 0.08) failures++;
      if (fabs(ma) > 0.08) failures++;
      if (vs < 0.9 || vs > 1.1) failures++;
      if (va < 0.9 || va > 1.1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
