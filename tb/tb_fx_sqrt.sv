// tb_fx_sqrt: streams 2000 random Q16.16 radicands and checks the result is
// exactly floor(sqrt(a * 2^16)), using integer arithmetic in the testbench.
// Checks latency 25.
module tb_fx_sqrt;
  import mppi_pkg::*;
  localparam int NS = 2000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] a = 0;
  fx_t r;
  logic [15:0] tag_in = 0, tag_out;
  longint unsigned aa [NS];
  int checks = 0, failures = 0, cyc = 0, t_in = -1, t_out = -1, n_out = 0;
  always #5 clk = ~clk;
  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  always @(posedge clk) cyc++;

  fx_sqrt #(.TAG_W(16)) dut (.clk, .rst_n, .in_valid, .a, .tag_in, .out_valid, .r, .tag_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && cyc > 2) begin
    longint unsigned rad, rr;
    if (t_out < 0) t_out = cyc;
    rad = aa[tag_out] << 16;
    rr  = longint'(r);
    checks++;
    if (!(rr * rr <= rad && (rr + 1) * (rr + 1) > rad)) begin
      failures++;
      if (failures < 6) $display("sqrt(%0d) = %0d", aa[tag_out], rr);
    end
    n_out++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NS; n++) begin
      logic [31:0] v;
      v = $urandom >> ($urandom % 24);
      if (n == 0) v = 0;
      if (n == 1) v = 32'hffffffff;
      if (n == 2) v = 32'h00010000;
      aa[n] = longint'(v);
      @(negedge clk);
      in_valid = 1; a = v; tag_in = 16'(n);
      if (t_in < 0) t_in = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != NS) failures++;
    checks++;
    if (t_out - t_in != 25 + 1) begin
      failures++;
      $display("latency %0d", t_out - t_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
