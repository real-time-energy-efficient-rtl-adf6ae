// tb_noise_bram: writes every bank of both buffers with distinct patterns
// (one write per bank per clock, all banks at once), then reads all addresses
// back with the one-cycle read latency and checks each bank's data.
module tb_noise_bram;
  import mppi_pkg::*;
  localparam int K = 16, N = 4, P = 4;
  localparam int DEPTH = 2 * (K / P) * N;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0;
  logic [P-1:0] wr_en = '0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  ctrl_t wr_data [P];
  ctrl_t rd_data [P];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  noise_bram #(.K(K), .N(N), .P(P)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  function automatic ctrl_t pat(int p, int a);
    ctrl_t c;
    c.steer = fx_t'(p * 1000 + a);
    c.accel = fx_t'(-(p * 1000 + a) * 7);
    return c;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en   = '1;
      wr_addr = AW'(a);
      for (int p = 0; p < P; p++) wr_data[p] = pat(p, a);
    end
    @(negedge clk);
    wr_en = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rd_addr = AW'(a);
      @(posedge clk); #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rd_data[p] !== pat(p, a)) failures++;
      end
    end
    // a write to one bank leaves the others alone
    @(negedge clk);
    wr_en = 4'b0010; wr_addr = 0;
    for (int p = 0; p < P; p++) wr_data[p] = '0;
    @(negedge clk);
    wr_en = '0; rd_addr = 0;
    @(posedge clk); #1;
    for (int p = 0; p < P; p++) begin
      checks++;
      if (rd_data[p] !== ((p == 1) ? ctrl_t'('0) : pat(p, 0))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
