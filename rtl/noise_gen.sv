// noise_gen: Stage 1 of the MPPI pipeline. Generates the K*N Gaussian
// (steer, accel) perturbations of one iteration and writes them into one
// buffer of noise_bram, P pairs per clock.
//
// How it works: P identical lanes run in lock step. Each lane has two
// xorshift32 generators (distinct seeds) feeding a box_muller unit; the two
// normal samples are scaled by the configured standard deviations
// (Sigma_u is diagonal). A shared counter walks the local trajectory index j
// and time step t; the address j*N + t (plus the buffer offset) travels with
// the sample through the pipeline as its tag, so lane p writes trajectory
// k = p + P*j of bank p. `done` pulses once the last sample has been written.
//
// Interface: `start` with `wbuf` begins filling buffer wbuf (ignored while
// busy). The memory write port (wr_en, wr_addr, wr_data) connects to
// noise_bram. Throughput: K*N/P cycles per buffer plus the pipeline latency.
module noise_gen
  import mppi_pkg::*;
#(
  parameter int K = 1024,
  parameter int N = 64,
  parameter int P = 4,
  parameter logic [31:0] SEED = 32'h2545F491,
  localparam int D  = (K / P) * N,
  localparam int AW = $clog2(2 * D)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          wbuf,
  input  fx_t           sigma_steer,
  input  fx_t           sigma_accel,
  output logic          busy,
  output logic          done,
  output logic [P-1:0]  wr_en,
  output logic [AW-1:0] wr_addr,
  output ctrl_t         wr_data [P]
);
  logic          issuing;
  logic [AW-1:0] base, cnt;
  logic [AW:0]   written;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
      cnt     <= '0;
      base    <= '0;
      written <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        issuing <= 1'b1;
        cnt     <= '0;
        written <= '0;
        base    <= wbuf ? AW'(D) : '0;
      end else begin
        if (issuing) begin
          if (cnt == AW'(D - 1)) issuing <= 1'b0;
          cnt <= cnt + 1'b1;
        end
        if (wr_en[0]) begin
          written <= written + 1'b1;
          if (written == (AW+1)'(D - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  for (genvar p = 0; p < P; p++) begin : g_lane
    logic [31:0]   r1, r2;
    logic          bv;
    fx_t           zs, za;
    logic [AW-1:0] bt;

    xorshift32 #(.SEED(SEED ^ (32'(p + 1) * 32'h9E3779B9))) u_r1 (
      .clk, .rst_n, .en(issuing), .rnd(r1));
    xorshift32 #(.SEED(~SEED ^ (32'(p + 1) * 32'h85EBCA6B))) u_r2 (
      .clk, .rst_n, .en(issuing), .rnd(r2));

    box_muller #(.TAG_W(AW)) u_bm (
      .clk, .rst_n, .in_valid(issuing), .u1(r1), .u2(r2), .tag_in(base + cnt),
      .out_valid(bv), .z_steer(zs), .z_accel(za), .tag_out(bt));

    always_ff @(posedge clk) begin
      wr_en[p]         <= rst_n ? bv : 1'b0;
      wr_data[p].steer <= fx_mul(zs, sigma_steer);
      wr_data[p].accel <= fx_mul(za, sigma_accel);
      if (p == 0) wr_addr <= bt;
    end
  end
endmodule
